// mic_pkg: constants and types shared by the memory-immersed digitization design.
//
// The design couples small 8T compute-in-SRAM arrays so that one array's column
// lines act as the capacitive DAC that digitizes the multiply-average (MAV)
// voltage computed by a neighbouring array. Analog quantities (column-line and
// sum-line voltages) are carried as unsigned fixed-point numbers of type volt_t:
// a value of VFS stands for the supply VDD and 0 for ground.
//
// From the paper: four arrays of 16 rows x 32 columns, a 5-bit conversion, a
// 2-bit Flash stage fed by three reference arrays, and the asymmetric-search
// pivot of 0.75 VDD (code 24 = 5'b11000). This design's own choices: the input
// precision of 4 bits, the voltage resolution VW, the mode encoding and the
// layout of the configuration word.
package mic_pkg;

  // Array geometry of the test chip (16 x 32 per array, arrays A1-A4).
  localparam int unsigned ROWS  = 16;
  localparam int unsigned COLS  = 32;
  localparam int unsigned NARR  = 4;

  // Conversion resolution and Flash stage.
  localparam int unsigned NBITS      = 5;
  localparam int unsigned FLASH_BITS = 2;
  localparam int unsigned NREF       = (1 << FLASH_BITS) - 1;  // reference arrays / comparators

  // Bit-plane input precision (assumed; the paper applies one input bit plane per cycle).
  localparam int unsigned IBITS = 4;

  // Fixed-point voltage: VFS represents VDD.
  localparam int unsigned VW  = 10;
  localparam int unsigned VFS = 1 << VW;
  typedef logic [VW:0] volt_t;

  // Default pivot of the asymmetric search: 0.75 VDD = 24/32 (Q2 = 11000).
  localparam logic [NBITS-1:0] PIVOT_DEFAULT = 5'd24;

  typedef enum logic [1:0] {
    MODE_SAR    = 2'd0,   // successive approximation with one reference array
    MODE_FLASH  = 2'd1,   // one comparison cycle with NREF reference arrays
    MODE_HYBRID = 2'd2    // Flash for the first bits, then SAR for the rest
  } adc_mode_e;

  // Configuration word held in the scan chain.
  typedef struct packed {
    adc_mode_e        mode;     // digitization scheme
    logic             asym;     // 1: asymmetric search around pivot
    logic [NBITS-1:0] pivot;    // asymmetric-search pivot code
    logic             cim_sel;  // SAR pairing: 0 = A1 computes, A2 digitizes; 1 = swapped
    logic             alt;      // SAR pairing: swap roles after every pass over the bit planes
  } cfg_t;

  localparam int unsigned CFG_W = $bits(cfg_t);

  localparam cfg_t CFG_DEFAULT = '{mode: MODE_SAR, asym: 1'b0, pivot: PIVOT_DEFAULT,
                                   cim_sel: 1'b0, alt: 1'b0};

endpackage
