// mic_top: four coupled 8T compute-in-SRAM arrays (A1-A4, index 0-3) that
// digitize their own multiply-average outputs without a dedicated ADC.
//
// Any array can compute the scalar product of a stored weight row and one input
// bit plane; the product is left as a voltage on its sum line (V_MAV). A
// neighbouring array then acts as a capacitive DAC: its precharge array sets k of
// its 32 column lines to VDD, its sum line merges them into k/32 VDD, and a
// clocked comparator compares the two sum lines. The digitization controller
// steps k through a search, so the pair forms a 5-bit SAR ADC. With A1 computing
// and A2, A3, A4 each holding a different reference, three comparators resolve
// two bits in one cycle (Flash); hybrid mode does that first and finishes with
// A2 alone in SAR mode.
//
//   SAR      A1 computes and A2 digitizes (cim_sel = 0), or the reverse; with alt
//            set the pair swaps roles after each pass over the bit planes.
//   FLASH    A1 computes, A2-A4 give references on comparators 0-2: 2-bit result.
//   HYBRID   Flash cycle, then SAR with A2 on comparator 0.
//
// Interface: a word-wide write/read port into any array's SRAM, an input-vector
// load, the scan chain carrying the configuration (mic_pkg::cfg_t), a start
// strobe with the weight row, and a result stream (out_valid, out_code, the bit
// plane and the computing array). cmp_out mirrors the three comparator outputs
// and act_flash/act_sar flag Flash and SAR cycles, like the chip's probe pins.
// Timing per bit plane: one MAV cycle, ncmp comparison cycles (5 for symmetric
// SAR, 1 for Flash, 1 + 3 for symmetric hybrid), one cycle to hand over.
//
// NBITS (default 5, the chip's precision) may be lowered: each LSB is then
// LPB = COLS / 2^NBITS column lines, the reference for code k precharges k*LPB
// lines, and the 5-bit pivot in the configuration is scaled to the same
// fraction of VDD. Hybrid conversion then takes 1 + (NBITS-2) cycles.
//
// NDP (default 1, the test chip) sets the number of dot-product arrays; the
// reference arrays follow them (index NDP .. NDP+2), so A2-A4 are 1-3 at NDP = 1.
// With NDP = 3 the design is the CiM network of the hybrid scheme: all
// dot-product arrays compute their MAV in the same cycle, then take turns on the
// three shared reference arrays for one Flash cycle each (the waiting
// controllers are stalled with hold), and then run their SAR cycles in
// parallel, dot-product array i with reference array NDP+i on comparator i.
// Pair i is (array i, array NDP+i); cim_sel/alt swap the roles of every pair.
// out_code/out_ncmp report pair 0, out_codes all pairs.
//
// The sum lines, comparators and analog mux are behavioural models of analog
// parts; all else is synthesizable logic. The array count and size, the coupling
// pattern and the modes follow the paper's test chip; the port list beyond the
// chip's named pins is this design's own.
module mic_top #(
  parameter int unsigned ROWS  = mic_pkg::ROWS,
  parameter int unsigned COLS  = mic_pkg::COLS,
  parameter int unsigned IBITS = mic_pkg::IBITS,
  parameter int unsigned NBITS = mic_pkg::NBITS,
  parameter int unsigned NDP   = 1,               // dot-product arrays
  localparam int unsigned NREF = mic_pkg::NREF,
  localparam int unsigned NA   = NDP + NREF,      // arrays in all
  localparam int unsigned LPB  = COLS >> NBITS,   // column lines per LSB
  localparam int unsigned RW   = $clog2(ROWS),
  localparam int unsigned AW   = $clog2(NA),
  localparam int unsigned PW   = (IBITS > 1) ? $clog2(IBITS) : 1,
  localparam int unsigned KW   = $clog2(COLS + 1),
  localparam int unsigned CNTW = $clog2(2 * NBITS + 1),
  localparam int unsigned TW   = (NDP > 1) ? $clog2(NDP) : 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // SRAM port
  input  logic                       wr_en,
  input  logic [AW-1:0]              wr_arr,
  input  logic [RW-1:0]              wr_row,
  input  logic [COLS-1:0]            wr_data,
  input  logic [AW-1:0]              rd_arr,
  input  logic [RW-1:0]              rd_row,
  output logic [COLS-1:0]            rd_data,
  // input vector
  input  logic                       in_load,
  input  logic [COLS-1:0][IBITS-1:0] in_data,
  // scan chain
  input  logic                       scan_shift,
  input  logic                       scan_in,
  input  logic                       scan_update,
  output logic                       scan_out,
  // operation
  input  logic                       start,
  input  logic [RW-1:0]              row,
  output logic                       busy,
  output logic                       done,
  output logic                       out_valid,
  output logic [NBITS-1:0]           out_code,
  output logic [NDP-1:0][NBITS-1:0]  out_codes,
  output logic [PW-1:0]              out_plane,
  output logic                       out_arr,
  output logic [CNTW-1:0]            out_ncmp,
  output logic                       swapped,
  // probes
  output logic [NREF-1:0]            cmp_out,
  output logic                       act_flash,
  output logic                       act_sar
);

  // The DAC steps by whole column lines (LPB per LSB), the Flash stage needs at
  // least one SAR bit below it, and every pair needs its own comparator.
  initial assert (LPB >= 1 && COLS == (LPB << NBITS) && NBITS > mic_pkg::FLASH_BITS
                  && NDP >= 1 && NDP <= NREF)
    else $error("mic_top: COLS must be a multiple of 2**NBITS, NBITS > FLASH_BITS, 1 <= NDP <= 3");

  // ---------------------------------------------------------------- config
  logic [mic_pkg::CFG_W-1:0] cfg_bits;
  mic_pkg::cfg_t             cfg;

  scan_chain #(.W(mic_pkg::CFG_W)) u_scan (
    .clk, .rst_n, .shift(scan_shift), .scan_in, .update(scan_update),
    .scan_out, .cfg(cfg_bits)
  );
  assign cfg = mic_pkg::cfg_t'(cfg_bits);

  // ---------------------------------------------------------------- flow
  logic          compute, comp_arr, adc_start, adc_done;
  logic [RW-1:0] row_q;
  logic [PW-1:0] plane;

  // per pair: controller signals
  logic [NDP-1:0]                       c_done, c_seen, c_hold, c_fl, c_sar;
  logic [NDP-1:0][NBITS-1:0]            c_code;
  logic [NDP-1:0][CNTW-1:0]             c_ncmp;
  logic [NDP-1:0][NREF-1:0]             c_ref_en, c_cmp_en, c_cmp_in;
  logic [NDP-1:0][NREF-1:0][NBITS-1:0]  c_ref_code;

  flow_mapper #(.ROWS(ROWS), .IBITS(IBITS), .NBITS(NBITS)) u_map (
    .clk, .rst_n, .start, .row, .mode(cfg.mode), .cim_sel(cfg.cim_sel), .alt(cfg.alt),
    .compute, .comp_arr, .row_q, .plane,
    .adc_start, .adc_done, .adc_code(c_code[0]),
    .out_valid, .out_code, .out_plane, .out_arr,
    .busy, .done, .swapped
  );

  // A bit plane is digitized when every pair's controller has finished.
  assign adc_done = (|c_done) && (&(c_seen | c_done));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_seen    <= '0;
      out_ncmp  <= '0;
      out_codes <= '0;
    end else begin
      c_seen <= adc_start ? '0 : (c_seen | c_done);
      if (c_done[0]) out_ncmp <= c_ncmp[0];
      for (int i = 0; i < NDP; i++)
        if (c_done[i]) out_codes[i] <= c_code[i];
    end
  end

  // Flash turns: after the MAV cycle, pair i gets the three reference arrays in
  // the i-th cycle; the other controllers are held meanwhile.
  logic          fl_phase;
  logic [TW-1:0] turn;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fl_phase <= 1'b0;
      turn     <= '0;
    end else if (adc_start) begin
      fl_phase <= (NDP > 1) && (cfg.mode != mic_pkg::MODE_SAR);
      turn     <= '0;
    end else if (fl_phase) begin
      if (int'(turn) == NDP - 1) fl_phase <= 1'b0;
      turn <= turn + 1'b1;
    end
  end

  // ---------------------------------------------------------------- controllers
  logic [NBITS-1:0] pivot;

  // The configured pivot is a 5-bit fraction of VDD; keep that fraction at NBITS.
  assign pivot = NBITS'((int'(cfg.pivot) << NBITS) >> mic_pkg::NBITS);

  // Array that computes and array that digitizes, per pair.
  logic [NDP-1:0][AW-1:0] cim_of, part_of;

  for (genvar i = 0; i < NDP; i++) begin : g_pair
    assign cim_of[i]  = comp_arr ? AW'(NDP + i) : AW'(i);
    assign part_of[i] = comp_arr ? AW'(i) : AW'(NDP + i);
    assign c_hold[i]  = fl_phase && (int'(turn) != i);

    dig_controller #(.NBITS(NBITS), .FLASH_BITS(mic_pkg::FLASH_BITS), .NLINES(COLS)) u_ctrl (
      .clk, .rst_n, .start(adc_start), .hold(c_hold[i]),
      .mode(cfg.mode), .asym(cfg.asym), .pivot,
      .ref_en(c_ref_en[i]), .ref_code(c_ref_code[i]), .cmp_en(c_cmp_en[i]),
      .cmp_out(c_cmp_in[i]),
      .busy(), .done(c_done[i]), .code(c_code[i]), .ncmp(c_ncmp[i]),
      .act_flash(c_fl[i]), .act_sar(c_sar[i])
    );

    // Flash decisions come from all comparators, a SAR decision from comparator i.
    always_comb begin
      c_cmp_in[i] = '0;
      if (c_fl[i]) c_cmp_in[i] = cmp_out;
      else         c_cmp_in[i][0] = cmp_out[i];
    end
  end

  assign act_flash = |c_fl;
  assign act_sar   = |c_sar;

  // ---------------------------------------------------------------- shared row/input
  logic [ROWS-1:0] rl;
  logic [COLS-1:0] il;

  weight_row_selector #(.ROWS(ROWS)) u_rows (.en(compute), .row(row_q), .rl);

  bitplane_input #(.COLS(COLS), .IBITS(IBITS)) u_in (
    .clk, .rst_n, .load(in_load), .x(in_data), .apply(compute), .plane, .il
  );

  // ---------------------------------------------------------------- arrays
  mic_pkg::volt_t  sl  [NA];
  logic [COLS-1:0] rdd [NA];

  for (genvar a = 0; a < NA; a++) begin : g_arr
    logic            is_cim, is_ref;
    logic [1:0]      nclaim;
    logic [KW-1:0]   k;
    logic [COLS-1:0] pch, cl;

    // Role of this array in this cycle. A reference of a Flash cycle r goes to
    // array NDP+r, a SAR reference to the pair's partner.
    always_comb begin
      is_cim = 1'b0;
      is_ref = 1'b0;
      nclaim = '0;
      k      = '0;
      for (int i = 0; i < NDP; i++) begin
        if (compute && cim_of[i] == AW'(a)) is_cim = 1'b1;
        for (int r = 0; r < NREF; r++) begin
          if (c_ref_en[i][r] && (c_fl[i] ? AW'(NDP + r) : part_of[i]) == AW'(a)) begin
            is_ref = 1'b1;
            if (nclaim != 2'd3) nclaim = nclaim + 1'b1;
            k      = KW'(int'(c_ref_code[i][r]) * LPB);
          end
        end
      end
    end

    // The Flash turns keep two controllers from using one reference array.
    a_one_owner: assert property (@(posedge clk) disable iff (!rst_n) nclaim <= 2'd1);

    cl_precharge #(.COLS(COLS)) u_pch (.compute(is_cim), .dac(is_ref), .k, .pch);

    cim_array_8t #(.ROWS(ROWS), .COLS(COLS)) u_arr (
      .clk,
      .wr_en(wr_en && wr_arr == AW'(a)), .wr_row, .wr_data,
      .rd_row, .rd_data(rdd[a]),
      .rl(is_cim ? rl : '0), .il(is_cim ? il : '0), .pch, .cl
    );

    sum_line #(.COLS(COLS)) u_sl (
      .clk, .rst_n, .merge(is_cim || is_ref), .clear(1'b0), .cl, .v_sl(sl[a])
    );
  end

  assign rd_data = rdd[rd_arr];

  // ---------------------------------------------------------------- comparators
  // Comparator j: in a Flash cycle of pair i it compares pair i's computing
  // array with reference array NDP+j; in a SAR cycle of pair j it compares that
  // pair's two arrays.
  logic [NREF-1:0][AW-1:0] pos_sel, neg_sel;
  logic [NREF-1:0]         cmp_en;
  mic_pkg::volt_t          cmp_pos [NREF];
  mic_pkg::volt_t          cmp_neg [NREF];

  always_comb begin
    for (int j = 0; j < NREF; j++) begin
      pos_sel[j] = cim_of[0];
      neg_sel[j] = AW'(NDP + j);
      cmp_en[j]  = 1'b0;
      for (int i = 0; i < NDP; i++) begin
        if (c_fl[i]) begin
          pos_sel[j] = cim_of[i];
          cmp_en[j]  = c_cmp_en[i][j];
        end else if (i == j && c_sar[i]) begin
          pos_sel[j] = cim_of[i];
          neg_sel[j] = part_of[i];
          cmp_en[j]  = c_cmp_en[i][0];
        end
      end
    end
  end

  analog_mux #(.NARR(NA), .NCMP(NREF)) u_amux (
    .sl, .pos_sel, .neg_sel, .cmp_pos, .cmp_neg
  );

  for (genvar j = 0; j < NREF; j++) begin : g_cmp
    comparator u_cmp (.cmp(cmp_en[j]), .in1(cmp_pos[j]), .in2(cmp_neg[j]), .out(cmp_out[j]));
  end

endmodule
