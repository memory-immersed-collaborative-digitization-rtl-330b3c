// bitplane_input: bit-plane-wise input application for the input lines (IL).
//
// The CiM arrays take no analog input DAC: a multi-bit input vector is applied
// one bit plane per operating cycle, each IL carrying one bit of one input
// element. This block stores an input vector of COLS elements of IBITS bits
// (load) and, while apply is high, drives IL with bit `plane` of every element;
// otherwise the input lines are low.
//
// Input precision IBITS and the load port are this design's choices; the paper
// only states that inputs are bit-sliced to one bit per cycle.
// Timing: load is synchronous; the IL output is combinational from plane/apply.
module bitplane_input #(
  parameter int unsigned COLS  = mic_pkg::COLS,
  parameter int unsigned IBITS = mic_pkg::IBITS,
  localparam int unsigned PW   = (IBITS > 1) ? $clog2(IBITS) : 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       load,
  input  logic [COLS-1:0][IBITS-1:0] x,       // x[j] is the input of column j
  input  logic                       apply,
  input  logic [PW-1:0]              plane,
  output logic [COLS-1:0]            il
);

  logic [COLS-1:0][IBITS-1:0] xr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    xr <= '0;
    else if (load) xr <= x;
  end

  always_comb begin
    for (int j = 0; j < COLS; j++) il[j] = apply && xr[j][plane];
  end

endmodule
