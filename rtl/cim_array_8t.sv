// cim_array_8t: one 8T compute-in-SRAM array (ROWS x COLS), modelled at the
// level of its column lines.
//
// Each cell is a 6T SRAM bit plus a two-transistor product port. The 6T part is
// written and read through a conventional word-wide port (wr_*/rd_*). The product
// port works on the column lines (CL): the column-line precharge array first sets
// every CL (pch), then the selected row line (RL, one-hot) and the vertical input
// lines (IL) evaluate, and a CL discharges to ground exactly when the stored bit
// of the selected row and its input bit are both 1. The resulting CL levels (1 =
// still at VDD) go to the sum line, which merges them into the MAV voltage.
//
// With no row line asserted nothing discharges, so the CLs keep the precharge
// pattern: that is how the same array serves as a capacitive DAC when it is the
// digitizing partner of another array.
//
// Timing: the write port is synchronous (one row per clock); the CL evaluation is
// combinational from rl, il and pch, and is sampled by the sum line.
// Follows the paper: 8T cells, single-ended discharge on (weight AND input),
// horizontal RL, vertical IL and CL. Own choice: the word-wide 6T port.
module cim_array_8t #(
  parameter int unsigned ROWS = mic_pkg::ROWS,
  parameter int unsigned COLS = mic_pkg::COLS,
  localparam int unsigned RW  = $clog2(ROWS)
) (
  input  logic            clk,
  // 6T write/read port
  input  logic            wr_en,
  input  logic [RW-1:0]   wr_row,
  input  logic [COLS-1:0] wr_data,
  input  logic [RW-1:0]   rd_row,
  output logic [COLS-1:0] rd_data,
  // product port
  input  logic [ROWS-1:0] rl,     // row lines, one-hot (all zero in DAC use)
  input  logic [COLS-1:0] il,     // input lines, one bit plane
  input  logic [COLS-1:0] pch,    // precharge state of each column line
  output logic [COLS-1:0] cl      // column-line level after evaluation, 1 = VDD
);

  logic [COLS-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_row] <= wr_data;
  end

  assign rd_data = mem[rd_row];

  // Stored bits seen through the asserted row line(s).
  logic [COLS-1:0] wsel;
  always_comb begin
    wsel = '0;
    for (int r = 0; r < ROWS; r++) begin
      if (rl[r]) wsel |= mem[r];
    end
  end

  assign cl = pch & ~(wsel & il);

endmodule
