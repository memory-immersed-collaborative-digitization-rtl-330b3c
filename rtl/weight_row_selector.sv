// weight_row_selector: the row decoder that drives the row lines (RL) of the
// computing array. A binary row address (four address bits for the 16 rows of
// the test chip, the chip's RL_0..RL_3 pins) is decoded to a one-hot set of row
// lines while en is high; with en low all row lines stay low, which is the state
// a digitizing array needs. Combinational.
module weight_row_selector #(
  parameter int unsigned ROWS = mic_pkg::ROWS,
  localparam int unsigned RW  = $clog2(ROWS)
) (
  input  logic            en,
  input  logic [RW-1:0]   row,
  output logic [ROWS-1:0] rl
);

  always_comb begin
    rl = '0;
    if (en) rl[row] = 1'b1;
  end

endmodule
