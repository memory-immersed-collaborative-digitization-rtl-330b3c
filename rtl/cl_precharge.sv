// cl_precharge: column-line precharge array of one CiM array.
//
// In compute use every column line is precharged to VDD before the weight-input
// product is evaluated. In DAC use the precharge array sets a reference: for a
// trial code k, k of the COLS column lines are precharged to VDD and the rest are
// discharged to ground, so that merging them on the sum line gives
// V_REF = k/COLS * VDD. Code COLS/2 gives the first SAR reference, half the lines
// at VDD, as in the paper. When idle the lines are discharged.
//
// The pattern is a thermometer code (lines 0..k-1 high). The paper only says how
// many lines are precharged; which lines is this design's choice, and with equal
// line capacitances it does not change the reference. Purely combinational.
module cl_precharge #(
  parameter int unsigned COLS = mic_pkg::COLS,
  localparam int unsigned KW  = $clog2(COLS + 1)
) (
  input  logic            compute,   // 1: precharge all lines for a product
  input  logic            dac,       // 1: reference pattern for code k
  input  logic [KW-1:0]   k,         // number of lines to precharge to VDD
  output logic [COLS-1:0] pch
);

  always_comb begin
    pch = '0;
    if (compute) begin
      pch = '1;
    end else if (dac) begin
      for (int j = 0; j < COLS; j++) pch[j] = (KW'(j) < k);
    end
  end

endmodule
