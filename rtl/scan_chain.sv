// scan_chain: serial configuration register of the chip (SCAN_IN, SCAN_CLK,
// SCAN_OUT pins).
//
// While shift is high the register moves one place per clock toward its most
// significant bit, taking scan_in at bit 0; scan_out is the most significant
// bit, so the word is shifted in MSB first and the previous content comes out.
// A pulse on update copies the shift register into the active configuration,
// so a conversion in progress never sees a half-shifted word. Both registers
// reset to CFG_DEFAULT.
//
// The paper names the scan chain and its pins only. What it holds (the cfg_t
// fields), the update strobe and clocking it from the system clock with a shift
// enable are this design's choices.
module scan_chain #(
  parameter int unsigned W = mic_pkg::CFG_W,
  parameter logic [W-1:0] RESET_VALUE = W'(mic_pkg::CFG_DEFAULT)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         shift,
  input  logic         scan_in,
  input  logic         update,
  output logic         scan_out,
  output logic [W-1:0] cfg
);

  logic [W-1:0] sr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sr  <= RESET_VALUE;
      cfg <= RESET_VALUE;
    end else begin
      if (shift)  sr  <= {sr[W-2:0], scan_in};
      if (update) cfg <= sr;
    end
  end

  assign scan_out = sr[W-1];

endmodule
