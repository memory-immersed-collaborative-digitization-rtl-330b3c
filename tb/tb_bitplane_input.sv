// tb_bitplane_input: loads random input vectors and checks that each bit plane
// reaches the input lines, that the lines are low without apply, and that the
// stored vector survives a cycle without load.
module tb_bitplane_input;
  localparam int COLS = 32, IBITS = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic load, apply;
  logic [COLS-1:0][IBITS-1:0] x, xref;
  logic [1:0] plane;
  logic [COLS-1:0] il;
  int checks = 0, failures = 0;

  bitplane_input #(.COLS(COLS), .IBITS(IBITS)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    load = 0; apply = 0; plane = 0; x = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      @(negedge clk);
      for (int j = 0; j < COLS; j++) x[j] = 4'($urandom);
      xref = x; load = 1;
      @(negedge clk);
      load = 0; x = '0;
      for (int b = 0; b < IBITS; b++) begin
        logic [COLS-1:0] e;
        plane = 2'(b); apply = 1; #1;
        for (int j = 0; j < COLS; j++) e[j] = xref[j][b];
        checks++;
        if (il !== e) begin failures++; $display("plane %0d il %h exp %h", b, il, e); end
        apply = 0; #1;
        checks++;
        if (il !== '0) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
