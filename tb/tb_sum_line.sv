// tb_sum_line: checks the charge-sharing model: with the gates closed the sum
// line equals (lines at VDD)/32 of full scale in the same cycle, the value is
// held after the gates open while the column lines change, and clear empties it.
module tb_sum_line;
  import mic_pkg::*;
  localparam int COLS = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic merge, clear;
  logic [COLS-1:0] cl;
  volt_t v_sl;
  int checks = 0, failures = 0;

  sum_line #(.COLS(COLS)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    merge = 0; clear = 0; cl = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      automatic int n;
      @(negedge clk);
      merge = 1; cl = $urandom;
      n = $countones(cl);
      #1;
      checks++;
      if (int'(v_sl) != n * 32) begin failures++; $display("merge n=%0d v=%0d", n, v_sl); end
      @(negedge clk);
      merge = 0; cl = $urandom; #1;
      checks++;
      if (int'(v_sl) != n * 32) begin failures++; $display("hold n=%0d v=%0d", n, v_sl); end
    end
    @(negedge clk); clear = 1; @(negedge clk); clear = 0; #1;
    checks++; if (v_sl !== '0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
