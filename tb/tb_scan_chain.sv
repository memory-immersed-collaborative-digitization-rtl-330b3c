// tb_scan_chain: checks the reset value, that shifting does not disturb the
// active configuration until update, that a word shifted in MSB first appears
// after update, and that the previous content comes out on scan_out.
module tb_scan_chain;
  localparam int W = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic shift, scan_in, update, scan_out;
  logic [W-1:0] cfg;
  int checks = 0, failures = 0;

  scan_chain #(.W(W), .RESET_VALUE(10'h2A5)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] prev, word, outw;
    shift = 0; scan_in = 0; update = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    checks++; if (cfg !== 10'h2A5) failures++;
    prev = 10'h2A5;
    for (int t = 0; t < 8; t++) begin
      word = W'($urandom);
      for (int i = W - 1; i >= 0; i--) begin
        @(negedge clk);
        outw[i] = scan_out;
        shift = 1; scan_in = word[i];
      end
      @(negedge clk); shift = 0;
      checks++; if (cfg !== prev) begin failures++; $display("cfg changed before update"); end
      checks++; if (outw !== prev) begin failures++; $display("scan_out %h exp %h", outw, prev); end
      update = 1; @(negedge clk); update = 0;
      checks++; if (cfg !== word) begin failures++; $display("cfg %h exp %h", cfg, word); end
      prev = word;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
