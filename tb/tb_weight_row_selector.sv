// tb_weight_row_selector: every address gives exactly its own row line; with
// the enable low no row line is asserted.
module tb_weight_row_selector;
  logic en;
  logic [3:0] row;
  logic [15:0] rl;
  int checks = 0, failures = 0;

  weight_row_selector #(.ROWS(16)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 16; r++) begin
      en = 1; row = 4'(r); #1;
      checks++;
      if (rl !== 16'(1 << r)) begin failures++; $display("row %0d rl %h", r, rl); end
      en = 0; #1;
      checks++;
      if (rl !== '0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
