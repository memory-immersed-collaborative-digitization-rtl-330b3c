// tb_cim_array_8t: self-checking test of the 8T array model. Writes random
// weights, reads them back through the 6T port, and checks every column line
// against an independent model of the product port: a line stays at VDD unless
// it was precharged low or the selected row's weight bit and the input bit are
// both 1. Also checks DAC use (no row line) and an idle array.
module tb_cim_array_8t;
  localparam int ROWS = 16, COLS = 32;
  logic clk = 0;
  always #5 clk = ~clk;

  logic            wr_en;
  logic [3:0]      wr_row, rd_row;
  logic [COLS-1:0] wr_data, rd_data, il, pch, cl;
  logic [ROWS-1:0] rl;
  logic [COLS-1:0] ref_mem [ROWS];
  int checks = 0, failures = 0;

  cim_array_8t #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; wr_row = 0; rd_row = 0; wr_data = 0; il = 0; pch = 0; rl = 0;
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      wr_en = 1; wr_row = 4'(r); wr_data = $urandom; ref_mem[r] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int r = 0; r < ROWS; r++) begin
      rd_row = 4'(r); #1;
      checks++;
      if (rd_data !== ref_mem[r]) begin failures++; $display("read row %0d: %h vs %h", r, rd_data, ref_mem[r]); end
    end
    for (int t = 0; t < 300; t++) begin
      automatic int r = $urandom_range(ROWS - 1);
      logic [COLS-1:0] exp_cl;
      il  = $urandom;
      pch = (t % 3 == 0) ? '1 : COLS'($urandom);
      rl  = (t % 5 == 4) ? '0 : (ROWS'(1) << r);
      #1;
      for (int j = 0; j < COLS; j++)
        exp_cl[j] = pch[j] && !((t % 5 != 4) && ref_mem[r][j] && il[j]);
      checks++;
      if (cl !== exp_cl) begin failures++; $display("t=%0d cl %h exp %h", t, cl, exp_cl); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
