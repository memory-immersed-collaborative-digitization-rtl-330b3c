// tb_cl_precharge: checks the precharge patterns: all lines in compute use,
// exactly k lines high (and the merged reference k/32) in DAC use for every k,
// and all lines low when idle.
module tb_cl_precharge;
  localparam int COLS = 32;
  logic compute, dac;
  logic [5:0] k;
  logic [COLS-1:0] pch;
  int checks = 0, failures = 0;

  cl_precharge #(.COLS(COLS)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    compute = 1; dac = 0; k = 6'd5; #1;
    checks++; if (pch !== '1) failures++;
    compute = 0; dac = 0; #1;
    checks++; if (pch !== '0) failures++;
    for (int kk = 0; kk <= COLS; kk++) begin
      dac = 1; k = 6'(kk); #1;
      checks++;
      if ($countones(pch) != kk) begin failures++; $display("k=%0d ones=%0d", kk, $countones(pch)); end
      checks++;
      if (pch !== COLS'((64'(1) << kk) - 1)) begin failures++; $display("k=%0d pattern %h", kk, pch); end
    end
    // compute has priority over dac
    compute = 1; dac = 1; k = 6'd3; #1;
    checks++; if (pch !== '1) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
