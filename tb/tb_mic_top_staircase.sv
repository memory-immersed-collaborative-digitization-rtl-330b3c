// tb_mic_top_staircase: transfer curve of the complete design (code versus MAV
// level), the digital counterpart of a staircase measurement.
//
// For every level m = 0..32 (m = column lines left at VDD) the test rewrites one
// weight row of A1 and A2 with 32-m ones and digitizes it against an input whose
// bit plane 0 is all ones, so the plane-0 MAV is exactly m/32 VDD (higher planes
// are random and not checked). Each level is converted in SAR, asymmetric SAR,
// hybrid, asymmetric hybrid and Flash mode with A1 computing, and in SAR mode
// with A2 computing. The expected code is min(m, 31); in Flash mode it is the
// lower end of the Flash interval. The test also checks that the codes never
// decrease as m increases, i.e. no reversed steps.
module tb_mic_top_staircase;
  import mic_pkg::*;
  localparam int C = COLS, IB = IBITS;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic wr_en, in_load, scan_shift, scan_in, scan_update, scan_out, start;
  logic busy, done, out_valid, out_arr, swapped, act_flash, act_sar;
  logic [1:0] wr_arr, rd_arr, out_plane;
  logic [3:0] wr_row, rd_row, row, out_ncmp;
  logic [C-1:0] wr_data, rd_data;
  logic [C-1:0][IB-1:0] in_data;
  logic [4:0] out_code;
  logic [0:0][4:0] out_codes;
  logic [2:0] cmp_out;

  mic_top dut (.*);

  int checks = 0, failures = 0;

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic scan_cfg(input cfg_t cfg);
    logic [CFG_W-1:0] w;
    w = CFG_W'(cfg);
    for (int i = CFG_W - 1; i >= 0; i--) begin
      @(negedge clk);
      scan_shift = 1; scan_in = w[i];
    end
    @(negedge clk);
    scan_shift = 0; scan_update = 1;
    @(negedge clk);
    scan_update = 0;
  endtask

  // Digitize the MAV of row r with input plane 0 = all ones; returns plane-0 code.
  task automatic conv(input cfg_t cfg, input int r, output int code);
    scan_cfg(cfg);
    @(negedge clk);
    row = 4'(r); start = 1;
    @(negedge clk);
    start = 0;
    code = -1;
    for (int t = 0; t < 200 && !done; t++) begin
      if (out_valid && out_plane == 2'd0) code = int'(out_code);
      @(negedge clk);
    end
    if (out_valid && out_plane == 2'd0) code = int'(out_code);
  endtask

  function automatic int expect_code(adc_mode_e m, logic asy, int lvl);
    int e = (lvl > 31) ? 31 : lvl;
    if (m == MODE_FLASH)
      return asy ? ((e >= 25) ? 25 : (e >= 24) ? 24 : (e >= 23) ? 23 : 0) : (e / 8) * 8;
    return e;
  endfunction

  initial begin
    cfg_t cfgs [6];
    int   prev [6];
    int   code, e;
    wr_en = 0; wr_arr = 0; wr_row = 0; wr_data = 0; rd_arr = 0; rd_row = 0;
    in_load = 0; in_data = '0; scan_shift = 0; scan_in = 0; scan_update = 0; start = 0; row = 0;
    cfgs[0] = '{mode: MODE_SAR,    asym: 1'b0, pivot: PIVOT_DEFAULT, cim_sel: 1'b0, alt: 1'b0};
    cfgs[1] = '{mode: MODE_SAR,    asym: 1'b1, pivot: PIVOT_DEFAULT, cim_sel: 1'b0, alt: 1'b0};
    cfgs[2] = '{mode: MODE_HYBRID, asym: 1'b0, pivot: PIVOT_DEFAULT, cim_sel: 1'b0, alt: 1'b0};
    cfgs[3] = '{mode: MODE_HYBRID, asym: 1'b1, pivot: PIVOT_DEFAULT, cim_sel: 1'b0, alt: 1'b0};
    cfgs[4] = '{mode: MODE_FLASH,  asym: 1'b0, pivot: PIVOT_DEFAULT, cim_sel: 1'b0, alt: 1'b0};
    cfgs[5] = '{mode: MODE_SAR,    asym: 1'b0, pivot: PIVOT_DEFAULT, cim_sel: 1'b1, alt: 1'b0};
    repeat (3) @(negedge clk);
    rst_n = 1;
    // Input: plane 0 all ones, higher planes random.
    @(negedge clk);
    in_load = 1;
    for (int j = 0; j < C; j++) in_data[j] = IB'($urandom) | IB'(1);
    @(negedge clk);
    in_load = 0;
    for (int c = 0; c < 6; c++) prev[c] = -1;
    // Level m = 32 - (number of weight ones). Row r holds `ones` ones.
    for (int m = 0; m <= C; m++) begin
      int ones;
      ones = C - m;
      // use row (m % 16) of A1 and A2 for this level
      for (int a = 0; a < 2; a++) begin
        @(negedge clk);
        wr_en = 1; wr_arr = 2'(a); wr_row = 4'(m % 16);
        wr_data = (ones == C) ? '1 : C'((64'(1) << ones) - 1);
      end
      @(negedge clk); wr_en = 0;
      for (int c = 0; c < 6; c++) begin
        conv(cfgs[c], m % 16, code);
        e = expect_code(cfgs[c].mode, cfgs[c].asym, m);
        checks++;
        if (code != e) begin
          failures++;
          $display("cfg %0d level %0d: code %0d expected %0d", c, m, code, e);
        end
        checks++;
        if (code < prev[c]) begin failures++; $display("cfg %0d: code decreased at level %0d", c, m); end
        prev[c] = code;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
