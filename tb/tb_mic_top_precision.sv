// tb_mic_top_precision: the complete design at lower conversion precisions,
// 3 and 4 bits, on the same 16x32 arrays.
//
// With NBITS below 5 each LSB of the in-memory DAC is L = 32 / 2^NBITS column
// lines, so the reference for trial code k is k*L/32 VDD and a MAV with m lines
// left at VDD should read min(m / L, 2^NBITS - 1). The test writes every level
// m = 0..32 into one weight row of A1 and A2 (32-m ones) and applies an input
// whose bit plane 0 is all ones, so the plane-0 MAV is exactly m/32 VDD. Each
// level is converted in symmetric and asymmetric SAR, hybrid and Flash mode.
// Symmetric Flash reads the lower end of its interval, (code >> (NBITS-2)) <<
// (NBITS-2); asymmetric Flash uses the pivot scaled to NBITS (0.75 VDD) and its
// two neighbours. It also checks the number of comparison cycles of the
// symmetric modes: NBITS for SAR, 1 + (NBITS-2) for hybrid, 1 for Flash. The
// two sizes run side by side, one instance each.
module tb_mic_top_precision;
  import mic_pkg::*;
  localparam int C = COLS, IB = IBITS, NSIZE = 2;

  logic clk = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [NSIZE-1:0] finished = '0;

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (&finished);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar g = 0; g < NSIZE; g++) begin : g_size
    localparam int NB = 3 + g;
    localparam int L  = C >> NB;
    localparam int QW = NB - FLASH_BITS;
    localparam int CMAXI = (1 << NB) - 1;
    localparam int PIV = (int'(PIVOT_DEFAULT) << NB) >> NBITS;

    logic rst_n = 0;
    logic wr_en, in_load, scan_shift, scan_in, scan_update, scan_out, start;
    logic busy, done, out_valid, out_arr, swapped, act_flash, act_sar;
    logic [1:0] wr_arr, rd_arr, out_plane;
    logic [3:0] wr_row, rd_row, row;
    logic [$clog2(2 * NB + 1)-1:0] out_ncmp;
    logic [C-1:0] wr_data, rd_data;
    logic [C-1:0][IB-1:0] in_data;
    logic [NB-1:0] out_code;
    logic [0:0][NB-1:0] out_codes;
    logic [2:0] cmp_out;

    mic_top #(.NBITS(NB)) dut (.*);

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

    // One operation on row r; returns the plane-0 code and its comparison count.
    task automatic conv(input cfg_t cfg, input int r, output int code, output int nc);
      scan_cfg(cfg);
      @(negedge clk);
      row = 4'(r); start = 1;
      @(negedge clk);
      start = 0;
      code = -1;
      nc   = -1;
      for (int t = 0; t < 200 && !done; t++) begin
        if (out_valid && out_plane == 2'd0) begin
          code = int'(out_code);
          nc   = int'(out_ncmp);
        end
        @(negedge clk);
      end
    endtask

    function automatic int expect_code(adc_mode_e m, logic asy, int lvl);
      int e;
      e = lvl / L;
      if (e > CMAXI) e = CMAXI;
      if (m == MODE_FLASH) begin
        if (!asy) return (e >> QW) << QW;
        return (e >= PIV + 1) ? PIV + 1 : (e >= PIV) ? PIV : (e >= PIV - 1) ? PIV - 1 : 0;
      end
      return e;
    endfunction

    initial begin
      cfg_t cfgs [6];
      int   code, nc, e, enc;
      wr_en = 0; wr_arr = 0; wr_row = 0; wr_data = 0; rd_arr = 0; rd_row = 0;
      in_load = 0; in_data = '0; scan_shift = 0; scan_in = 0; scan_update = 0;
      start = 0; row = 0;
      cfgs[0] = '{mode: MODE_SAR,    asym: 1'b0, pivot: PIVOT_DEFAULT, cim_sel: 1'b0, alt: 1'b0};
      cfgs[1] = '{mode: MODE_SAR,    asym: 1'b1, pivot: PIVOT_DEFAULT, cim_sel: 1'b0, alt: 1'b0};
      cfgs[2] = '{mode: MODE_HYBRID, asym: 1'b0, pivot: PIVOT_DEFAULT, cim_sel: 1'b0, alt: 1'b0};
      cfgs[3] = '{mode: MODE_HYBRID, asym: 1'b1, pivot: PIVOT_DEFAULT, cim_sel: 1'b0, alt: 1'b0};
      cfgs[4] = '{mode: MODE_FLASH,  asym: 1'b0, pivot: PIVOT_DEFAULT, cim_sel: 1'b0, alt: 1'b0};
      cfgs[5] = '{mode: MODE_FLASH,  asym: 1'b1, pivot: PIVOT_DEFAULT, cim_sel: 1'b0, alt: 1'b0};
      repeat (3) @(negedge clk);
      rst_n = 1;
      @(negedge clk);
      in_load = 1;
      for (int j = 0; j < C; j++) in_data[j] = IB'($urandom) | IB'(1);
      @(negedge clk);
      in_load = 0;
      for (int m = 0; m <= C; m++) begin
        int ones;
        ones = C - m;
        for (int a = 0; a < 2; a++) begin
          @(negedge clk);
          wr_en = 1; wr_arr = 2'(a); wr_row = 4'(m % 16);
          wr_data = (ones == C) ? '1 : C'((64'(1) << ones) - 1);
        end
        @(negedge clk); wr_en = 0;
        for (int c = 0; c < 6; c++) begin
          conv(cfgs[c], m % 16, code, nc);
          e = expect_code(cfgs[c].mode, cfgs[c].asym, m);
          checks++;
          if (code != e) begin
            failures++;
            $display("%0d bits, cfg %0d, level %0d: code %0d expected %0d", NB, c, m, code, e);
          end
          if (!cfgs[c].asym) begin
            enc = (cfgs[c].mode == MODE_SAR) ? NB : (cfgs[c].mode == MODE_HYBRID) ? 1 + QW : 1;
            checks++;
            if (nc != enc) begin
              failures++;
              $display("%0d bits, cfg %0d, level %0d: %0d comparisons, expected %0d",
                       NB, c, m, nc, enc);
            end
          end
        end
      end
      finished[g] = 1'b1;
    end
  end
endmodule
