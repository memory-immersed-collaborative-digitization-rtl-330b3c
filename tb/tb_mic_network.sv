// tb_mic_network: the complete design configured as the CiM network of the
// hybrid scheme, three dot-product arrays (0-2) sharing three reference arrays
// (3-5).
//
// All six arrays hold random weights and the input vector is random. Each
// operation runs on a random row in one of six configurations: symmetric and
// asymmetric SAR, symmetric and asymmetric hybrid, symmetric Flash, and SAR with
// the pairs' roles swapped after the first pass. For every bit plane the test
// computes each pair's MAV from the stored bits (m = 32 - popcount(w & x) lines
// left at VDD) and checks all three codes in out_codes, and out_code against
// pair 0.
//
// It also checks the schedule. All pairs compute in one MAV cycle. In hybrid
// and Flash mode the pairs use the three reference arrays in turn, one Flash
// cycle each, while the others are stalled. The SAR cycles then run in parallel
// on three comparators. Between results of consecutive planes there are
// 2 + 5 cycles in symmetric SAR, 2 + 3 + 3 in symmetric hybrid and 2 + 3 in
// Flash. Stalls, Flash turns and parallel SAR cycles are counted, and each must
// occur.
module tb_mic_network;
  import mic_pkg::*;
  localparam int C = COLS, IB = IBITS, NDP = 3, NA = NDP + NREF, R = ROWS;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic wr_en, in_load, scan_shift, scan_in, scan_update, scan_out, start;
  logic busy, done, out_valid, out_arr, swapped, act_flash, act_sar;
  logic [2:0] wr_arr, rd_arr;
  logic [1:0] out_plane;
  logic [3:0] wr_row, rd_row, row, out_ncmp;
  logic [C-1:0] wr_data, rd_data;
  logic [C-1:0][IB-1:0] in_data;
  logic [4:0] out_code;
  logic [NDP-1:0][4:0] out_codes;
  logic [2:0] cmp_out;

  mic_top #(.NDP(NDP)) dut (.*);

  int checks = 0, failures = 0;
  int n_stall = 0, n_flash = 0, n_par_sar = 0, n_swap = 0, cyc = 0;

  logic [C-1:0] w [NA][R];
  logic [C-1:0][IB-1:0] x;

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // schedule counters
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (act_flash) n_flash++;
    if (dut.fl_phase && |dut.c_hold) n_stall++;
    if (act_sar && $countones(dut.cmp_en) >= 2) n_par_sar++;
    if (swapped) n_swap++;
  end

  task automatic scan_cfg(input cfg_t cfg);
    logic [CFG_W-1:0] b;
    b = CFG_W'(cfg);
    for (int i = CFG_W - 1; i >= 0; i--) begin
      @(negedge clk);
      scan_shift = 1; scan_in = b[i];
    end
    @(negedge clk);
    scan_shift = 0; scan_update = 1;
    @(negedge clk);
    scan_update = 0;
  endtask

  function automatic int expect_code(cfg_t cfg, int arr, int r, int p);
    int m, e;
    m = C;
    for (int j = 0; j < C; j++) if (w[arr][r][j] && x[j][p]) m--;
    e = (m > 31) ? 31 : m;
    if (cfg.mode == MODE_FLASH) e = (e / 8) * 8;
    return e;
  endfunction

  task automatic run_op(input cfg_t cfg, input int r);
    int nres, last, exp_gap, e;
    scan_cfg(cfg);
    @(negedge clk);
    row = 4'(r); start = 1;
    @(negedge clk);
    start = 0;
    nres = 0;
    last = -1;
    exp_gap = (cfg.mode == MODE_SAR) ? 2 + NBITS : (cfg.mode == MODE_FLASH) ? 2 + NDP
                                     : 2 + NDP + (NBITS - FLASH_BITS);
    for (int t = 0; t < 400; t++) begin
      if (out_valid) begin
        nres++;
        for (int i = 0; i < NDP; i++) begin
          e = expect_code(cfg, out_arr ? NDP + i : i, r, int'(out_plane));
          checks++;
          if (int'(out_codes[i]) != e) begin
            failures++;
            $display("mode %0d asym %0d pair %0d arr %0d plane %0d: code %0d expected %0d",
                     cfg.mode, cfg.asym, i, out_arr, out_plane, out_codes[i], e);
          end
        end
        checks++;
        if (out_code != out_codes[0]) begin failures++; $display("out_code differs from pair 0"); end
        if (!cfg.asym && last >= 0) begin
          checks++;
          if (cyc - last != exp_gap) begin
            failures++;
            $display("mode %0d: %0d cycles between planes, expected %0d", cfg.mode, cyc - last, exp_gap);
          end
        end
        last = cyc;
      end
      if (done) break;
      @(negedge clk);
    end
    checks++;
    if (nres != ((cfg.alt && cfg.mode == MODE_SAR) ? 2 * IB : IB)) begin
      failures++;
      $display("mode %0d: %0d results", cfg.mode, nres);
    end
  endtask

  initial begin
    cfg_t cfgs [6];
    wr_en = 0; wr_arr = 0; wr_row = 0; wr_data = 0; rd_arr = 0; rd_row = 0;
    in_load = 0; in_data = '0; scan_shift = 0; scan_in = 0; scan_update = 0; start = 0; row = 0;
    cfgs[0] = '{mode: MODE_SAR,    asym: 1'b0, pivot: PIVOT_DEFAULT, cim_sel: 1'b0, alt: 1'b0};
    cfgs[1] = '{mode: MODE_SAR,    asym: 1'b1, pivot: PIVOT_DEFAULT, cim_sel: 1'b0, alt: 1'b0};
    cfgs[2] = '{mode: MODE_HYBRID, asym: 1'b0, pivot: PIVOT_DEFAULT, cim_sel: 1'b0, alt: 1'b0};
    cfgs[3] = '{mode: MODE_HYBRID, asym: 1'b1, pivot: PIVOT_DEFAULT, cim_sel: 1'b0, alt: 1'b0};
    cfgs[4] = '{mode: MODE_FLASH,  asym: 1'b0, pivot: PIVOT_DEFAULT, cim_sel: 1'b0, alt: 1'b0};
    cfgs[5] = '{mode: MODE_SAR,    asym: 1'b0, pivot: PIVOT_DEFAULT, cim_sel: 1'b0, alt: 1'b1};
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < NA; a++)
      for (int r = 0; r < R; r++) begin
        @(negedge clk);
        w[a][r] = C'($urandom);
        wr_en = 1; wr_arr = 3'(a); wr_row = 4'(r); wr_data = w[a][r];
      end
    @(negedge clk);
    wr_en = 0;
    for (int rep = 0; rep < 4; rep++) begin
      for (int j = 0; j < C; j++) x[j] = IB'($urandom);
      @(negedge clk);
      in_load = 1; in_data = x;
      @(negedge clk);
      in_load = 0;
      for (int c = 0; c < 6; c++) run_op(cfgs[c], $urandom_range(R - 1));
    end
    $display("mechanisms: flash_turns=%0d stalls=%0d parallel_sar=%0d swaps=%0d",
             n_flash, n_stall, n_par_sar, n_swap);
    checks += 4;
    if (n_flash == 0)   begin failures++; $display("no Flash turn"); end
    if (n_stall == 0)   begin failures++; $display("no stall"); end
    if (n_par_sar == 0) begin failures++; $display("no parallel SAR cycle"); end
    if (n_swap == 0)    begin failures++; $display("no role swap"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
