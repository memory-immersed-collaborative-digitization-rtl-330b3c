// tb_mic_top: end-to-end test of the four-array design at its default size
// (16x32 arrays, 5-bit conversion, 4-bit inputs).
//
// Random weights are written into all four arrays and read back. For each
// operation a configuration is shifted in through the scan chain, an input
// vector is loaded and one weight row is processed bit plane by bit plane. For
// every emitted result the expected code is computed here from the stored
// weights: the number m of column lines left at VDD is 32 minus the count of
// (weight AND input) ones, and the ideal 5-bit code is min(m, 31); Flash mode
// yields the lower end of the Flash interval. The busy time of each operation
// must equal the sum over planes of (comparison cycles + 2).
//
// Mechanisms counted, each of which must occur: SAR with A1 computing, SAR
// with A2 computing (A1 as DAC), role swap between passes, Flash, hybrid,
// asymmetric SAR, asymmetric hybrid, a conversion that saturates at code 31,
// a conversion decided with two comparisons next to the pivot, and scan-chain
// readback. The average number of comparison cycles with uniform random weights
// and inputs is printed for symmetric and asymmetric SAR.
module tb_mic_top;
  import mic_pkg::*;
  localparam int R = ROWS, C = COLS, IB = IBITS;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic wr_en, in_load, scan_shift, scan_in, scan_update, scan_out, start;
  logic busy, done, out_valid, out_arr, swapped, act_flash, act_sar;
  logic [1:0] wr_arr, rd_arr, out_plane;
  logic [3:0] wr_row, rd_row, row;
  logic [C-1:0] wr_data, rd_data;
  logic [C-1:0][IB-1:0] in_data;
  logic [4:0] out_code;
  logic [0:0][4:0] out_codes;
  logic [3:0] out_ncmp;
  logic [2:0] cmp_out;

  mic_top dut (.*);

  logic [C-1:0] W [NARR][R];
  logic [C-1:0][IB-1:0] X;
  int checks = 0, failures = 0;

  // mechanism counters
  int n_sar_a1, n_sar_a2, n_swap, n_flash, n_hybrid, n_asar, n_ahyb, n_sat, n_two, n_scan;
  int flash_cycles;

  always @(posedge clk) if (rst_n) begin
    if (swapped) n_swap++;
    if (act_flash) begin
      flash_cycles++;
    end
  end

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic scan_cfg(input cfg_t cfg);
    logic [CFG_W-1:0] w, prev, got;
    w = CFG_W'(cfg);
    for (int i = CFG_W - 1; i >= 0; i--) begin
      @(negedge clk);
      got[i] = scan_out;
      scan_shift = 1; scan_in = w[i];
    end
    @(negedge clk);
    scan_shift = 0; scan_update = 1;
    @(negedge clk);
    scan_update = 0;
    prev = got;
    n_scan++;
  endtask

  function automatic int exp_code(adc_mode_e m, logic asy, int arr, int r, int b);
    int m_hi, e;
    logic [C-1:0] pl;
    for (int j = 0; j < C; j++) pl[j] = X[j][b];
    m_hi = C - $countones(W[arr][r] & pl);
    e = (m_hi > 31) ? 31 : m_hi;
    if (m == MODE_FLASH) begin
      if (!asy) return (e / 8) * 8;
      return (e >= 25) ? 25 : (e >= 24) ? 24 : (e >= 23) ? 23 : 0;
    end
    return e;
  endfunction

  // One operation; returns the summed comparison cycles.
  task automatic op(input adc_mode_e m, input logic asy, input logic cs, input logic al,
                    input int r, output int ncmp_sum, output int nres);
    cfg_t cfg;
    int busy_cycles, exp_cycles;
    cfg = '{mode: m, asym: asy, pivot: PIVOT_DEFAULT, cim_sel: cs, alt: al};
    scan_cfg(cfg);
    @(negedge clk);
    in_load = 1;
    for (int j = 0; j < C; j++) in_data[j] = IB'($urandom);
    X = in_data;
    @(negedge clk);
    in_load = 0;
    row = 4'(r); start = 1;
    @(negedge clk);
    start = 0;
    busy_cycles = 1; ncmp_sum = 0; nres = 0; exp_cycles = 0;
    while (!done) begin
      if (out_valid) begin
        int e;
        e = exp_code(m, asy, int'(out_arr), r, int'(out_plane));
        checks++;
        if (int'(out_code) != e) begin
          failures++;
          $display("mode %0d asym %0d arr %0d plane %0d: code %0d expected %0d", m, asy, out_arr, out_plane, out_code, e);
        end
        if (e == 31 && m != MODE_FLASH) n_sat++;
        if (asy && m == MODE_SAR && out_ncmp == 4'd2) n_two++;
        if (m == MODE_SAR && !asy) begin
          checks++;
          if (out_ncmp != 4'd5) begin failures++; $display("SAR ncmp %0d", out_ncmp); end
        end
        if (m == MODE_SAR) begin
          if (out_arr) n_sar_a2++; else n_sar_a1++;
        end
        if (m == MODE_SAR && asy) n_asar++;
        if (m == MODE_FLASH) n_flash++;
        if (m == MODE_HYBRID) begin
          n_hybrid++;
          if (asy) n_ahyb++;
        end
        ncmp_sum += int'(out_ncmp);
        exp_cycles += int'(out_ncmp) + 2;
        nres++;
      end
      @(negedge clk);
      if (busy) busy_cycles++;
      if (busy_cycles > 400) break;
    end
    if (out_valid) begin
      int e;
      e = exp_code(m, asy, int'(out_arr), r, int'(out_plane));
      checks++;
      if (int'(out_code) != e) begin failures++; $display("last: code %0d expected %0d", out_code, e); end
      ncmp_sum += int'(out_ncmp);
      exp_cycles += int'(out_ncmp) + 2;
      nres++;
    end
    checks += 2;
    if (nres != IB * ((m == MODE_SAR && al) ? 2 : 1)) begin failures++; $display("results %0d", nres); end
    if (busy_cycles != exp_cycles) begin failures++; $display("busy %0d cycles, expected %0d", busy_cycles, exp_cycles); end
  endtask

  initial begin
    int s, n, tot_sym, tot_asym, cnt_sym, cnt_asym;
    wr_en = 0; wr_arr = 0; wr_row = 0; wr_data = 0; rd_arr = 0; rd_row = 0;
    in_load = 0; in_data = '0; scan_shift = 0; scan_in = 0; scan_update = 0; start = 0; row = 0;
    n_sar_a1 = 0; n_sar_a2 = 0; n_swap = 0; n_flash = 0; n_hybrid = 0; n_asar = 0; n_ahyb = 0;
    n_sat = 0; n_two = 0; n_scan = 0; flash_cycles = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // weights; row 15 of every array is all ones except in A2, row 0 of A1 is zero
    for (int a = 0; a < NARR; a++)
      for (int r = 0; r < R; r++) begin
        @(negedge clk);
        wr_en = 1; wr_arr = 2'(a); wr_row = 4'(r);
        wr_data = (a == 0 && r == 0) ? '0 : C'($urandom);
        W[a][r] = wr_data;
      end
    @(negedge clk); wr_en = 0;
    for (int a = 0; a < NARR; a++)
      for (int r = 0; r < R; r += 5) begin
        rd_arr = 2'(a); rd_row = 4'(r); #1;
        checks++;
        if (rd_data !== W[a][r]) begin failures++; $display("readback A%0d row %0d", a + 1, r); end
      end

    // row 0 of A1 is zero: every plane leaves all lines at VDD (saturation)
    op(MODE_SAR, 0, 0, 0, 0, s, n);
    op(MODE_SAR, 0, 1, 0, 3, s, n);
    op(MODE_SAR, 0, 0, 1, 7, s, n);
    op(MODE_FLASH, 0, 0, 0, 2, s, n);
    op(MODE_FLASH, 1, 0, 0, 4, s, n);
    op(MODE_HYBRID, 0, 0, 0, 5, s, n);
    op(MODE_HYBRID, 1, 0, 0, 6, s, n);

    // uniform random weights and inputs: comparison cycles, symmetric vs asymmetric
    tot_sym = 0; tot_asym = 0; cnt_sym = 0; cnt_asym = 0;
    for (int t = 0; t < 40; t++) begin
      op(MODE_SAR, 1, 0, 0, 1 + (t % 15), s, n);
      tot_asym += s; cnt_asym += n;
      op(MODE_SAR, 0, 0, 0, 1 + (t % 15), s, n);
      tot_sym += s; cnt_sym += n;
    end
    $display("average comparison cycles per conversion: symmetric %0.2f, asymmetric %0.2f",
             real'(tot_sym) / cnt_sym, real'(tot_asym) / cnt_asym);
    checks++;
    if (!(real'(tot_asym) / cnt_asym < 4.2)) begin failures++; $display("asymmetric search not faster"); end

    // scan chain readback: shifting a new word returns the active one
    begin
      cfg_t c1;
      logic [CFG_W-1:0] got;
      c1 = '{mode: MODE_HYBRID, asym: 1'b1, pivot: 5'd19, cim_sel: 1'b1, alt: 1'b0};
      scan_cfg(c1);
      for (int i = CFG_W - 1; i >= 0; i--) begin
        @(negedge clk);
        got[i] = scan_out;
        scan_shift = 1; scan_in = 1'b0;
      end
      @(negedge clk); scan_shift = 0;
      checks++;
      if (got !== CFG_W'(c1)) begin failures++; $display("scan readback %h exp %h", got, CFG_W'(c1)); end
    end

    $display("mechanisms: sar_a1=%0d sar_a2=%0d swap=%0d flash=%0d hybrid=%0d asym_sar=%0d asym_hybrid=%0d saturated=%0d two_cmp=%0d scan=%0d flash_cycles=%0d",
             n_sar_a1, n_sar_a2, n_swap, n_flash, n_hybrid, n_asar, n_ahyb, n_sat, n_two, n_scan, flash_cycles);
    checks += 10;
    if (n_sar_a1 == 0) failures++;
    if (n_sar_a2 == 0) failures++;
    if (n_swap == 0) failures++;
    if (n_flash == 0) failures++;
    if (n_hybrid == 0) failures++;
    if (n_asar == 0) failures++;
    if (n_ahyb == 0) failures++;
    if (n_sat == 0) failures++;
    if (n_two == 0) failures++;
    if (n_scan == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
