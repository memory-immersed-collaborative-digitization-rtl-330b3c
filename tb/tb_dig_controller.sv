// tb_dig_controller: drives the digitization controller with an ideal converter
// front end modelled in the testbench: a MAV voltage v (1/1024 VDD steps) and a
// reference for code s at s*32. Input is swept finely over 0..VDD, as in a
// staircase (code versus input voltage) measurement, in every mode.
//
// Checks per conversion: the code against the ideal staircase
// min(floor(32 v / VDD), 31) (SAR, hybrid) or the Flash interval's lower end;
// the number of comparison cycles (5 for symmetric SAR, 1 for Flash, 4 for
// symmetric hybrid; 2 in asymmetric SAR and 1 in asymmetric hybrid for the
// codes next to the pivot, at most 8 otherwise); the start-to-done latency of
// ncmp+1 cycles; that Flash cycles strobe all three comparators and SAR cycles
// only comparator 0; and the reference codes of the first cycle. A last phase
// stalls random cycles with hold: the codes must not change, a held cycle must
// not strobe, and the latency must grow by exactly the number of held cycles.
module tb_dig_controller;
  import mic_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, hold, asym, busy, done, act_flash, act_sar;
  adc_mode_e mode;
  logic [4:0] pivot, code;
  logic [2:0] ref_en, cmp_en, cmp_out;
  logic [2:0][4:0] ref_code;
  logic [3:0] ncmp;
  int v;
  int checks = 0, failures = 0;

  dig_controller #(.NBITS(5), .FLASH_BITS(2)) dut (.*);

  // ideal comparators
  always_comb
    for (int i = 0; i < 3; i++) cmp_out[i] = cmp_en[i] && (v >= int'(ref_code[i]) * 32);

  // protocol checks on every cycle
  always @(posedge clk) if (rst_n) begin
    if (hold && busy) begin
      checks++;
      if (cmp_en !== 3'b000 || ref_en !== 3'b000 || act_flash || act_sar) begin
        failures++; $display("held cycle strobes %b", cmp_en);
      end
    end
    if (act_flash) begin
      checks++;
      if (cmp_en !== 3'b111 || ref_en !== 3'b111) begin failures++; $display("flash strobes %b", cmp_en); end
    end
    if (act_sar) begin
      checks++;
      if (cmp_en !== 3'b001 || ref_en !== 3'b001) begin failures++; $display("sar strobes %b", cmp_en); end
    end
  end

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ideal(int vin);
    int c = vin / 32;
    return (c > 31) ? 31 : c;
  endfunction

  task automatic convert(input adc_mode_e m, input logic a, input int vin,
                         output int c, output int n, output int cyc,
                         output logic [2:0][4:0] first_refs);
    @(negedge clk);
    v = vin; mode = m; asym = a; start = 1;
    @(negedge clk);
    start = 0;
    first_refs = ref_code;
    cyc = 1;
    while (!done) begin
      @(negedge clk);
      cyc++;
      if (cyc > 20) break;
    end
    c = int'(code); n = int'(ncmp);
  endtask

  // Conversion with random stalls; nh = held cycles while the search ran.
  task automatic convert_hold(input adc_mode_e m, input logic a, input int vin,
                              output int c, output int n, output int cyc, output int nh);
    @(negedge clk);
    v = vin; mode = m; asym = a; start = 1; hold = 0;
    @(negedge clk);
    start = 0;
    cyc = 1;
    hold = ($urandom_range(2) == 0);
    nh = int'(hold);
    forever begin
      @(negedge clk);
      cyc++;
      if (done || cyc > 60) break;
      hold = ($urandom_range(2) == 0);
      nh += int'(hold);
    end
    hold = 0;
    c = int'(code); n = int'(ncmp);
  endtask

  initial begin
    int c, n, cyc, e, nh, nstall = 0;
    logic [2:0][4:0] fr;
    real sum_sym, sum_asym;
    start = 0; hold = 0; mode = MODE_SAR; asym = 0; pivot = 5'd24; v = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int vin = 0; vin <= 1024; vin += 4) begin
      e = ideal(vin);
      // symmetric SAR
      convert(MODE_SAR, 0, vin, c, n, cyc, fr);
      checks += 4;
      if (c != e) begin failures++; $display("SAR v=%0d code %0d exp %0d", vin, c, e); end
      if (n != 5) begin failures++; $display("SAR ncmp %0d", n); end
      if (cyc != n + 1) begin failures++; $display("SAR latency %0d", cyc); end
      if (fr[0] != 5'd16) begin failures++; $display("SAR first ref %0d", fr[0]); end
      // symmetric Flash: two MSBs
      convert(MODE_FLASH, 0, vin, c, n, cyc, fr);
      checks += 4;
      if (c != (e / 8) * 8) begin failures++; $display("FLASH v=%0d code %0d", vin, c); end
      if (n != 1) failures++;
      if (cyc != 2) failures++;
      if (fr != {5'd24, 5'd16, 5'd8}) begin failures++; $display("FLASH refs %p", fr); end
      // symmetric hybrid
      convert(MODE_HYBRID, 0, vin, c, n, cyc, fr);
      checks += 3;
      if (c != e) begin failures++; $display("HYB v=%0d code %0d exp %0d", vin, c, e); end
      if (n != 4) begin failures++; $display("HYB ncmp %0d", n); end
      if (cyc != n + 1) failures++;
      // asymmetric SAR
      convert(MODE_SAR, 1, vin, c, n, cyc, fr);
      checks += 4;
      if (c != e) begin failures++; $display("ASAR v=%0d code %0d exp %0d", vin, c, e); end
      if ((e == 23 || e == 24) ? (n != 2) : (n > 8 || n < 3)) begin failures++; $display("ASAR e=%0d ncmp %0d", e, n); end
      if (cyc != n + 1) failures++;
      if (fr[0] != 5'd24) begin failures++; $display("ASAR root %0d", fr[0]); end
      // asymmetric hybrid
      convert(MODE_HYBRID, 1, vin, c, n, cyc, fr);
      checks += 4;
      if (c != e) begin failures++; $display("AHYB v=%0d code %0d exp %0d", vin, c, e); end
      if ((e == 23 || e == 24) ? (n != 1) : (n < 2)) begin failures++; $display("AHYB e=%0d ncmp %0d", e, n); end
      if (cyc != n + 1) failures++;
      if (fr != {5'd25, 5'd24, 5'd23}) begin failures++; $display("AHYB refs %p", fr); end
      // asymmetric Flash only: interval lower end
      convert(MODE_FLASH, 1, vin, c, n, cyc, fr);
      checks++;
      if (c != ((e >= 25) ? 25 : (e >= 24) ? 24 : (e >= 23) ? 23 : 0)) begin failures++; $display("AFLASH v=%0d code %0d", vin, c); end
    end
    // Average comparisons over the code distribution of 32 columns with
    // discharge probability 1/4 (weight and input bits uniform).
    sum_sym = 0; sum_asym = 0;
    for (int d = 0; d <= 32; d++) begin
      real p;
      p = 1.0;
      for (int i = 0; i < d; i++) p = p * real'(32 - i) / real'(i + 1);
      p = p * (0.25 ** d) * (0.75 ** (32 - d));
      convert(MODE_SAR, 1, (32 - d) * 32, c, n, cyc, fr);
      sum_asym += p * n;
      convert(MODE_SAR, 0, (32 - d) * 32, c, n, cyc, fr);
      sum_sym += p * n;
    end
    $display("average comparisons: symmetric %0.2f asymmetric %0.2f", sum_sym, sum_asym);
    // about 3.7 comparisons are reported for the asymmetric 5-bit search
    checks += 2;
    if (sum_sym < 4.99 || sum_sym > 5.01) failures++;
    if (sum_asym < 3.5 || sum_asym > 3.9) begin failures++; $display("asymmetric average out of range"); end
    // Stalls in every mode.
    for (int t = 0; t < 300; t++) begin
      adc_mode_e m;
      logic a;
      int vin;
      m   = adc_mode_e'($urandom_range(2));
      a   = 1'($urandom);
      vin = $urandom_range(1024);
      e   = ideal(vin);
      if (m == MODE_FLASH)
        e = a ? ((e >= 25) ? 25 : (e >= 24) ? 24 : (e >= 23) ? 23 : 0) : (e / 8) * 8;
      convert_hold(m, a, vin, c, n, cyc, nh);
      nstall += nh;
      checks += 2;
      if (c != e) begin failures++; $display("hold: mode %0d v=%0d code %0d exp %0d", m, vin, c, e); end
      if (cyc != n + nh + 1) begin failures++; $display("hold: latency %0d, ncmp %0d, held %0d", cyc, n, nh); end
    end
    checks++;
    if (nstall == 0) begin failures++; $display("no stall happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
