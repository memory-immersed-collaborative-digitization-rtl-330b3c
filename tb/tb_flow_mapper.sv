// tb_flow_mapper: the digitization controller is replaced by a testbench model
// that answers each start after a random number of cycles with a code built
// from the plane and the computing array. Checks: one COMP cycle per plane with
// adc_start in the same cycle, planes in order 0..3, the emitted code, plane and
// array, the cim_sel choice in SAR mode, A1 always computing in Flash/hybrid
// mode, the role swap and second pass with alt, and the done pulse.
module tb_flow_mapper;
  import mic_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, cim_sel, alt;
  adc_mode_e mode;
  logic [3:0] row, row_q;
  logic compute, comp_arr, adc_start, adc_done, out_valid, out_arr, busy, done, swapped;
  logic [1:0] plane, out_plane;
  logic [4:0] adc_code, out_code;
  int checks = 0, failures = 0;

  flow_mapper #(.ROWS(16), .IBITS(4), .NBITS(5)) dut (.*);

  // controller model
  int wait_cnt;
  logic pending;
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending <= 0; adc_done <= 0; adc_code <= 0; wait_cnt <= 0;
    end else begin
      adc_done <= 0;
      if (adc_start) begin
        pending  <= 1;
        wait_cnt <= $urandom_range(1, 6);
        adc_code <= 5'({comp_arr, plane, 2'b01});
      end else if (pending) begin
        if (wait_cnt == 0) begin
          pending <= 0; adc_done <= 1;
        end else wait_cnt <= wait_cnt - 1;
      end
    end
  end

  // one COMP cycle with start
  always @(posedge clk) if (rst_n && compute) begin
    checks++;
    if (!adc_start || row_q !== row) begin failures++; $display("COMP without start or wrong row"); end
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input adc_mode_e m, input logic cs, input logic al);
    int nout, nswap;
    int exp_arr, exp_plane, npass;
    @(negedge clk);
    mode = m; cim_sel = cs; alt = al; row = 4'($urandom); start = 1;
    @(negedge clk);
    start = 0;
    nout = 0; nswap = 0;
    exp_arr = (m == MODE_SAR) ? int'(cs) : 0;
    exp_plane = 0;
    npass = (m == MODE_SAR && al) ? 2 : 1;
    while (!done) begin
      @(negedge clk);
      if (swapped) nswap++;
      if (out_valid) begin
        nout++;
        checks++;
        if (int'(out_plane) != exp_plane || int'(out_arr) != exp_arr ||
            out_code !== 5'({out_arr, out_plane, 2'b01})) begin
          failures++;
          $display("out plane %0d arr %0d code %0d, expected plane %0d arr %0d", out_plane, out_arr, out_code, exp_plane, exp_arr);
        end
        exp_plane++;
        if (exp_plane == 4) begin exp_plane = 0; exp_arr = 1 - exp_arr; end
      end
    end
    checks += 2;
    if (nout != 4 * npass) begin failures++; $display("outputs %0d", nout); end
    if (nswap != npass - 1) begin failures++; $display("swaps %0d", nswap); end
  endtask

  initial begin
    start = 0; mode = MODE_SAR; cim_sel = 0; alt = 0; row = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(MODE_SAR, 0, 0);
    run(MODE_SAR, 1, 0);
    run(MODE_SAR, 0, 1);
    run(MODE_SAR, 1, 1);
    run(MODE_FLASH, 1, 1);
    run(MODE_HYBRID, 1, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
