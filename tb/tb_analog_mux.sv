// tb_analog_mux: random sum-line voltages and selections; each comparator input
// must carry the selected array's voltage.
module tb_analog_mux;
  import mic_pkg::*;
  volt_t sl [4];
  logic [2:0][1:0] pos_sel, neg_sel;
  volt_t cmp_pos [3];
  volt_t cmp_neg [3];
  int checks = 0, failures = 0;

  analog_mux #(.NARR(4), .NCMP(3)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 200; t++) begin
      for (int a = 0; a < 4; a++) sl[a] = volt_t'($urandom_range(VFS));
      pos_sel = 6'($urandom); neg_sel = 6'($urandom);
      #1;
      for (int i = 0; i < 3; i++) begin
        checks += 2;
        if (cmp_pos[i] !== sl[pos_sel[i]]) failures++;
        if (cmp_neg[i] !== sl[neg_sel[i]]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
