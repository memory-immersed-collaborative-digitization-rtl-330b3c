// tb_comparator: checks the comparator model: output low while CMP is low, and
// while CMP is high, 1 exactly when IN1 >= IN2 (boundary and random cases).
module tb_comparator;
  import mic_pkg::*;
  logic cmp, out;
  volt_t in1, in2;
  int checks = 0, failures = 0;

  comparator dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 500; t++) begin
      cmp = (t % 4 != 0);
      in1 = volt_t'($urandom_range(VFS));
      case (t % 5)
        0: in2 = in1;
        1: in2 = (in1 == 0) ? in1 : in1 - 1'b1;
        2: in2 = in1 + 1'b1;
        default: in2 = volt_t'($urandom_range(VFS));
      endcase
      #1;
      checks++;
      if (out !== (cmp && (int'(in1) >= int'(in2)))) begin
        failures++; $display("cmp=%0d in1=%0d in2=%0d out=%0d", cmp, in1, in2, out);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
