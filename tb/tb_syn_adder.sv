// tb_syn_adder - random and extreme inputs to a 3-input synaptic adder,
// compared with a saturating integer sum.
module tb_syn_adder;
  import rsv_pkg::*;
  import rsv_ref_pkg::*;

  fix_t psp [3];
  fix_t sum;
  int   checks = 0, failures = 0;

  syn_adder #(.N(3)) dut (.psp, .sum);

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint s;
    for (int i = 0; i < 1000; i++) begin
      for (int j = 0; j < 3; j++) begin
        case ($urandom_range(0, 3))
          0:       psp[j] = fix_t'($urandom_range(0, 2) * 512);
          1:       psp[j] = FIX_MAX;
          2:       psp[j] = FIX_MIN;
          default: psp[j] = fix_t'($urandom);
        endcase
      end
      #1;
      s = longint'(int'(psp[0])) + longint'(int'(psp[1])) + longint'(int'(psp[2]));
      checks++;
      if (int'(sum) != sat(s)) begin
        failures++;
        $display("FAIL %0d+%0d+%0d -> %0d exp %0d", psp[0], psp[1], psp[2], sum, sat(s));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
