// tb_pacox_alu: checks the ALU against integer arithmetic.
// Random k, m, l and control bits; expected k is (k +/- 2^l) mod 2^19 and
// expected m is m with its sign bit flipped when negation is selected.
module tb_pacox_alu;
  import pacox_pkg::*;

  logic [L_W-1:0] l;
  entry_t         in, out;
  logic           ctrl_sub, ctrl_neg;
  int             checks = 0, failures = 0;

  pacox_alu dut (.l, .in, .ctrl_sub, .ctrl_neg, .out);

  initial begin
    int unsigned exp_k;
    logic [1:0]  exp_m;
    for (int t = 0; t < 2000; t++) begin
      l        = L_W'($urandom_range(0, MAX_QUBITS - 1));
      in.k     = K_W'($urandom);
      in.m     = 2'($urandom);
      ctrl_sub = 1'($urandom);
      ctrl_neg = 1'($urandom);
      #1;
      exp_k = ctrl_sub ? (int'(in.k) - (1 << l) + (1 << K_W)) % (1 << K_W)
                       : (int'(in.k) + (1 << l)) % (1 << K_W);
      // negation of the coded values: +1<->-1 (0<->1), +i<->-i (2<->3)
      case (in.m)
        2'd0: exp_m = ctrl_neg ? 2'd1 : 2'd0;
        2'd1: exp_m = ctrl_neg ? 2'd0 : 2'd1;
        2'd2: exp_m = ctrl_neg ? 2'd3 : 2'd2;
        default: exp_m = ctrl_neg ? 2'd2 : 2'd3;
      endcase
      checks++;
      if (int'(out.k) != exp_k || out.m != exp_m) begin
        failures++;
        if (failures < 10)
          $display("ALU mismatch: l=%0d k=%0h m=%0d sub=%0b neg=%0b -> k=%0h m=%0d, want k=%0h m=%0d",
                   l, in.k, in.m, ctrl_sub, ctrl_neg, out.k, out.m, exp_k, exp_m);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
