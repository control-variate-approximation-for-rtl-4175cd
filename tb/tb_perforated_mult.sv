// tb_perforated_mult: exhaustive self-checking test of the perforated multiplier.
//
// Three instances (m = 1, 2, 3) are driven with every pair of 8-bit operands. Each
// result is checked against W * floor(A / 2^m), and the exact product is checked to split
// into the perforated product shifted back by m plus the dropped term W * (A mod 2^m),
// which is the multiplication error the control variate targets.
// A watchdog ends the run with a failure if it does not finish in time.
module tb_perforated_mult;

  int checks = 0;
  int failures = 0;

  logic [7:0] w, a;
  logic [14:0] p1;
  logic [13:0] p2;
  logic [12:0] p3;

  perforated_mult #(.M(1)) u_m1 (.w(w), .a(a), .p(p1));
  perforated_mult #(.M(2)) u_m2 (.w(w), .a(a), .p(p2));
  perforated_mult #(.M(3)) u_m3 (.w(w), .a(a), .p(p3));

  task automatic check(input int got, input int m);
    int exp_p, err;
    exp_p = int'(w) * (int'(a) / (1 << m));
    err   = int'(w) * (int'(a) % (1 << m));
    checks++;
    if (got != exp_p || (got << m) + err != int'(w) * int'(a)) begin
      failures++;
      if (failures < 10)
        $display("FAIL m=%0d w=%0d a=%0d p=%0d expected %0d", m, w, a, got, exp_p);
    end
  endtask

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 256; i++) begin
      for (int k = 0; k < 256; k++) begin
        w = 8'(i);
        a = 8'(k);
        #1;
        check(int'(p1), 1);
        check(int'(p2), 2);
        check(int'(p3), 3);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
