// tb_scalar_unit: random accumulator values through PASS, RELU and MAX with random
// shifts, against an integer model of requantisation (round half up, saturate).
module tb_scalar_unit;
  import cicero_pkg::*;
  int checks = 0, failures = 0;
  su_op_e op;
  logic [4:0] shift;
  logic [31:0][39:0] a, b;
  logic [31:0][15:0] y;
  scalar_unit dut (.*);
  function automatic longint q(longint x, int s);
    automatic longint r = (s == 0) ? x : ((x + (longint'(1) << (s - 1))) >>> s);
    if (r > 32767) r = 32767;
    if (r < -32768) r = -32768;
    return r;
  endfunction
  initial begin
    #100000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int t = 0; t < 600; t++) begin
      op = su_op_e'(t % 3);
      shift = 5'($urandom_range(0, 12));
      for (int i = 0; i < 32; i++) begin
        a[i] = 40'(longint'(signed'($urandom)) >>> $urandom_range(4, 20));
        b[i] = 40'(longint'(signed'($urandom)) >>> $urandom_range(4, 20));
      end
      #1;
      for (int i = 0; i < 32; i++) begin
        longint x, e, av, bv;
        av = longint'($signed(a[i])); bv = longint'($signed(b[i]));
        x = (op == SU_MAX && bv > av) ? bv : av;
        e = q(x, int'(shift));
        if (op == SU_RELU && e < 0) e = 0;
        checks++;
        if (longint'($signed(y[i])) != e) begin
          failures++;
          if (failures < 20) $display("FAIL: op %0d lane %0d got %0d exp %0d", op, i, $signed(y[i]), e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
