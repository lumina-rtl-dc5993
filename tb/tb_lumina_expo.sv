// tb_lumina_expo: sweeps the exponent e (Q6.10) and the opacity and compares
// the exponent unit with the floating-point value opacity*exp(-e): the error
// must stay below 0.05% of full scale plus 2 LSB of Q0.16.
module tb_lumina_expo;
  import lumina_pkg::*;

  logic [E_W-1:0]  e;
  logic [OP_W-1:0] op;
  logic [A_W-1:0]  alpha;

  lumina_expo dut (.e, .op, .alpha);

  int checks = 0, failures = 0;
  real worst = 0.0;

  initial begin : watchdog
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 20000; n++) begin
      real ref_a, err;
      e  = (n < 10000) ? E_W'(n) : E_W'($urandom);
      op = (n % 7 == 0) ? 8'd255 : 8'($urandom);
      #1;
      ref_a = real'(op) / 256.0 * $exp(-real'(e) / 1024.0) * 65536.0;
      err   = real'(alpha) - ref_a;
      if (err < 0) err = -err;
      if (err > worst) worst = err;
      checks++;
      if (err > 2.0 + ref_a * 0.0005) begin
        failures++;
        if (failures < 10) $display("e=%0d op=%0d alpha=%0d ref=%f", e, op, alpha, ref_a);
      end
    end
    $display("worst abs error %f LSB", worst);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
