// tb_lumina_pe: random Gaussian/pixel pairs through one PE, one per cycle.
// Each output is compared with lumina_ref_pkg::ref_pe_e, and the output must
// appear exactly three cycles after its input (three-stage pipeline).
module tb_lumina_pe;
  import lumina_pkg::*;
  import lumina_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid;
  feature_t f;
  logic signed [COORD_W-1:0] px, py;
  gmeta_t mi, mo;
  logic out_valid, out_sig;
  logic [E_W-1:0] out_e;

  lumina_pe dut (.clk, .rst_n, .in_valid, .gau_x(f.x), .gau_y(f.y), .con_x(f.conx),
    .con_y(f.cony), .con_z(f.conz), .thr(f.thr), .pix_x(px), .pix_y(py), .in_meta(mi),
    .out_valid, .out_sig, .out_e, .out_meta(mo));

  int checks = 0, failures = 0, nsig = 0, cyc = 0;
  bit exp_sig [int];
  int exp_e   [int];
  int sent_at [int];

  always @(posedge clk) cyc <= cyc + 1;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // checker
  always @(posedge clk) if (rst_n && out_valid) begin
    int id;
    id = int'(mo.gid);
    checks++;
    if (!exp_sig.exists(id)) begin failures++; $display("unexpected output %0d", id); end
    else begin
      if (cyc - sent_at[id] != 3) begin failures++; $display("latency %0d", cyc - sent_at[id]); end
      if (out_sig !== exp_sig[id]) begin failures++; $display("sig mismatch id %0d", id); end
      else if (out_sig && out_e !== E_W'(exp_e[id])) begin
        failures++; $display("e mismatch id %0d: %0d vs %0d", id, out_e, exp_e[id]);
      end
      if (out_sig) nsig++;
      exp_sig.delete(id);
    end
  end

  initial begin
    in_valid = 0; f = '0; px = '0; py = '0; mi = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      bit s; int e;
      @(negedge clk);
      f  = make_gaussian(0, 16, 1 + n % 8);
      px = 16'(($urandom % 16) * 16 + 8);
      py = 16'(($urandom % 16) * 16 + 8);
      mi = '0;
      mi.gid = 32'(n);
      ref_pe_e(f, int'(px), int'(py), s, e);
      exp_sig[n] = s;
      exp_e[n]   = e;
      sent_at[n] = cyc;
      in_valid = ($urandom % 4) != 0;
      if (!in_valid) exp_sig.delete(n);
    end
    @(negedge clk) in_valid = 0;
    repeat (6) @(posedge clk);
    checks++;
    if (exp_sig.num() != 0) begin failures++; $display("%0d outputs missing", exp_sig.num()); end
    checks++;
    if (nsig < 100) begin failures++; $display("too few significant pairs: %0d", nsig); end
    $display("significant pairs: %0d", nsig);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
