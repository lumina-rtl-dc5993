// tb_lumina_backend: feeds random significant-Gaussian entries for four pixels
// to the backend and plays the NRU controller: a pixel is deactivated the
// cycle after its ev_full or ev_term. A sequential model (lumina_ref_pkg
// alpha, 3DGS update rules) predicts colours, alpha-records and events.
// Run twice: with radiance caching (ev_full stops the pixel after K_REC
// records) and without (pixels integrate until T drops below 1e-4).
module tb_lumina_backend;
  import lumina_pkg::*;
  import lumina_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, rc_en;
  logic [3:0] active, dense;
  sig_t q_head;
  logic q_empty, q_pop;
  logic ev_full, ev_term, busy, integ;
  logic [1:0] ev_pix;
  logic [LIST_W-1:0] ev_idx;
  logic [3:0][RGB_W-1:0] rgb;
  logic [3:0][K_REC-1:0][GID_W-1:0] rec;

  lumina_backend dut (.clk, .rst_n, .start, .rc_en, .tau(TAU_DEFAULT), .active, .dense,
    .q_head, .q_empty, .q_pop, .ev_full, .ev_term, .ev_pix, .ev_idx, .rgb, .rec, .busy, .integ);

  int checks = 0, failures = 0;
  sig_t q[$];
  int n_full = 0, n_term = 0;

  assign q_empty = q.size() == 0;
  assign q_head  = q_empty ? '0 : q[0];

  always @(posedge clk) begin
    if (q_pop && q.size() > 0) void'(q.pop_front());
    if (ev_full || ev_term) active[ev_pix] <= 1'b0;
    if (ev_full) n_full++;
    if (ev_term) n_term++;
  end

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input bit rc);
    longint t[4], cr[4], cg[4], cb[4];
    int cnt[4], mfull, mterm, resume[4];
    bit act[4];
    logic [31:0] mrec[4][K_REC];
    sig_t s;
    @(negedge clk);
    rc_en = rc; start = 1; active = '1; dense = '1;
    n_full = 0; n_term = 0;
    @(negedge clk); start = 0;
    for (int p = 0; p < 4; p++) begin
      t[p] = 65536; cr[p] = 0; cg[p] = 0; cb[p] = 0; cnt[p] = 0; act[p] = 1; resume[p] = -1;
    end
    mfull = 0; mterm = 0;
    for (int i = 0; i < 600; i++) begin
      s = '0;
      s.m.gid = $urandom; s.m.idx = 13'(i); s.m.pix = 2'($urandom);
      s.m.op = 8'(60 + $urandom % 190);
      s.m.r = 8'($urandom); s.m.g = 8'($urandom); s.m.b = 8'($urandom);
      s.e = 16'($urandom % 6000);
      q.push_back(s);
      // model
      if (act[s.m.pix]) begin
        int a, p;
        longint tn, w;
        p = s.m.pix;
        a = ref_alpha(int'(s.e), int'(s.m.op));
        if (a > int'(TAU_DEFAULT)) begin
          tn = (t[p] * (65536 - a)) >> 16;
          if (tn <= 6) begin act[p] = 0; mterm++; end
          else begin
            w = (longint'(a) * t[p]) >> 16;
            cr[p] += w * s.m.r; cg[p] += w * s.m.g; cb[p] += w * s.m.b;
            t[p] = tn;
            if (cnt[p] < K_REC) begin
              mrec[p][cnt[p]] = s.m.gid; cnt[p]++;
              if (cnt[p] == K_REC && rc) begin act[p] = 0; mfull++; end
            end
          end
        end
      end
    end
    while (q.size() > 0 || busy) @(negedge clk);
    repeat (2) @(negedge clk);
    for (int p = 0; p < 4; p++) begin
      longint r, g, b;
      r = (cr[p] + 32768) >> 16; g = (cg[p] + 32768) >> 16; b = (cb[p] + 32768) >> 16;
      if (r > 255) r = 255;
      if (g > 255) g = 255;
      if (b > 255) b = 255;
      checks++;
      if (rgb[p] !== {8'(r), 8'(g), 8'(b)}) begin
        failures++; $display("pixel %0d rgb %h expected %h", p, rgb[p], {8'(r), 8'(g), 8'(b)});
      end
      for (int k = 0; k < cnt[p]; k++) begin
        checks++;
        if (rec[p][k] !== mrec[p][k]) begin failures++; $display("rec %0d/%0d", p, k); end
      end
    end
    checks++;
    if (n_full != mfull || n_term != mterm) begin
      failures++; $display("events full %0d/%0d term %0d/%0d", n_full, mfull, n_term, mterm);
    end
    checks++;
    if (rc ? (mfull == 0) : (mterm == 0)) begin failures++; $display("mechanism not exercised"); end
    $display("rc=%0d: %0d full events, %0d terminations", rc, n_full, n_term);
  endtask

  initial begin
    start = 0; rc_en = 0; active = '0; dense = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(1);
    run(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
