// tb_lumina_nru: one NRU on random 2x2 pixel blocks and random sorted lists,
// with a feature memory of one-cycle latency and a behavioural radiance cache
// (associative array, grants after a random delay, answers one cycle later).
// Each trial renders the block three times:
//   rc off          every pixel must equal the reference 3DGS colour
//   rc on, frame 1  a pixel whose alpha-record fills must be either a miss
//                   (reference colour, then written to the cache) or a hit on
//                   a value stored under its key; others give the reference
//   rc on, frame 2  every pixel with a full record must hit its stored value
// It also requires that dense issue, sparse (remapped) issue, queue-full
// throttling, hits and misses all happened.
module tb_lumina_nru;
  import lumina_pkg::*;
  import lumina_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, rc_en;
  logic [LIST_W-1:0] list_len;
  logic signed [3:0][15:0] pix_x, pix_y;
  logic [3:0] fb_valid;
  logic [3:0][11:0] fb_addr;
  feature_t [3:0] fb_data;
  logic creq_valid, creq_gnt, crsp_valid, done;
  cache_req_t creq;
  cache_rsp_t crsp;
  logic [3:0][23:0] pix_rgb;
  logic s_di, s_si, s_cs, s_h, s_m, s_i;

  lumina_nru dut (.clk, .rst_n, .start, .rc_en, .tau(TAU_DEFAULT), .list_len, .pix_x, .pix_y,
    .fb_valid, .fb_addr, .fb_data, .creq_valid, .creq, .creq_gnt, .crsp_valid, .crsp,
    .done, .pix_rgb, .st_dense_issue(s_di), .st_sparse_issue(s_si), .st_credit_stall(s_cs),
    .st_hit(s_h), .st_miss(s_m), .st_integ(s_i));

  int checks = 0, failures = 0;
  int n_dense = 0, n_sparse = 0, n_stall = 0, n_hit = 0, n_miss = 0, n_upd = 0;
  feature_t mem [4096];
  feature_t fl [];

  // feature memory
  always_ff @(posedge clk)
    for (int l = 0; l < 4; l++) if (fb_valid[l]) fb_data[l] <= mem[fb_addr[l]];

  // behavioural cache
  logic [23:0] cmap [logic [159:0]];
  int gdelay = 0;
  always @(posedge clk) begin
    crsp_valid <= 1'b0;
    if (creq_gnt) begin
      if (creq.op == CACHE_LOOKUP) begin
        crsp_valid <= 1'b1;
        crsp.hit   <= cmap.exists(creq.ids);
        crsp.rgb   <= cmap.exists(creq.ids) ? cmap[creq.ids] : 24'hx;
      end else begin
        cmap[creq.ids] = creq.rgb;
        n_upd++;
      end
    end
    if (creq_valid && !creq_gnt && gdelay > 0) gdelay--;
    if (s_di) n_dense++;
    if (s_si) n_sparse++;
    if (s_cs) n_stall++;
    if (s_h) n_hit++;
    if (s_m) n_miss++;
  end
  always_comb creq_gnt = creq_valid && gdelay == 0;
  always @(negedge clk) if (creq_valid && gdelay == 0 && ($urandom % 2)) gdelay = 1 + $urandom % 3;

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic render(input bit rc, input int len);
    int cyc;
    @(negedge clk);
    rc_en = rc; list_len = 13'(len); start = 1;
    @(negedge clk); start = 0;
    cyc = 0;
    while (!done) begin @(negedge clk); cyc++; end
  endtask

  initial begin
    ref_pix_t rp [4];
    logic [159:0] key [4];
    start = 0; rc_en = 0; list_len = '0; pix_x = '0; pix_y = '0; crsp = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 40; trial++) begin
      int len, bx, by;
      len = 20 + $urandom % 230;
      bx = $urandom % 15; by = $urandom % 15;
      fl = new[len];
      for (int i = 0; i < len; i++) begin
        fl[i] = make_gaussian(0, 16, 1 + trial % 6);
        fl[i].x = 16'(bx * 16 - 64 + $urandom % 160);
        fl[i].y = 16'(by * 16 - 64 + $urandom % 160);
        mem[i] = fl[i];
      end
      for (int l = 0; l < 4; l++) begin
        pix_x[l] = 16'((bx + l % 2) * 16 + 8);
        pix_y[l] = 16'((by + l / 2) * 16 + 8);
        rp[l] = ref_render(fl, len, int'(pix_x[l]), int'(pix_y[l]), int'(TAU_DEFAULT));
        for (int k = 0; k < K_REC; k++) key[l][k*32 +: 32] = rp[l].rec[k];
      end
      // rc off
      render(0, len);
      for (int l = 0; l < 4; l++) begin
        checks++;
        if (pix_rgb[l] !== rp[l].rgb) begin
          failures++; $display("trial %0d rc=0 pixel %0d: %h vs %h", trial, l, pix_rgb[l], rp[l].rgb);
        end
      end
      // rc on, frame 1 (cache emptied)
      cmap.delete();
      render(1, len);
      for (int l = 0; l < 4; l++) begin
        checks++;
        if (rp[l].nrec < K_REC) begin
          if (pix_rgb[l] !== rp[l].rgb) begin
            failures++; $display("trial %0d rc=1 short pixel %0d: %h vs %h", trial, l, pix_rgb[l], rp[l].rgb);
          end
        end else begin
          bit ok;
          ok = pix_rgb[l] === rp[l].rgb;
          for (int m = 0; m < 4; m++)
            if (rp[m].nrec == K_REC && key[m] == key[l] && pix_rgb[l] === rp[m].rgb) ok = 1;
          if (!ok || !cmap.exists(key[l])) begin
            failures++; $display("trial %0d rc=1 pixel %0d: %h vs %h", trial, l, pix_rgb[l], rp[l].rgb);
          end
        end
      end
      // rc on, frame 2: all full records hit
      begin
        int h0;
        h0 = n_hit;
        render(1, len);
        for (int l = 0; l < 4; l++) begin
          checks++;
          if (rp[l].nrec == K_REC) begin
            if (pix_rgb[l] !== cmap[key[l]]) begin
              failures++; $display("trial %0d frame 2 pixel %0d: %h vs %h", trial, l, pix_rgb[l], cmap[key[l]]);
            end
          end else if (pix_rgb[l] !== rp[l].rgb) begin
            failures++; $display("trial %0d frame 2 short pixel %0d", trial, l);
          end
        end
      end
    end
    $display("dense %0d sparse %0d stall %0d hits %0d misses %0d updates %0d",
             n_dense, n_sparse, n_stall, n_hit, n_miss, n_upd);
    checks++; if (n_dense == 0)  begin failures++; $display("no dense issue"); end
    checks++; if (n_sparse == 0) begin failures++; $display("no sparse issue"); end
    checks++; if (n_stall == 0)  begin failures++; $display("no queue throttling"); end
    checks++; if (n_hit == 0)    begin failures++; $display("no hits"); end
    checks++; if (n_miss == 0)   begin failures++; $display("no misses"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
