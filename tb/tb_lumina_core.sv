// tb_lumina_core: end-to-end test of LuminCore at its default size (8x8 NRUs,
// 16x16-pixel tile, 4096-entry feature buffers, 1024x4 LuminCache).
// A random sorted list of Gaussians around one tile is written through the
// DMA port into the idle feature buffer and swapped in. The tile is rendered
//   A  without radiance caching      every pixel equals the 3DGS reference
//   B  with caching, empty cache     misses fill the cache; hits (pixels sharing
//                                    a key) return a neighbour's colour
//   C  with caching, same tile       pixels with a full alpha-record hit
//   D  after a cache buffer swap     the other (empty) buffer: same hits as B
//   E  after swapping back           hits again
// Tiles A-D go to output-buffer slots 0-3, which are read back after an
// output-buffer swap. Every mechanism (dense issue, sparse remapped issue,
// queue throttling, hit, miss, early termination, the three buffer swaps) is
// counted and must have happened at least once.
module tb_lumina_core;
  import lumina_pkg::*;
  import lumina_ref_pkg::*;

  localparam int L = 160;   // Gaussians in the tile's list
  localparam int X0 = 32, Y0 = 48;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic fb_swap, fb_wr_en, c_swap, c_flush, c_we, c_re, ob_swap, ob_rd_en;
  logic [11:0] fb_wr_addr, c_waddr, c_raddr;
  feature_t fb_wr_data;
  logic [TAG_W+RGB_W:0] c_wdata, c_rdata;
  logic [1:0] ob_rd_slot, tile_slot;
  logic [7:0] ob_rd_pix;
  logic [23:0] ob_rd_data;
  logic tile_start, rc_en, busy, tile_done, fb_active, c_active, ob_active;
  logic [11:0] tile_x0, tile_y0;
  logic [LIST_W-1:0] tile_len;
  logic [A_W-1:0] tau;
  logic [31:0] st_cycles, st_dense_issue, st_sparse_issue, st_credit_stall, st_hits,
               st_misses, st_integ;

  lumina_core dut (.*);

  int checks = 0, failures = 0;
  feature_t fl [];
  ref_pix_t rp [256];
  logic [159:0] key [256];
  logic [23:0] got [4][256];
  int n_swaps = 0, n_term = 0, n_full = 0;

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_tile(input bit rc, input int slot, output int cycles, output int hits,
                          output int misses);
    int c0, h0, m0;
    c0 = st_cycles; h0 = st_hits; m0 = st_misses;
    @(negedge clk);
    tile_start = 1; rc_en = rc; tile_slot = 2'(slot); tile_len = 13'(L);
    tile_x0 = 12'(X0); tile_y0 = 12'(Y0); tau = TAU_DEFAULT;
    @(negedge clk); tile_start = 0;
    while (!tile_done) @(negedge clk);
    cycles = st_cycles - c0; hits = st_hits - h0; misses = st_misses - m0;
    $display("tile rc=%0d slot %0d: %0d cycles, %0d hits, %0d misses", rc, slot, cycles, hits, misses);
  endtask

  // a pixel's colour is acceptable after a hit if some pixel with the same key
  // produced it
  function automatic bit hit_ok(input int p, input logic [23:0] v);
    for (int m = 0; m < 256; m++)
      if (rp[m].nrec == K_REC && key[m] == key[p] && rp[m].rgb == v) return 1;
    return 0;
  endfunction

  initial begin
    int cyc, h, m, h_b;
    {fb_swap, fb_wr_en, c_swap, c_flush, c_we, c_re, ob_swap, ob_rd_en, tile_start, rc_en} = '0;
    fb_wr_addr = '0; c_waddr = '0; c_raddr = '0; fb_wr_data = '0; c_wdata = '0;
    ob_rd_slot = '0; tile_slot = '0; ob_rd_pix = '0; tile_x0 = '0; tile_y0 = '0;
    tile_len = '0; tau = TAU_DEFAULT;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // scene and reference
    fl = new[L];
    for (int i = 0; i < L; i++) begin
      // the tile's bottom-right corner is left thin, so that some pixels
      // see fewer than K_REC significant Gaussians
      fl[i] = make_gaussian(0, 16, 2 + i % 4);
      do begin
        fl[i].x = 16'(X0 * 16 - 48 + $urandom % (22 * 16));
        fl[i].y = 16'(Y0 * 16 - 48 + $urandom % (22 * 16));
      end while (fl[i].x > (X0 + 6) * 16 && fl[i].y > (Y0 + 6) * 16 && i % 8 != 0);
    end
    for (int p = 0; p < 256; p++) begin
      rp[p] = ref_render(fl, L, (X0 + p % 16) * 16 + 8, (Y0 + p / 16) * 16 + 8, int'(TAU_DEFAULT));
      for (int k = 0; k < K_REC; k++) key[p][k*32 +: 32] = rp[p].rec[k];
      if (rp[p].nrec == K_REC) n_full++;
      if (rp[p].term) n_term++;
    end

    // DMA: features into the idle buffer, then swap
    for (int i = 0; i < L; i++) begin
      @(negedge clk); fb_wr_en = 1; fb_wr_addr = 12'(i); fb_wr_data = fl[i];
    end
    @(negedge clk); fb_wr_en = 0; fb_swap = 1;
    @(negedge clk); fb_swap = 0; n_swaps++;
    checks++;
    if (fb_active !== 1'b1) begin failures++; $display("feature buffer swap"); end

    // A: plain rasterization
    run_tile(0, 0, cyc, h, m);
    checks++;
    if (cyc < L) begin failures++; $display("dense pass faster than one Gaussian per cycle"); end
    checks++;
    if (h + m != 0) begin failures++; $display("cache used with rc off"); end

    // B: caching, empty cache
    run_tile(1, 1, cyc, h, m);
    h_b = h;   // pixels sharing a key with an earlier-finished pixel hit already
    checks++;
    if (h + m != n_full) begin failures++; $display("lookups %0d, expected %0d", h + m, n_full); end
    checks++;
    if (m == 0) begin failures++; $display("no misses on an empty cache"); end

    // C: same tile, the cache now holds it
    run_tile(1, 2, cyc, h, m);
    checks++;
    if (h + m != n_full || h < n_full * 9 / 10) begin
      failures++; $display("second frame hits %0d of %0d", h, n_full);
    end

    // D: other cache buffer (empty)
    @(negedge clk); c_swap = 1; @(negedge clk); c_swap = 0; n_swaps++;
    run_tile(1, 3, cyc, h, m);
    checks++;
    if (h != h_b || h + m != n_full) begin failures++; $display("swapped cache not empty: %0d hits", h); end

    // E: swap back, hits again (results not kept: output slots are full)
    @(negedge clk); c_swap = 1; @(negedge clk); c_swap = 0; n_swaps++;
    run_tile(1, 0, cyc, h, m);
    checks++;
    if (h < n_full * 9 / 10) begin failures++; $display("after swap back only %0d hits", h); end
    // slot 0 now holds E; re-render A into slot 0
    run_tile(0, 0, cyc, h, m);

    // read back all four slots from the idle output buffer
    @(negedge clk); ob_swap = 1; @(negedge clk); ob_swap = 0; n_swaps++;
    for (int s = 0; s < 4; s++)
      for (int p = 0; p < 256; p++) begin
        @(negedge clk); ob_rd_en = 1; ob_rd_slot = 2'(s); ob_rd_pix = 8'(p);
        @(negedge clk); ob_rd_en = 0;
        got[s][p] = ob_rd_data;
      end

    for (int p = 0; p < 256; p++) begin
      // A exact; D as B
      checks += 2;
      if (got[0][p] !== rp[p].rgb) begin
        failures++; if (failures < 10) $display("A pixel %0d: %h vs %h", p, got[0][p], rp[p].rgb);
      end
      if (got[3][p] !== rp[p].rgb && !hit_ok(p, got[3][p])) begin
        failures++; if (failures < 10) $display("D pixel %0d: %h vs %h", p, got[3][p], rp[p].rgb);
      end
      // B and C: exact, or a colour cached under the same key
      for (int s = 1; s <= 2; s++) begin
        checks++;
        if (got[s][p] !== rp[p].rgb && !(rp[p].nrec == K_REC && hit_ok(p, got[s][p]))) begin
          failures++;
          if (failures < 10) $display("slot %0d pixel %0d: %h vs %h", s, p, got[s][p], rp[p].rgb);
        end
      end
    end

    // mechanisms
    $display("pixels terminated early (T < 1e-4): %0d", n_term);
    checks++; if (n_term == 0)          begin failures++; $display("no early termination"); end
    $display("pixels with a full alpha-record: %0d of 256", n_full);
    $display("dense issue %0d, sparse issue %0d, queue throttling %0d, hits %0d, misses %0d, integrated %0d, swaps %0d",
             st_dense_issue, st_sparse_issue, st_credit_stall, st_hits, st_misses, st_integ, n_swaps);
    checks++; if (st_dense_issue == 0)  begin failures++; $display("no dense issue"); end
    checks++; if (st_sparse_issue == 0) begin failures++; $display("no remapped issue"); end
    checks++; if (st_credit_stall == 0) begin failures++; $display("no throttling"); end
    checks++; if (st_hits == 0)         begin failures++; $display("no hits"); end
    checks++; if (st_misses == 0)       begin failures++; $display("no misses"); end
    checks++; if (n_swaps != 4)         begin failures++; $display("swaps"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
