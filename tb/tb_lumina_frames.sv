// tb_lumina_frames: a short video workload on the full-size core.
// A random scene covers two groups of 2x2 tiles (a 64x32-pixel window). Four
// consecutive frames are rendered with radiance caching on while the camera
// drifts by a fraction of a pixel per frame. As with sorting shared over a
// window of frames, the depth order of the list is kept from the first frame;
// only the projected centres move. Each tile group has its own cache content:
// before a group is rendered its saved content is loaded into the idle cache
// bank and swapped in; afterwards it is swapped out and saved through the
// background port. This is the save / flush / load sequence between tile
// batches that cache double buffering is meant to hide.
// Every pixel must equal the 3DGS reference of its frame, or, on a hit, a
// reference colour produced earlier under the same alpha-record key. The test
// reports the hit rate per frame and the colour error that the hits cost, and
// fails if no hit or no miss happened, if a loaded cache content was never hit,
// or if a save/load moved no entry.
module tb_lumina_frames;
  import lumina_pkg::*;
  import lumina_ref_pkg::*;

  localparam int L = 220;          // Gaussians in the shared sorted list
  localparam int NF = 4;           // frames
  localparam int WX = 64, WY = 32; // window in pixels: 4 x 2 tiles
  localparam int NE = 4096;        // cache entries per bank

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
  feature_t fl0 [], fl [];
  logic [TAG_W+RGB_W:0] saved [2][NE];
  logic [23:0] seen [logic [159:0]][$];   // key -> reference colours produced under it
  int n_saved = 0, n_loaded = 0;

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit seen_has(input logic [159:0] k, input logic [23:0] v);
    if (!seen.exists(k)) return 0;
    foreach (seen[k][i]) if (seen[k][i] == v) return 1;
    return 0;
  endfunction

  task automatic cache_load(input int g);
    @(negedge clk); c_flush = 1;
    @(negedge clk); c_flush = 0;
    for (int a = 0; a < NE; a++)
      if (saved[g][a][TAG_W+RGB_W]) begin
        @(negedge clk); c_we = 1; c_waddr = 12'(a); c_wdata = saved[g][a]; n_loaded++;
      end
    @(negedge clk); c_we = 0; c_swap = 1;
    @(negedge clk); c_swap = 0;
  endtask

  task automatic cache_save(input int g);
    @(negedge clk); c_swap = 1;
    @(negedge clk); c_swap = 0;
    for (int a = 0; a < NE; a++) begin
      @(negedge clk); c_re = 1; c_raddr = 12'(a);
      @(negedge clk); c_re = 0;
      saved[g][a] = c_rdata;
      if (c_rdata[TAG_W+RGB_W]) n_saved++;
    end
  endtask

  initial begin
    int hits_f, miss_f, err_sum, n_hit_px, h0, m0, hits_g1_late;
    real shx, shy;
    {fb_swap, fb_wr_en, c_swap, c_flush, c_we, c_re, ob_swap, ob_rd_en, tile_start, rc_en} = '0;
    fb_wr_addr = '0; c_waddr = '0; c_raddr = '0; fb_wr_data = '0; c_wdata = '0;
    ob_rd_slot = '0; tile_slot = '0; ob_rd_pix = '0; tile_x0 = '0; tile_y0 = '0;
    tile_len = '0; tau = TAU_DEFAULT;
    for (int g = 0; g < 2; g++) for (int a = 0; a < NE; a++) saved[g][a] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // scene: list order is the depth order, shared by all frames; IDs are
    // distinct below bit 18 so that no two keys alias in the cache
    fl0 = new[L];
    for (int i = 0; i < L; i++) begin
      fl0[i] = make_gaussian(0, 1, 2 + i % 5);
      fl0[i].x = 16'(-4 * 16 + int'($urandom % ((WX + 8) * 16)));
      fl0[i].y = 16'(-4 * 16 + int'($urandom % ((WY + 8) * 16)));
      fl0[i].gid = 32'((i * 32'd2654435761) & 32'h3ffff);
    end
    fl = new[L];
    hits_g1_late = 0;

    for (int f = 0; f < NF; f++) begin
      // camera drift: 3/16 px right and 2/16 px up per frame
      for (int i = 0; i < L; i++) begin
        fl[i] = fl0[i];
        fl[i].x = fl0[i].x + 16'(3 * f);
        fl[i].y = fl0[i].y - 16'(2 * f);
      end
      hits_f = 0; miss_f = 0; err_sum = 0; n_hit_px = 0;
      // every tile takes the whole list (no culling needed for correctness)
      for (int i = 0; i < L; i++) begin
        @(negedge clk); fb_wr_en = 1; fb_wr_addr = 12'(i); fb_wr_data = fl[i];
      end
      @(negedge clk); fb_wr_en = 0; fb_swap = 1;
      @(negedge clk); fb_swap = 0;

      for (int g = 0; g < 2; g++) begin
        ref_pix_t rp [4][256];
        // reference of this group's four tiles; record their keys and colours
        for (int t = 0; t < 4; t++)
          for (int p = 0; p < 256; p++) begin
            logic [159:0] k;
            int x, y;
            x = g * 32 + (t % 2) * 16 + p % 16;
            y = (t / 2) * 16 + p / 16;
            rp[t][p] = ref_render(fl, L, x * 16 + 8, y * 16 + 8, int'(TAU_DEFAULT));
            for (int j = 0; j < K_REC; j++) k[j*32 +: 32] = rp[t][p].rec[j];
            if (rp[t][p].nrec == K_REC && !seen_has(k, rp[t][p].rgb)) seen[k].push_back(rp[t][p].rgb);
          end

        cache_load(g);
        h0 = st_hits; m0 = st_misses;
        for (int t = 0; t < 4; t++) begin
          @(negedge clk);
          tile_start = 1; rc_en = 1; tile_slot = 2'(t); tile_len = 13'(L);
          tile_x0 = 12'(g * 32 + (t % 2) * 16); tile_y0 = 12'((t / 2) * 16);
          @(negedge clk); tile_start = 0;
          while (!tile_done) @(negedge clk);
        end
        hits_f += st_hits - h0; miss_f += st_misses - m0;
        if (g == 1 && f > 0) hits_g1_late += st_hits - h0;
        cache_save(g);

        // read the four tiles back and check them
        @(negedge clk); ob_swap = 1; @(negedge clk); ob_swap = 0;
        for (int t = 0; t < 4; t++)
          for (int p = 0; p < 256; p++) begin
            logic [23:0] v;
            logic [159:0] k;
            @(negedge clk); ob_rd_en = 1; ob_rd_slot = 2'(t); ob_rd_pix = 8'(p);
            @(negedge clk); ob_rd_en = 0;
            v = ob_rd_data;
            for (int j = 0; j < K_REC; j++) k[j*32 +: 32] = rp[t][p].rec[j];
            checks++;
            if (v != rp[t][p].rgb) begin
              if (rp[t][p].nrec == K_REC && seen_has(k, v)) begin
                n_hit_px++;
                for (int c = 0; c < 3; c++) begin
                  int d;
                  d = int'(v[c*8 +: 8]) - int'(rp[t][p].rgb[c*8 +: 8]);
                  err_sum += (d < 0) ? -d : d;
                end
              end else begin
                failures++;
                if (failures < 10)
                  $display("frame %0d group %0d tile %0d pixel %0d: %h, reference %h", f, g, t, p, v, rp[t][p].rgb);
              end
            end
          end
      end
      $display("frame %0d: %0d hits, %0d misses (hit rate %0d%%), %0d hits differ from full rendering, by %0d/1000 of an 8-bit step per channel on average",
               f, hits_f, miss_f, 100 * hits_f / ((hits_f + miss_f) > 0 ? hits_f + miss_f : 1),
               n_hit_px, n_hit_px > 0 ? err_sum * 1000 / (3 * n_hit_px) : 0);
      if (f > 0) begin
        checks++;
        if (hits_f == 0) begin failures++; $display("frame %0d: no hits", f); end
      end
    end

    $display("cache entries saved %0d, loaded %0d; hits of a reloaded content %0d; dense issue %0d, sparse issue %0d, throttling %0d",
             n_saved, n_loaded, hits_g1_late, st_dense_issue, st_sparse_issue, st_credit_stall);
    checks++; if (st_misses == 0)   begin failures++; $display("no misses"); end
    checks++; if (n_saved == 0 || n_loaded == 0) begin failures++; $display("no cache save/load"); end
    checks++; if (hits_g1_late == 0) begin failures++; $display("reloaded cache content never hit"); end
    checks++; if (st_sparse_issue == 0) begin failures++; $display("no remapped issue"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
