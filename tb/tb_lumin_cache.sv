// tb_lumin_cache: directed tests of LuminCache at its full size (1024 sets,
// 4 ways): miss on empty, hit after update with one-cycle response, four keys
// in one set, pseudo-LRU victim choice (worked out by hand below), rewrite of a
// present key, which ID bits form index and tag, and the double buffer
// (background write, read, flush, swap). Then random keys in distinct sets.
module tb_lumin_cache;
  import lumina_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid, rsp_valid, swap, bg_flush, bg_we, bg_re, active_buf;
  cache_req_t req;
  cache_rsp_t rsp;
  logic [11:0] bg_waddr, bg_raddr;
  logic [TAG_W+RGB_W:0] bg_wdata, bg_rdata;

  lumin_cache dut (.clk, .rst_n, .req_valid, .req, .rsp_valid, .rsp, .swap, .bg_flush,
    .bg_we, .bg_waddr, .bg_wdata, .bg_re, .bg_raddr, .bg_rdata, .active_buf);

  int checks = 0, failures = 0;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Key whose set index is 'set' (2 bits per ID, first ID most significant)
  // and whose ID bits [17:2] come from 'seed'.
  function automatic logic [K_REC-1:0][31:0] key(input int set, input int seed);
    logic [K_REC-1:0][31:0] k;
    for (int i = 0; i < K_REC; i++)
      k[i] = {14'(seed * 7 + i), 16'(seed * 31 + i * 1000), 2'(set >> (2 * (K_REC - 1 - i)))};
    return k;
  endfunction

  task automatic update(input logic [K_REC-1:0][31:0] ids, input logic [23:0] rgb);
    @(negedge clk);
    req_valid = 1; req.op = CACHE_UPDATE; req.ids = ids; req.rgb = rgb;
    @(negedge clk);
    req_valid = 0;
  endtask

  task automatic lookup(input logic [K_REC-1:0][31:0] ids, input bit exp_hit,
                        input logic [23:0] exp_rgb, input string what);
    @(negedge clk);
    req_valid = 1; req.op = CACHE_LOOKUP; req.ids = ids; req.rgb = '0;
    @(negedge clk);
    req_valid = 0;
    checks++;
    if (!rsp_valid || rsp.hit !== exp_hit || (exp_hit && rsp.rgb !== exp_rgb)) begin
      failures++;
      $display("%s: valid %0d hit %0d rgb %h, expected hit %0d rgb %h", what, rsp_valid,
               rsp.hit, rsp.rgb, exp_hit, exp_rgb);
    end
  endtask

  initial begin
    logic [K_REC-1:0][31:0] k;
    req_valid = 0; req = '0; swap = 0; bg_flush = 0; bg_we = 0; bg_re = 0;
    bg_waddr = '0; bg_raddr = '0; bg_wdata = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;

    lookup(key(5, 1), 0, '0, "empty");
    update(key(5, 1), 24'h123456);
    lookup(key(5, 1), 1, 24'h123456, "hit after update");

    // four keys in set 77 fill ways 0..3 in order
    for (int i = 0; i < 4; i++) update(key(77, 10 + i), 24'(i + 1));
    for (int i = 0; i < 4; i++) lookup(key(77, 10 + i), 1, 24'(i + 1), "four ways");
    // PLRU after touching ways 0,1,2,3 then 0 again: root points right,
    // right pair points at way 2 -> a fifth key replaces key 12.
    lookup(key(77, 10), 1, 24'd1, "touch way 0");
    update(key(77, 20), 24'd99);
    lookup(key(77, 12), 0, '0, "plru victim evicted");
    lookup(key(77, 10), 1, 24'd1, "way 0 kept");
    lookup(key(77, 11), 1, 24'd2, "way 1 kept");
    lookup(key(77, 13), 1, 24'd4, "way 3 kept");
    lookup(key(77, 20), 1, 24'd99, "new key");

    // rewrite of a present key keeps the other ways
    update(key(77, 11), 24'hABCDEF);
    lookup(key(77, 11), 1, 24'hABCDEF, "rewrite");
    lookup(key(77, 13), 1, 24'd4, "rewrite kept others");

    // only ID bits [17:0] count: bit 20 aliases, bit 2 does not
    k = key(300, 5);
    update(k, 24'h0000AA);
    k[3][20] = ~k[3][20];
    lookup(k, 1, 24'h0000AA, "bit 20 outside tag");
    k[3][2] = ~k[3][2];
    lookup(k, 0, '0, "bit 2 in tag");

    // double buffer: write set 9 way 1 of the idle buffer, swap, hit
    k = key(9, 42);
    @(negedge clk);
    bg_we = 1; bg_waddr = {10'd9, 2'd1};
    bg_wdata = {1'b1, k[0][17:2], k[1][17:2], k[2][17:2], k[3][17:2], k[4][17:2], 24'h777777};
    @(negedge clk); bg_we = 0;
    lookup(k, 0, '0, "idle buffer not visible");
    @(negedge clk); swap = 1; @(negedge clk); swap = 0;
    checks++;
    if (active_buf !== 1'b1) begin failures++; $display("swap"); end
    lookup(k, 1, 24'h777777, "loaded entry after swap");
    lookup(key(5, 1), 0, '0, "old buffer not visible");
    // read back the old buffer (now idle): set 5 way 0
    @(negedge clk); bg_re = 1; bg_raddr = {10'd5, 2'd0};
    @(negedge clk); bg_re = 0;
    checks++;
    if (bg_rdata[TAG_W+RGB_W] !== 1'b1 || bg_rdata[23:0] !== 24'h123456) begin
      failures++; $display("background read %h", bg_rdata);
    end
    // flush the idle buffer, swap back: everything misses
    @(negedge clk); bg_flush = 1; @(negedge clk); bg_flush = 0;
    @(negedge clk); swap = 1; @(negedge clk); swap = 0;
    lookup(key(5, 1), 0, '0, "flushed");
    lookup(key(77, 10), 0, '0, "flushed 2");

    // random keys, one per set
    for (int i = 0; i < 300; i++) update(key(i * 3, 500 + i), 24'(i * 1111));
    for (int i = 0; i < 300; i++) lookup(key(i * 3, 500 + i), 1, 24'(i * 1111), "random");
    for (int i = 0; i < 50; i++) lookup(key(i * 3, 900 + i), 0, '0, "random miss");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
