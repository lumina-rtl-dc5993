// lumin_cache: LuminCache, the radiance cache shared by all NRUs.
//
// A WAYS-way set-associative cache whose key is a pixel's alpha-record, the
// IDs of its first K_REC significant Gaussians. As in the paper's drawing, the
// low bits of the IDs are concatenated into the set index and higher bits are
// concatenated into one combined tag that is compared, way by way, with the
// stored tags; a valid, matching way is a hit and returns its cached RGB.
// With the paper's evaluated configuration: K_REC = 5 IDs, index = ID bits
// [1:0] of each (10 bits, 1024 sets), tag = ID bits [17:2] of each (80 bits),
// RGB 24 bits, 4 ways: 4096 entries of 104 bits = 52 KB per buffer.
// Replacement is tree pseudo-LRU (3 bits per set); an invalid way is filled
// first. The cache is double-buffered: the active buffer serves the NRUs, the
// other one is saved to / loaded from memory through the background port and
// can be flushed in one cycle; swap exchanges the two.
//
// Port timing:
//   req_valid/req   one lookup or update per cycle
//   rsp_valid/rsp   lookup result one cycle after the request (none for updates)
//   an update of a key already present rewrites that entry's RGB
//   bg_re/bg_raddr  background read of (set, way) of the idle buffer, data one
//                   cycle later on bg_rdata
//   bg_we           background write of one entry of the idle buffer
//   bg_flush        invalidate the whole idle buffer
//   swap            exchange active and idle buffers (takes effect next cycle)
// The order of IDs in index and tag (first ID most significant), the PLRU
// tree and the background port are this design's choices.
module lumin_cache
  import lumina_pkg::*;
#(
  parameter int unsigned WAYS = 4,
  parameter int unsigned SETS = 1 << SET_W
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               req_valid,
  input  cache_req_t                         req,
  output logic                               rsp_valid,
  output cache_rsp_t                         rsp,
  input  logic                               swap,
  input  logic                               bg_flush,
  input  logic                               bg_we,
  input  logic [$clog2(SETS*WAYS)-1:0]       bg_waddr,   // {set, way}
  input  logic [TAG_W+RGB_W:0]               bg_wdata,   // {valid, tag, rgb}
  input  logic                               bg_re,
  input  logic [$clog2(SETS*WAYS)-1:0]       bg_raddr,
  output logic [TAG_W+RGB_W:0]               bg_rdata,
  output logic                               active_buf
);

  localparam int unsigned SW = $clog2(SETS);
  localparam int unsigned WW = $clog2(WAYS);

  initial begin
    assert (WAYS == 4) else $fatal(1, "lumin_cache: tree PLRU is written for 4 ways");
    assert (SETS <= (1 << SET_W)) else $fatal(1, "lumin_cache: more sets than index bits");
  end

  logic [TAG_W-1:0] tag_mem [2][SETS][WAYS];
  logic [RGB_W-1:0] rgb_mem [2][SETS][WAYS];
  logic [WAYS-1:0]  vld_q   [2][SETS];
  logic [2:0]       plru_q  [2][SETS];
  logic             act_q;

  // ---------------- index and tag from the alpha-record ----------------
  logic [SET_W-1:0] idx_full;
  logic [SW-1:0]    set;
  logic [TAG_W-1:0] tag;

  always_comb begin
    for (int unsigned k = 0; k < K_REC; k++) begin
      idx_full[(K_REC-1-k)*IDX_PER_ID +: IDX_PER_ID] = req.ids[k][IDX_PER_ID-1:0];
      tag[(K_REC-1-k)*TAG_PER_ID +: TAG_PER_ID]      = req.ids[k][TAG_LSB +: TAG_PER_ID];
    end
    set = idx_full[SW-1:0];
  end

  // ---------------- way compare ----------------
  logic [WAYS-1:0] match;
  logic            hit;
  logic [WW-1:0]   hit_way, free_way, victim, fill_way;
  logic            any_free;
  logic [2:0]      pl, pl_new;

  function automatic logic [2:0] plru_touch(input logic [2:0] b, input logic [1:0] w);
    logic [2:0] n;
    n = b;
    if (w[1] == 1'b0) begin n[0] = 1'b1; n[1] = (w == 2'd0); end
    else              begin n[0] = 1'b0; n[2] = (w == 2'd2); end
    return n;
  endfunction

  always_comb begin
    pl       = plru_q[act_q][set];
    hit_way  = '0;
    free_way = '0;
    any_free = 1'b0;
    for (int i = WAYS - 1; i >= 0; i--) begin
      match[i] = vld_q[act_q][set][i] && tag_mem[act_q][set][i] == tag;
      if (match[i]) hit_way = WW'(i);
      if (!vld_q[act_q][set][i]) begin free_way = WW'(i); any_free = 1'b1; end
    end
    hit      = |match;
    victim   = (pl[0] == 1'b0) ? {1'b0, pl[1]} : {1'b1, pl[2]};
    fill_way = hit ? hit_way : (any_free ? free_way : victim);
    pl_new   = plru_touch(pl, req.op == CACHE_LOOKUP ? hit_way : fill_way);
  end

  // ---------------- state ----------------
  logic [SW-1:0] bws, brs;
  logic [WW-1:0] bww, brw;
  assign {bws, bww} = bg_waddr;
  assign {brs, brw} = bg_raddr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act_q     <= 1'b0;
      rsp_valid <= 1'b0;
      for (int b = 0; b < 2; b++)
        for (int s = 0; s < SETS; s++) begin
          vld_q[b][s]  <= '0;
          plru_q[b][s] <= '0;
        end
    end else begin
      rsp_valid <= req_valid && req.op == CACHE_LOOKUP;
      if (swap) act_q <= !act_q;
      if (req_valid) begin
        if (req.op == CACHE_LOOKUP) begin
          if (hit) plru_q[act_q][set] <= pl_new;
        end else begin
          vld_q[act_q][set][fill_way] <= 1'b1;
          plru_q[act_q][set]          <= pl_new;
        end
      end
      if (bg_flush) begin
        for (int s = 0; s < SETS; s++) begin
          vld_q[!act_q][s]  <= '0;
          plru_q[!act_q][s] <= '0;
        end
      end else if (bg_we) begin
        vld_q[!act_q][bws][bww] <= bg_wdata[TAG_W+RGB_W];
      end
    end
  end

  always_ff @(posedge clk) begin
    rsp.hit <= hit;
    rsp.rgb <= rgb_mem[act_q][set][hit_way];
    if (req_valid && req.op == CACHE_UPDATE) begin
      tag_mem[act_q][set][fill_way] <= tag;
      rgb_mem[act_q][set][fill_way] <= req.rgb;
    end
    if (bg_we && !bg_flush) begin
      tag_mem[!act_q][bws][bww] <= bg_wdata[RGB_W +: TAG_W];
      rgb_mem[!act_q][bws][bww] <= bg_wdata[RGB_W-1:0];
    end
    if (bg_re) bg_rdata <= {vld_q[!act_q][brs][brw], tag_mem[!act_q][brs][brw], rgb_mem[!act_q][brs][brw]};
  end

  assign active_buf = act_q;

endmodule
