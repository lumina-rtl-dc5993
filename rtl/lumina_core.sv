// lumina_core: LuminCore, a radiance-cached Gaussian-splatting rasterizer.
//
// LuminCore takes over the Rasterization step of 3D Gaussian Splatting from the
// GPU of a mobile SoC. The GPU projects and depth-sorts the Gaussians; the DMA
// places a tile's sorted Gaussian list in the feature buffer; LuminCore then
// renders the tile's pixels. It holds, as in the paper:
//   * an array of NRU_X x NRU_Y Neural Rendering Units (8 x 8), four PEs each,
//     so that one 16 x 16-pixel tile (256 pixels) is rendered at a time
//   * LuminCache, the radiance cache shared by all NRUs (through a round-robin
//     arbiter, this design's choice)
//   * the double-buffered feature buffer (176 KB) and output buffer (6 KB)
// Tile sequencing is the small controller below; in the SoC the MCU drives it.
//
// Pixel mapping (this design's): pixel p = 4*n + l of the tile (row-major,
// TILE_W wide) belongs to NRU n, lane l.
//
// Interface:
//   fb_*       DMA writes of the idle feature buffer, fb_swap flips buffers
//   c_*        DMA side of LuminCache's idle buffer (save, load, flush, swap)
//   ob_*       DMA reads of the idle output buffer, ob_swap flips buffers
//   tile_*     start one tile: its origin in pixels, its list length, the
//              output-buffer slot, rc_en (radiance caching on) and tau
//   busy/tile_done   tile_done pulses when the tile is in the output buffer
//   stats      running event counters (cleared by reset)
// Timing: tile_start is taken when !busy; the NRUs start two cycles later and
// the tile is written to the output buffer in the cycle after the last NRU is
// done.
module lumina_core
  import lumina_pkg::*;
#(
  parameter int unsigned NRU_X     = 8,
  parameter int unsigned NRU_Y     = 8,
  parameter int unsigned TILE_W    = 16,
  parameter int unsigned FB_DEPTH  = 4096,
  parameter int unsigned OB_TILES  = 4,
  parameter int unsigned QDEPTH    = 13,
  parameter int unsigned C_WAYS    = 4,
  parameter int unsigned C_SETS    = 1024,
  parameter int unsigned NRU   = NRU_X * NRU_Y,
  parameter int unsigned PIX   = NRU * PE_PER_NRU,
  parameter int unsigned FB_AW = $clog2(FB_DEPTH),
  parameter int unsigned OB_SW = (OB_TILES > 1) ? $clog2(OB_TILES) : 1,
  parameter int unsigned PIX_W = $clog2(PIX),
  parameter int unsigned CA_W  = $clog2(C_SETS * C_WAYS)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // feature buffer (DMA side)
  input  logic                     fb_swap,
  input  logic                     fb_wr_en,
  input  logic [FB_AW-1:0]         fb_wr_addr,
  input  feature_t                 fb_wr_data,
  // LuminCache (DMA side)
  input  logic                     c_swap,
  input  logic                     c_flush,
  input  logic                     c_we,
  input  logic [CA_W-1:0]          c_waddr,
  input  logic [TAG_W+RGB_W:0]     c_wdata,
  input  logic                     c_re,
  input  logic [CA_W-1:0]          c_raddr,
  output logic [TAG_W+RGB_W:0]     c_rdata,
  // output buffer (DMA side)
  input  logic                     ob_swap,
  input  logic                     ob_rd_en,
  input  logic [OB_SW-1:0]         ob_rd_slot,
  input  logic [PIX_W-1:0]         ob_rd_pix,
  output logic [RGB_W-1:0]         ob_rd_data,
  // tile command (MCU side)
  input  logic                     tile_start,
  input  logic [11:0]              tile_x0,
  input  logic [11:0]              tile_y0,
  input  logic [LIST_W-1:0]        tile_len,
  input  logic [OB_SW-1:0]         tile_slot,
  input  logic                     rc_en,
  input  logic [A_W-1:0]           tau,
  output logic                     busy,
  output logic                     tile_done,
  output logic                     fb_active,        // buffer the NRUs read
  output logic                     c_active,         // cache buffer the NRUs use
  output logic                     ob_active,        // buffer tiles are written to
  // statistics
  output logic [31:0]              st_cycles,        // cycles with a tile in flight
  output logic [31:0]              st_dense_issue,   // NRU-cycles issuing in dense mode
  output logic [31:0]              st_sparse_issue,  // NRU-cycles issuing in sparse (remapped) mode
  output logic [31:0]              st_credit_stall,  // NRU-cycles held back by a full queue
  output logic [31:0]              st_hits,
  output logic [31:0]              st_misses,
  output logic [31:0]              st_integ          // Gaussians integrated
);

  initial assert (PIX == TILE_W * TILE_W)
    else $fatal(1, "lumina_core: NRUs x PEs must cover one square tile");
  initial assert (FB_DEPTH < (1 << LIST_W))
    else $fatal(1, "lumina_core: list positions need more bits");

  // ---------------- tile controller ----------------
  typedef enum logic [1:0] {S_IDLE, S_START, S_RUN} cstate_e;
  cstate_e            cs_q;
  logic [11:0]        x0_q, y0_q;
  logic [LIST_W-1:0]  len_q;
  logic [OB_SW-1:0]   slot_q;
  logic               rc_q;
  logic [A_W-1:0]     tau_q;
  logic               nru_start;
  logic [NRU-1:0]     nru_done;
  logic               all_done;

  assign all_done  = &nru_done;
  assign nru_start = cs_q == S_START;
  assign busy      = cs_q != S_IDLE;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cs_q      <= S_IDLE;
      x0_q      <= '0;
      y0_q      <= '0;
      len_q     <= '0;
      slot_q    <= '0;
      rc_q      <= 1'b0;
      tau_q     <= TAU_DEFAULT;
      tile_done <= 1'b0;
    end else begin
      tile_done <= 1'b0;
      case (cs_q)
        S_IDLE: if (tile_start) begin
          cs_q   <= S_START;
          x0_q   <= tile_x0;
          y0_q   <= tile_y0;
          len_q  <= tile_len;
          slot_q <= tile_slot;
          rc_q   <= rc_en;
          tau_q  <= tau;
        end
        S_START: cs_q <= S_RUN;
        S_RUN: if (all_done) begin
          cs_q      <= S_IDLE;
          tile_done <= 1'b1;
        end
        default: cs_q <= S_IDLE;
      endcase
    end
  end

  // ---------------- feature buffer ----------------
  logic [PIX-1:0]             rd_valid;
  logic [PIX-1:0][FB_AW-1:0]  rd_addr;
  feature_t [PIX-1:0]         rd_data;
  logic                       fb_act;

  lumina_feature_buf #(.DEPTH(FB_DEPTH), .NRD(PIX)) u_fb (
    .clk, .rst_n, .swap(fb_swap), .wr_en(fb_wr_en), .wr_addr(fb_wr_addr),
    .wr_data(fb_wr_data), .rd_valid, .rd_addr, .rd_data, .active_buf(fb_act));

  // ---------------- cache and arbiter ----------------
  logic [NRU-1:0]        creq_v, creq_g, crsp_v;
  cache_req_t [NRU-1:0]  creq;
  logic                  c_req_valid, c_rsp_valid;
  cache_req_t            c_req;
  cache_rsp_t            c_rsp;
  logic                  c_act;

  lumina_cache_arb #(.N(NRU)) u_arb (
    .clk, .rst_n, .req_valid(creq_v), .req(creq), .gnt(creq_g),
    .c_req_valid, .c_req, .c_rsp_valid, .rsp_valid(crsp_v));

  lumin_cache #(.WAYS(C_WAYS), .SETS(C_SETS)) u_cache (
    .clk, .rst_n, .req_valid(c_req_valid), .req(c_req),
    .rsp_valid(c_rsp_valid), .rsp(c_rsp),
    .swap(c_swap), .bg_flush(c_flush), .bg_we(c_we), .bg_waddr(c_waddr),
    .bg_wdata(c_wdata), .bg_re(c_re), .bg_raddr(c_raddr), .bg_rdata(c_rdata),
    .active_buf(c_act));

  // ---------------- NRU array ----------------
  logic [PIX-1:0][RGB_W-1:0] pix_rgb;
  logic [NRU-1:0] s_di, s_si, s_cs, s_h, s_m, s_i;

  for (genvar n = 0; n < NRU; n++) begin : g_nru
    logic signed [PE_PER_NRU-1:0][COORD_W-1:0] px, py;
    always_comb begin
      for (int unsigned l = 0; l < PE_PER_NRU; l++) begin
        int unsigned p;
        p     = n * PE_PER_NRU + l;
        px[l] = COORD_W'(({4'd0, x0_q} + 16'(p % TILE_W)) << COORD_F) + COORD_W'(1 << (COORD_F - 1));
        py[l] = COORD_W'(({4'd0, y0_q} + 16'(p / TILE_W)) << COORD_F) + COORD_W'(1 << (COORD_F - 1));
      end
    end

    lumina_nru #(.FB_AW(FB_AW), .QDEPTH(QDEPTH)) u_nru (
      .clk, .rst_n, .start(nru_start), .rc_en(rc_q), .tau(tau_q), .list_len(len_q),
      .pix_x(px), .pix_y(py),
      .fb_valid(rd_valid[n*PE_PER_NRU +: PE_PER_NRU]),
      .fb_addr(rd_addr[n*PE_PER_NRU +: PE_PER_NRU]),
      .fb_data(rd_data[n*PE_PER_NRU +: PE_PER_NRU]),
      .creq_valid(creq_v[n]), .creq(creq[n]), .creq_gnt(creq_g[n]),
      .crsp_valid(crsp_v[n]), .crsp(c_rsp),
      .done(nru_done[n]),
      .pix_rgb(pix_rgb[n*PE_PER_NRU +: PE_PER_NRU]),
      .st_dense_issue(s_di[n]), .st_sparse_issue(s_si[n]), .st_credit_stall(s_cs[n]),
      .st_hit(s_h[n]), .st_miss(s_m[n]), .st_integ(s_i[n]));
  end

  // ---------------- output buffer ----------------
  logic ob_act;
  lumina_output_buf #(.TILES(OB_TILES), .PIX(PIX)) u_ob (
    .clk, .rst_n, .swap(ob_swap), .wr_en(cs_q == S_RUN && all_done), .wr_slot(slot_q),
    .wr_pix(pix_rgb), .rd_en(ob_rd_en), .rd_slot(ob_rd_slot), .rd_pix(ob_rd_pix),
    .rd_data(ob_rd_data), .active_buf(ob_act));

  // ---------------- statistics ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_cycles       <= '0;
      st_dense_issue  <= '0;
      st_sparse_issue <= '0;
      st_credit_stall <= '0;
      st_hits         <= '0;
      st_misses       <= '0;
      st_integ        <= '0;
    end else if (cs_q == S_RUN) begin
      st_cycles       <= st_cycles + 1;
      st_dense_issue  <= st_dense_issue  + 32'($countones(s_di));
      st_sparse_issue <= st_sparse_issue + 32'($countones(s_si));
      st_credit_stall <= st_credit_stall + 32'($countones(s_cs));
      st_hits         <= st_hits   + 32'($countones(s_h));
      st_misses       <= st_misses + 32'($countones(s_m));
      st_integ        <= st_integ  + 32'($countones(s_i));
    end
  end

  // Buffers are swapped only between tiles.
  a_fb_swap_idle: assert property (@(posedge clk) disable iff (!rst_n) fb_swap |-> !busy);
  a_c_swap_idle:  assert property (@(posedge clk) disable iff (!rst_n) c_swap  |-> !busy);

  assign fb_active = fb_act;
  assign c_active  = c_act;
  assign ob_active = ob_act;

endmodule
