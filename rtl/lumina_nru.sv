// lumina_nru: Neural Rendering Unit.
//
// An NRU renders four pixels of a tile. It has a frontend of four PEs
// (lumina_pe), a shift-register queue (lumina_shift_fifo) and one backend
// (lumina_backend) shared by the PEs, as in the paper. The frontend tests every
// Gaussian of the tile's sorted list, the backend integrates only the
// significant ones, so the backend stays busy although only about one Gaussian
// in ten matters.
//
// Per pixel the NRU runs the radiance-cached rasterization:
//   DENSE   the four PEs read the same Gaussian, one pixel each (normal mode)
//   LOOKUP  the alpha-record holds K_REC IDs: look the pixel up in LuminCache
//   WAIT    waiting for the cache's answer
//   MISS    cache miss, waiting for the PEs
//   SPARSE  the four PEs read four consecutive Gaussians of this one pixel
//           (sparsity-aware remapping), continuing where the dense pass left
//   UPDATE  the pixel is complete: write its colour into LuminCache
//   DONE    colour final (integrated, or the cached value on a hit)
// With rc_en low every pixel stays DENSE until its list ends or its
// transmittance drops below 1e-4, which is plain 3DGS rasterization.
// The dense pass of the NRU goes on while any pixel is DENSE; the sparse
// pass serves missed pixels one after another once no pixel is DENSE and the
// PEs, queue and backend have drained (so that no dense-pass entry of a pixel
// can be integrated after its sparse pass has begun).
// Gaussians still in the pipeline for a pixel that left DENSE/SPARSE are
// dropped by the backend; a missed pixel re-reads them in its sparse pass.
//
// The states, the per-NRU (rather than array-wide) remapping and the
// one-request-at-a-time cache port are this design's choices; the paper gives
// the PE/queue/backend structure, the two modes and the cache protocol.
//
// Interface:
//   start        one-cycle pulse: new tile, list_len Gaussians, pixel centres
//                pix_x/pix_y (Q11.4) of the NRU's four pixels
//   fb_*         four feature-buffer read lanes; data returns one cycle later
//   creq_*       cache request, held until creq_gnt; crsp_valid returns the
//                lookup result one cycle after the grant
//   done         all four pixels final; pix_rgb valid while done
// Timing: a Gaussian issued at cycle t reaches the queue at t+4 and is
// integrated at t+6 at the earliest. Issue is throttled so that the queue can
// never overflow: a group is issued only if the queue's free entries cover
// every Gaussian already in flight plus the new ones.
module lumina_nru
  import lumina_pkg::*;
#(
  parameter int unsigned FB_AW = 12,   // feature-buffer address width
  parameter int unsigned QDEPTH = 13   // shift-register entries (160 B)
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic                                  start,
  input  logic                                  rc_en,
  input  logic [A_W-1:0]                        tau,
  input  logic [LIST_W-1:0]                     list_len,
  input  logic signed [PE_PER_NRU-1:0][COORD_W-1:0] pix_x,
  input  logic signed [PE_PER_NRU-1:0][COORD_W-1:0] pix_y,
  // feature buffer
  output logic [PE_PER_NRU-1:0]                 fb_valid,
  output logic [PE_PER_NRU-1:0][FB_AW-1:0]      fb_addr,
  input  feature_t [PE_PER_NRU-1:0]             fb_data,
  // LuminCache
  output logic                                  creq_valid,
  output cache_req_t                            creq,
  input  logic                                  creq_gnt,
  input  logic                                  crsp_valid,
  input  cache_rsp_t                            crsp,
  // results
  output logic                                  done,
  output logic [PE_PER_NRU-1:0][RGB_W-1:0]      pix_rgb,
  // activity pulses for statistics
  output logic                                  st_dense_issue,
  output logic                                  st_sparse_issue,
  output logic                                  st_credit_stall,
  output logic                                  st_hit,
  output logic                                  st_miss,
  output logic                                  st_integ
);

  localparam int unsigned NP = PE_PER_NRU;
  localparam int unsigned QCW = $clog2(QDEPTH + 1);

  typedef enum logic [2:0] {
    P_DENSE, P_LOOKUP, P_WAIT, P_MISS, P_SPARSE, P_UPDATE, P_DONE
  } pstate_e;

  pstate_e [NP-1:0]            st_q;
  logic [NP-1:0][LIST_W-1:0]   resume_q;
  logic [NP-1:0]               use_hit_q;
  logic [NP-1:0][RGB_W-1:0]    hit_rgb_q;
  logic [LIST_W-1:0]           dense_j_q;
  logic                        sp_act_q;
  logic [1:0]                  cur_q;
  logic [LIST_W-1:0]           sp_k_q;
  logic [3:0][NP-1:0]          msk_q;      // lanes in flight: fetch, PE1, PE2, PE3
  logic                        req_v_q;
  logic [1:0]                  req_pix_q;
  cache_op_e                   req_op_q;
  logic                        wait_q;     // lookup granted, answer pending
  logic [1:0]                  wait_pix_q;

  // ---------------- queue, PEs, backend ----------------
  sig_t [NP-1:0]    push_d;
  logic [NP-1:0]    push_v;
  sig_t             q_head;
  logic             q_empty, q_pop;
  logic [QCW-1:0]   q_count;

  lumina_shift_fifo #(.DEPTH(QDEPTH), .NPUSH(NP)) u_q (
    .clk, .rst_n, .push_valid(push_v), .push_data(push_d), .pop(q_pop),
    .head(q_head), .empty(q_empty), .count(q_count));

  logic [NP-1:0]        act, dns;
  logic                 ev_full, ev_term, be_busy;
  logic [1:0]           ev_pix;
  logic [LIST_W-1:0]    ev_idx;
  logic [NP-1:0][RGB_W-1:0] be_rgb;
  logic [NP-1:0][K_REC-1:0][GID_W-1:0] rec;

  lumina_backend u_be (
    .clk, .rst_n, .start, .rc_en, .tau, .active(act), .dense(dns),
    .q_head, .q_empty, .q_pop, .ev_full, .ev_term, .ev_pix, .ev_idx,
    .rgb(be_rgb), .rec, .busy(be_busy), .integ(st_integ));

  // lane sideband registered with the feature-buffer read
  gmeta_t [NP-1:0] lm_q, lm_d;
  logic   [NP-1:0] pe_sig, pe_v;
  logic   [NP-1:0][E_W-1:0] pe_e;
  gmeta_t [NP-1:0] pe_m;

  for (genvar l = 0; l < NP; l++) begin : g_pe
    gmeta_t mi;
    always_comb begin
      mi     = lm_q[l];
      mi.gid = fb_data[l].gid;
      mi.op  = fb_data[l].op;
      mi.r   = fb_data[l].r;
      mi.g   = fb_data[l].g;
      mi.b   = fb_data[l].b;
    end
    lumina_pe u_pe (
      .clk, .rst_n, .in_valid(msk_q[0][l]),
      .gau_x(fb_data[l].x), .gau_y(fb_data[l].y),
      .con_x(fb_data[l].conx), .con_y(fb_data[l].cony), .con_z(fb_data[l].conz),
      .thr(fb_data[l].thr),
      .pix_x(pix_x[lm_q[l].pix]), .pix_y(pix_y[lm_q[l].pix]),
      .in_meta(mi),
      .out_valid(pe_v[l]), .out_sig(pe_sig[l]), .out_e(pe_e[l]), .out_meta(pe_m[l]));
    assign push_v[l]   = pe_v[l] & pe_sig[l];
    assign push_d[l].m = pe_m[l];
    assign push_d[l].e = pe_e[l];
  end

  // ---------------- issue ----------------
  logic [NP-1:0] is_dense, is_miss, is_lookup, is_update, is_done;
  logic          any_dense, any_miss, drained, credit_ok;
  logic [NP-1:0] iss_msk;
  logic [5:0]    inflight;
  logic          issue_dense, issue_sparse;
  logic [1:0]    first_miss, first_lookup, first_update;
  logic          any_lookup, any_update;

  always_comb begin
    for (int unsigned i = 0; i < NP; i++) begin
      is_dense[i]  = st_q[i] == P_DENSE;
      is_miss[i]   = st_q[i] == P_MISS;
      is_lookup[i] = st_q[i] == P_LOOKUP;
      is_update[i] = st_q[i] == P_UPDATE;
      is_done[i]   = st_q[i] == P_DONE;
      act[i]       = st_q[i] == P_DENSE || st_q[i] == P_SPARSE;
      dns[i]       = is_dense[i];
    end
    any_dense  = |is_dense;
    any_miss   = |is_miss;
    any_lookup = |is_lookup;
    any_update = |is_update;
    first_miss = '0; first_lookup = '0; first_update = '0;
    for (int i = NP - 1; i >= 0; i--) begin
      if (is_miss[i])   first_miss   = 2'(i);
      if (is_lookup[i]) first_lookup = 2'(i);
      if (is_update[i]) first_update = 2'(i);
    end
    inflight = '0;
    for (int unsigned s = 0; s < 4; s++)
      for (int unsigned i = 0; i < NP; i++) inflight = inflight + 6'(msk_q[s][i]);
    drained   = (msk_q == '0) && q_empty && !be_busy;
    credit_ok = (6'(q_count) + inflight + 6'(NP)) <= 6'(QDEPTH);

    issue_dense  = any_dense && dense_j_q < list_len && credit_ok;
    issue_sparse = !any_dense && sp_act_q && st_q[cur_q] == P_SPARSE &&
                   sp_k_q < list_len && credit_ok;

    iss_msk = '0;
    for (int unsigned i = 0; i < NP; i++) begin
      lm_d[i]     = '0;
      fb_addr[i]  = '0;
      if (issue_dense) begin
        iss_msk[i]    = is_dense[i];
        fb_addr[i]    = FB_AW'(dense_j_q);
        lm_d[i].idx   = dense_j_q;
        lm_d[i].pix   = 2'(i);
      end else if (issue_sparse) begin
        iss_msk[i]    = (sp_k_q + LIST_W'(i)) < list_len;
        fb_addr[i]    = FB_AW'(sp_k_q + LIST_W'(i));
        lm_d[i].idx   = sp_k_q + LIST_W'(i);
        lm_d[i].pix   = cur_q;
      end
    end
    fb_valid = iss_msk;
  end

  assign st_dense_issue  = issue_dense;
  assign st_sparse_issue = issue_sparse;
  assign st_credit_stall = !credit_ok && (any_dense ? dense_j_q < list_len
                                         : (sp_act_q && st_q[cur_q] == P_SPARSE && sp_k_q < list_len));

  // ---------------- cache requests ----------------
  assign creq_valid = req_v_q;
  always_comb begin
    creq     = '0;
    creq.op  = req_op_q;
    creq.ids = rec[req_pix_q];
    creq.rgb = be_rgb[req_pix_q];
  end
  assign st_hit  = crsp_valid && crsp.hit;
  assign st_miss = crsp_valid && !crsp.hit;

  // ---------------- control ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < NP; i++) st_q[i] <= P_DONE;
      resume_q   <= '0;
      use_hit_q  <= '0;
      hit_rgb_q  <= '0;
      dense_j_q  <= '0;
      sp_act_q   <= 1'b0;
      cur_q      <= '0;
      sp_k_q     <= '0;
      msk_q      <= '0;
      lm_q       <= '0;
      req_v_q    <= 1'b0;
      req_pix_q  <= '0;
      req_op_q   <= CACHE_LOOKUP;
      wait_q     <= 1'b0;
      wait_pix_q <= '0;
    end else if (start) begin
      for (int unsigned i = 0; i < NP; i++) st_q[i] <= P_DENSE;
      resume_q  <= '0;
      use_hit_q <= '0;
      dense_j_q <= '0;
      sp_act_q  <= 1'b0;
      msk_q     <= '0;
      req_v_q   <= 1'b0;
      wait_q    <= 1'b0;
    end else begin
      msk_q <= {msk_q[2:0], iss_msk};
      lm_q  <= lm_d;
      if (issue_dense)  dense_j_q <= dense_j_q + 1'b1;
      if (issue_sparse) sp_k_q    <= sp_k_q + LIST_W'(NP);

      // backend events
      if (ev_full && st_q[ev_pix] == P_DENSE) begin
        st_q[ev_pix]     <= P_LOOKUP;
        resume_q[ev_pix] <= ev_idx;
      end
      if (ev_term) begin
        if (st_q[ev_pix] == P_DENSE)  st_q[ev_pix] <= P_DONE;
        if (st_q[ev_pix] == P_SPARSE) st_q[ev_pix] <= P_UPDATE;
      end

      // end of the dense pass: pixels whose list ran out are final
      if (any_dense && dense_j_q >= list_len && drained)
        for (int unsigned i = 0; i < NP; i++)
          if (is_dense[i]) st_q[i] <= P_DONE;

      // sparse pass: one missed pixel at a time
      if (sp_act_q) begin
        if (st_q[cur_q] != P_SPARSE) sp_act_q <= 1'b0;
        else if (sp_k_q >= list_len && drained) begin
          st_q[cur_q] <= P_UPDATE;
          sp_act_q    <= 1'b0;
        end
      end else if (!any_dense && any_miss && drained) begin
        cur_q              <= first_miss;
        st_q[first_miss]   <= P_SPARSE;
        sp_k_q             <= resume_q[first_miss];
        sp_act_q           <= 1'b1;
      end

      // cache port
      if (req_v_q) begin
        if (creq_gnt) begin
          req_v_q <= 1'b0;
          if (req_op_q == CACHE_LOOKUP) begin
            st_q[req_pix_q] <= P_WAIT;
            wait_q          <= 1'b1;
            wait_pix_q      <= req_pix_q;
          end else begin
            st_q[req_pix_q] <= P_DONE;
          end
        end
      end else if (!wait_q) begin
        if (any_update) begin
          req_v_q   <= 1'b1;
          req_op_q  <= CACHE_UPDATE;
          req_pix_q <= first_update;
        end else if (any_lookup) begin
          req_v_q   <= 1'b1;
          req_op_q  <= CACHE_LOOKUP;
          req_pix_q <= first_lookup;
        end
      end
      if (crsp_valid && wait_q) begin
        wait_q <= 1'b0;
        if (crsp.hit) begin
          st_q[wait_pix_q]      <= P_DONE;
          use_hit_q[wait_pix_q] <= 1'b1;
          hit_rgb_q[wait_pix_q] <= crsp.rgb;
        end else begin
          st_q[wait_pix_q] <= P_MISS;
        end
      end
    end
  end

  assign done = (&is_done) && drained && !req_v_q && !wait_q;

  always_comb
    for (int unsigned i = 0; i < NP; i++)
      pix_rgb[i] = use_hit_q[i] ? hit_rgb_q[i] : be_rgb[i];

  // A request stays valid and unchanged until granted.
  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n || start)
    req_v_q && !creq_gnt |=> req_v_q && $stable(req_pix_q) && $stable(req_op_q));

endmodule
