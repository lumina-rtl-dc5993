// lumina_backend: colour-integration backend of a Neural Rendering Unit.
//
// Shared by the NRU's four PEs. Every cycle it takes one significant Gaussian
// from the shift registers and integrates it into the pixel it belongs to,
// following the paper's backend drawing:
//   Expo          alpha = opacity * exp(-e)
//   > tau         alpha must exceed tau (1/255 by default) to count
//   T-Comp        T' = T * (1 - alpha), held per pixel in a register
//   > 1e-4        the pixel keeps integrating while T' > 1e-4, otherwise it
//                 terminates and this Gaussian is not integrated (3DGS rule)
//   3 MACs        C += (alpha * T) * (R,G,B)
//   alpha-Record  IDs of the first K_REC integrated Gaussians per pixel, the
//                 radiance-cache key
// Two stages: stage 1 pops the queue and runs Expo; stage 2 does the rest.
// The per-pixel state update happens in one cycle, so back-to-back Gaussians of
// the same pixel need no forwarding.
//
// Events to the NRU controller (combinational, from stage 2):
//   ev_full  the K_REC-th Gaussian of a pixel in its dense pass was recorded
//            (only with rc_en); ev_idx is the list position to resume from
//   ev_term  a pixel's transmittance fell to 1e-4
// active[p] gates everything: a Gaussian of a pixel that is not being
// integrated (finished, waiting for the cache) is dropped.
// The stage boundaries, the number formats and the rounding of the output
// colour are this design's choices.
module lumina_backend
  import lumina_pkg::*;
(
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               start,     // clear all pixel state
  input  logic                               rc_en,
  input  logic [A_W-1:0]                     tau,
  input  logic [PE_PER_NRU-1:0]              active,
  input  logic [PE_PER_NRU-1:0]              dense,     // pixel is in its dense pass
  // shift-register queue
  input  sig_t                               q_head,
  input  logic                               q_empty,
  output logic                               q_pop,
  // events
  output logic                               ev_full,
  output logic                               ev_term,
  output logic [1:0]                         ev_pix,
  output logic [LIST_W-1:0]                  ev_idx,
  // per-pixel results
  output logic [PE_PER_NRU-1:0][RGB_W-1:0]   rgb,
  output logic [PE_PER_NRU-1:0][K_REC-1:0][GID_W-1:0] rec,
  output logic                               busy,
  // statistics
  output logic                               integ      // a Gaussian was integrated
);

  localparam int unsigned NP = PE_PER_NRU;
  localparam int unsigned CW = $clog2(K_REC + 1);

  assign q_pop = !q_empty;

  // ---------------- stage 1: Expo ----------------
  logic           v1;
  logic [A_W-1:0] alpha1, alpha_c;
  gmeta_t         m1;

  lumina_expo u_expo (.e(q_head.e), .op(q_head.m.op), .alpha(alpha_c));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     v1 <= 1'b0;
    else if (start) v1 <= 1'b0;
    else            v1 <= !q_empty;
  end

  always_ff @(posedge clk) begin
    alpha1 <= alpha_c;
    m1     <= q_head.m;
  end

  // ---------------- stage 2: T-Comp, MACs, alpha-record ----------------
  logic [NP-1:0][T_W-1:0]   t_q;
  logic [NP-1:0][ACC_W-1:0] cr_q, cg_q, cb_q;
  logic [NP-1:0][CW-1:0]    cnt_q;

  logic [1:0]      p;
  logic            sig, live, cont;
  logic [33:0]     t_prod, w_prod;
  logic [T_W-1:0]  t_new;
  logic [16:0]     w;

  always_comb begin
    p      = m1.pix;
    live   = v1 && active[p];
    sig    = alpha1 > tau;
    t_prod = 34'(t_q[p]) * 34'(17'(T_ONE) - 17'(alpha1));
    t_new  = T_W'(t_prod >> 16);
    cont   = t_new > T_STOP;
    w_prod = 34'(alpha1) * 34'(t_q[p]);
    w      = 17'(w_prod >> 16);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t_q   <= '0;
      cr_q  <= '0;
      cg_q  <= '0;
      cb_q  <= '0;
      cnt_q <= '0;
      rec   <= '0;
    end else begin
      if (start) begin
        for (int unsigned i = 0; i < NP; i++) begin
          t_q[i]   <= T_ONE;
          cr_q[i]  <= '0;
          cg_q[i]  <= '0;
          cb_q[i]  <= '0;
          cnt_q[i] <= '0;
          rec[i]   <= '0;
        end
      end else if (live && sig) begin
        if (cont) begin
          t_q[p]  <= t_new;
          cr_q[p] <= cr_q[p] + ACC_W'(w) * ACC_W'(m1.r);
          cg_q[p] <= cg_q[p] + ACC_W'(w) * ACC_W'(m1.g);
          cb_q[p] <= cb_q[p] + ACC_W'(w) * ACC_W'(m1.b);
          if (cnt_q[p] < CW'(K_REC)) begin
            rec[p][cnt_q[p]] <= m1.gid;
            cnt_q[p]         <= cnt_q[p] + 1'b1;
          end
        end
      end
    end
  end

  // Events are combinational so that the controller's pixel state changes at
  // the same clock edge as the pixel's registers.
  always_comb begin
    ev_pix  = p;
    ev_idx  = m1.idx + 1'b1;
    integ   = live && sig && cont;
    ev_term = live && sig && !cont;
    ev_full = integ && rc_en && dense[p] && cnt_q[p] == CW'(K_REC - 1);
  end

  // Colour out: round Q10.16 to an integer and clamp to 8 bits.
  function automatic logic [7:0] to8(input logic [ACC_W-1:0] c);
    logic [ACC_W-1:0] r;
    r = (c + ACC_W'(32768)) >> 16;
    return (r > ACC_W'(255)) ? 8'd255 : r[7:0];
  endfunction

  always_comb begin
    for (int unsigned i = 0; i < NP; i++)
      rgb[i] = {to8(cr_q[i]), to8(cg_q[i]), to8(cb_q[i])};
  end

  assign busy = v1;

endmodule
