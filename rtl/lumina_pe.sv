// lumina_pe: frontend processing element of a Neural Rendering Unit.
//
// For one (Gaussian, pixel) pair the PE evaluates the Gaussian's exponent
//   e = -power = 0.5*(a*dx^2 + c*dy^2) + b*dx*dy,   dx = pix.x-gau.x, dy = pix.y-gau.y
// and decides whether the Gaussian is significant for that pixel.
// The datapath follows the paper's PE drawing: two subtractors, three
// multipliers (dx*dx, dx*dy, dy*dy), a MAC with con.x, a MAC with con.z, a left
// shift, a MAC with con.y, then a sign checker and a comparator whose results
// are ANDed. Three multipliers and three MACs in a three-stage pipeline are the
// paper's; the stage boundaries are this design's choice:
//   stage 1: subtract, three products
//   stage 2: MAC(con.x), MAC(con.z)
//   stage 3: <<1, MAC(con.y), sign check and compare
// To make the drawn "<<" yield the standard 3DGS exponent, con.x and con.z hold
// a/4 and c/4 (see lumina_pkg). The comparator in the drawing is labelled
// 1/255: alpha = opacity*exp(-e) > 1/255 is tested here in the exponent
// domain as e < thr, where thr = ln(255*opacity) comes with the Gaussian's
// features, because the PE has no exponential unit (that sits in the backend).
// The sign checker passes e >= 0 (power <= 0), as 3DGS skips power > 0.
//
// Interface: in_valid with the Gaussian, the pixel centre and a sideband
// (gmeta_t) that is carried along unchanged. Latency 3 cycles, one pair per
// cycle, no stall (the NRU issues only when the shift registers have room).
module lumina_pe
  import lumina_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic signed [COORD_W-1:0] gau_x,
  input  logic signed [COORD_W-1:0] gau_y,
  input  logic signed [CON_W-1:0]   con_x,
  input  logic signed [CON_W-1:0]   con_y,
  input  logic signed [CON_W-1:0]   con_z,
  input  logic [E_W-1:0]            thr,
  input  logic signed [COORD_W-1:0] pix_x,
  input  logic signed [COORD_W-1:0] pix_y,
  input  gmeta_t                    in_meta,
  output logic                      out_valid,
  output logic                      out_sig,    // significant: forward to backend
  output logic [E_W-1:0]            out_e,      // exponent, Q6.10, saturated
  output gmeta_t                    out_meta
);

  localparam int unsigned D_W  = COORD_W + 1;         // dx, Q.4
  localparam int unsigned P_W  = 2 * D_W;             // products, Q.8
  localparam int unsigned M_W  = P_W + CON_W + 3;     // MAC results, Q.20
  localparam int unsigned SHR  = 2 * COORD_F + CON_F - E_F;  // Q.20 -> Q.10

  // ---------------- stage 1 ----------------
  logic signed [D_W-1:0] dx, dy;
  logic                  v1;
  logic signed [P_W-1:0] pxx, pxy, pyy;
  logic signed [CON_W-1:0] cx1, cy1, cz1;
  logic [E_W-1:0]        thr1;
  gmeta_t                m1;

  always_comb begin
    dx = D_W'(pix_x) - D_W'(gau_x);
    dy = D_W'(pix_y) - D_W'(gau_y);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v1 <= 1'b0;
    else        v1 <= in_valid;
  end

  always_ff @(posedge clk) begin
    pxx  <= P_W'(dx) * P_W'(dx);
    pxy  <= P_W'(dx) * P_W'(dy);
    pyy  <= P_W'(dy) * P_W'(dy);
    cx1  <= con_x;
    cy1  <= con_y;
    cz1  <= con_z;
    thr1 <= thr;
    m1   <= in_meta;
  end

  // ---------------- stage 2 ----------------
  logic                  v2;
  logic signed [M_W-1:0] mac2, pxy2;
  logic signed [CON_W-1:0] cy2;
  logic [E_W-1:0]        thr2;
  gmeta_t                m2;
  logic signed [M_W-1:0] mac1;

  always_comb mac1 = M_W'(pxx) * M_W'(cx1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v2 <= 1'b0;
    else        v2 <= v1;
  end

  always_ff @(posedge clk) begin
    mac2 <= M_W'(pyy) * M_W'(cz1) + mac1;
    pxy2 <= M_W'(pxy);
    cy2  <= cy1;
    thr2 <= thr1;
    m2   <= m1;
  end

  // ---------------- stage 3 ----------------
  logic signed [M_W-1:0] mac3;
  logic signed [M_W-1:0] e_q10;
  logic                  sign_ok, below_thr;
  logic [E_W-1:0]        e_sat;

  always_comb begin
    mac3      = (mac2 <<< 1) + pxy2 * M_W'(cy2);
    e_q10     = mac3 >>> SHR;
    sign_ok   = !mac3[M_W-1];
    e_sat     = (e_q10 > M_W'({E_W{1'b1}})) ? {E_W{1'b1}} : e_q10[E_W-1:0];
    below_thr = e_sat < thr2;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= v2;
  end

  always_ff @(posedge clk) begin
    out_sig  <= sign_ok & below_thr;
    out_e    <= e_sat;
    out_meta <= m2;
  end

endmodule
