// lumina_pkg: number formats, record types and shared constants of the
// LuminCore radiance-cached rasterizer.
//
// Fixed-point formats (all chosen by this design, the paper gives none):
//   screen coordinates   signed Q11.4   (COORD_W=16, COORD_F=4)
//   conic coefficients   signed Q5.12   (CON_W=18,  CON_F=12)
//   exponent e = -power  unsigned Q6.10 (E_W=16,    E_F=10), saturating
//   opacity              unsigned Q0.8
//   alpha                unsigned Q0.16
//   transmittance T      unsigned Q1.16 (1.0 = 65536)
//   colour               8 bit per channel, accumulated in Q8.16
//
// The radiance-cache key is the first K_REC = 5 significant Gaussian IDs of a
// pixel (the paper's default alpha-record length). From each 32-bit ID the two
// lowest bits go to the set index (5 x 2 = 10 bits = 1024 sets) and bits
// [17:2] (the "3rd to 18th least significant bits") go to the tag
// (5 x 16 = 80 bits = 10 bytes), as the paper's evaluated configuration states.
package lumina_pkg;

  // ---------------- sizes from the paper ----------------
  localparam int unsigned GID_W      = 32;  // Gaussian ID width (88 B alpha-record / 4 pixels / 5 IDs)
  localparam int unsigned K_REC      = 5;   // alpha-record length
  localparam int unsigned PE_PER_NRU = 4;   // four PEs per NRU
  localparam int unsigned IDX_PER_ID = 2;   // ID bits [1:0] -> set index
  localparam int unsigned TAG_LSB    = 2;   // ID bits [17:2] -> tag
  localparam int unsigned TAG_PER_ID = 16;
  localparam int unsigned SET_W      = K_REC * IDX_PER_ID;   // 10 -> 1024 sets
  localparam int unsigned TAG_W      = K_REC * TAG_PER_ID;   // 80 bits
  localparam int unsigned RGB_W      = 24;

  // ---------------- number formats (this design's choice) ----------------
  localparam int unsigned COORD_W = 16;
  localparam int unsigned COORD_F = 4;
  localparam int unsigned CON_W   = 18;
  localparam int unsigned CON_F   = 12;
  localparam int unsigned E_W     = 16;
  localparam int unsigned E_F     = 10;
  localparam int unsigned OP_W    = 8;
  localparam int unsigned A_W     = 16;
  localparam int unsigned T_W     = 17;
  localparam int unsigned ACC_W   = 26;  // colour accumulator Q10.16
  localparam int unsigned LIST_W  = 13;  // position in a tile's sorted list (0..4096)

  localparam logic [T_W-1:0] T_ONE       = 17'd65536;
  localparam logic [T_W-1:0] T_STOP      = 17'd6;     // floor(1e-4 * 65536): keep going while T > 1e-4
  localparam logic [A_W-1:0] TAU_DEFAULT = 16'd257;   // 1/255 in Q0.16

  // One Gaussian as held in the feature buffer (166 bits, stored in 22 bytes).
  typedef struct packed {
    logic [GID_W-1:0]          gid;
    logic signed [COORD_W-1:0] x;      // projected centre, Q11.4
    logic signed [COORD_W-1:0] y;
    logic signed [CON_W-1:0]   conx;   // a/4   (conic a*dx^2 + 2b*dx*dy + c*dy^2)
    logic signed [CON_W-1:0]   cony;   // b
    logic signed [CON_W-1:0]   conz;   // c/4
    logic [OP_W-1:0]           op;     // opacity, Q0.8
    logic [E_W-1:0]            thr;    // ln(255*opacity), Q6.10: e < thr <=> alpha > 1/255
    logic [7:0]                r;      // view-dependent colour, already evaluated
    logic [7:0]                g;
    logic [7:0]                b;
  } feature_t;

  // Sideband carried by a Gaussian through a PE into the shift registers.
  typedef struct packed {
    logic [GID_W-1:0]  gid;
    logic [LIST_W-1:0] idx;   // position in the sorted list
    logic [1:0]        pix;   // pixel of the NRU it belongs to
    logic [OP_W-1:0]   op;
    logic [7:0]        r;
    logic [7:0]        g;
    logic [7:0]        b;
  } gmeta_t;

  // One shift-register entry: a significant Gaussian for one pixel (95 bits).
  typedef struct packed {
    gmeta_t          m;
    logic [E_W-1:0]  e;
  } sig_t;

  typedef enum logic {CACHE_LOOKUP = 1'b0, CACHE_UPDATE = 1'b1} cache_op_e;

  // Request from an NRU to LuminCache.
  typedef struct packed {
    cache_op_e                   op;
    logic [K_REC-1:0][GID_W-1:0] ids;   // first K significant Gaussian IDs, ids[0] first
    logic [RGB_W-1:0]            rgb;   // value to store (update only)
  } cache_req_t;

  typedef struct packed {
    logic             hit;
    logic [RGB_W-1:0] rgb;
  } cache_rsp_t;

  // 2^(-i/16) in Q0.16, i = 0..16, used by the exponent unit.
  function automatic logic [16:0] exp2_lut(input logic [4:0] i);
    case (i)
      5'd0:  return 17'd65536;  5'd1:  return 17'd62757;  5'd2:  return 17'd60097;
      5'd3:  return 17'd57549;  5'd4:  return 17'd55109;  5'd5:  return 17'd52773;
      5'd6:  return 17'd50535;  5'd7:  return 17'd48393;  5'd8:  return 17'd46341;
      5'd9:  return 17'd44376;  5'd10: return 17'd42495;  5'd11: return 17'd40693;
      5'd12: return 17'd38968;  5'd13: return 17'd37316;  5'd14: return 17'd35734;
      5'd15: return 17'd34219;  default: return 17'd32768;
    endcase
  endfunction

  localparam logic [15:0] LOG2E_Q15 = 16'd47274;  // log2(e) in Q1.15

endpackage
