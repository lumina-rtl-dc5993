// lumina_expo: exponential unit of the NRU backend.
//
// Computes alpha = opacity * exp(-e) for an exponent e >= 0 (Q6.10) and an
// opacity in Q0.8, giving alpha in Q0.16. The paper names this unit ("Expo")
// and places it at the head of the backend but does not give its insides; this
// is the simplest implementation this design could find:
//   y      = e * 1.4427 (log2 of Euler's number)   (Q.25, one multiplier)
//   2^-y   = 2^-frac(y) >> int(y)
//   2^-f   from a 17-entry table of 2^(-i/16) with linear interpolation
// Maximum relative error of 2^-f is about 3e-4, well below one 8-bit colour LSB.
// Purely combinational; the backend registers its output.
module lumina_expo
  import lumina_pkg::*;
(
  input  logic [E_W-1:0]  e,
  input  logic [OP_W-1:0] op,
  output logic [A_W-1:0]  alpha
);

  logic [31:0] y;
  logic [6:0]  yi;
  logic [3:0]  li;
  logic [15:0] fr;
  logic [16:0] l0, l1;
  logic [32:0] dl;
  logic [16:0] m;
  logic [16:0] ex;
  logic [24:0] prod;

  always_comb begin
    y    = 32'(e) * 32'(LOG2E_Q15);          // Q.25
    yi   = y[31:25];
    li   = y[24:21];
    fr   = y[20:5];
    l0   = exp2_lut({1'b0, li});
    l1   = exp2_lut(5'({1'b0, li}) + 5'd1);
    dl   = 33'(l0 - l1) * 33'(fr);
    m    = l0 - 17'(dl >> 16);
    ex   = (yi > 7'd16) ? 17'd0 : (m >> yi);
    prod = 25'(ex) * 25'(op);                // Q.24
    alpha = prod[23:8];
  end

endmodule
