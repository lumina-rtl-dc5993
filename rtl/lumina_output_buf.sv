// lumina_output_buf: double-buffered output buffer of LuminCore.
//
// Collects the final pixel colours of rendered tiles. The paper gives 6 KB for
// the double buffer, i.e. 3 KB per buffer: TILES = 4 tiles of 256 pixels of
// 24-bit RGB. The NRU array finishes a whole tile at once, so the write port
// takes one complete tile (all its pixels) per cycle into slot wr_slot of the
// active buffer. The DMA reads pixels of the idle buffer, one per cycle with one
// cycle latency; swap exchanges the buffers. Port shapes are this design's.
module lumina_output_buf
  import lumina_pkg::*;
#(
  parameter int unsigned TILES = 4,
  parameter int unsigned PIX   = 256,
  parameter int unsigned SLW   = (TILES > 1) ? $clog2(TILES) : 1,
  parameter int unsigned PW    = $clog2(PIX)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        swap,
  input  logic                        wr_en,
  input  logic [SLW-1:0]              wr_slot,
  input  logic [PIX-1:0][RGB_W-1:0]   wr_pix,
  input  logic                        rd_en,
  input  logic [SLW-1:0]              rd_slot,
  input  logic [PW-1:0]               rd_pix,
  output logic [RGB_W-1:0]            rd_data,
  output logic                        active_buf
);

  logic [PIX-1:0][RGB_W-1:0] mem [2][TILES];
  logic act_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    act_q <= 1'b0;
    else if (swap) act_q <= !act_q;
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[act_q][wr_slot] <= wr_pix;
    if (rd_en) rd_data <= mem[!act_q][rd_slot][rd_pix];
  end

  assign active_buf = act_q;

endmodule
