// lumina_feature_buf: double-buffered Gaussian feature buffer of LuminCore.
//
// Holds the depth-sorted Gaussians of the tile being rendered (features in
// lumina_pkg::feature_t, list position = address). While the NRUs read the
// active buffer, the DMA fills the idle one with the next tile's list; swap
// exchanges them. Size: the paper gives 176 KB in total for the double buffer;
// with 22-byte feature records that is DEPTH = 4096 Gaussians per buffer.
// The paper does not describe the read side. Here every PE lane of the NRU
// array has its own read port (NRD = 64 NRUs x 4 PEs), each with one cycle of
// latency, which in silicon would be banking and broadcast; in dense mode all
// lanes of the array read the same few addresses.
// Interface: wr_en/wr_addr/wr_data write the idle buffer; rd_valid[i]/rd_addr[i]
// read the active buffer, rd_data[i] the next cycle (held otherwise); swap takes
// effect at the next clock edge.
module lumina_feature_buf
  import lumina_pkg::*;
#(
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned NRD   = 256,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    swap,
  input  logic                    wr_en,
  input  logic [AW-1:0]           wr_addr,
  input  feature_t                wr_data,
  input  logic [NRD-1:0]          rd_valid,
  input  logic [NRD-1:0][AW-1:0]  rd_addr,
  output feature_t [NRD-1:0]      rd_data,
  output logic                    active_buf
);

  feature_t mem [2][DEPTH];
  logic     act_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    act_q <= 1'b0;
    else if (swap) act_q <= !act_q;
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[!act_q][wr_addr] <= wr_data;
    for (int unsigned i = 0; i < NRD; i++)
      if (rd_valid[i]) rd_data[i] <= mem[act_q][rd_addr[i]];
  end

  assign active_buf = act_q;

endmodule
