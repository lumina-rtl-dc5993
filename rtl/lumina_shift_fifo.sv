// lumina_shift_fifo: the NRU's shift-register queue between frontend and backend.
//
// The four PEs of an NRU may each find a significant Gaussian in the same
// cycle. Their entries are written into the queue in lane order (lane 0
// first), which keeps the sorted depth order when the four PEs work on four
// consecutive Gaussians of one pixel (sparse mode). The backend takes one entry
// per cycle from the head. As in the paper the queue is a set of shift
// registers: a pop shifts every entry one place towards the head.
//
// Depth: the paper gives 160 B of shift registers per NRU; with this design's
// 95-bit entries that holds 13 entries (DEPTH = 13, 1235 bits).
// Interface: push_valid[l]/push_data[l] for l = 0..NPUSH-1, pop (head
// consumed this cycle), head/empty, count. Pushing past DEPTH is an error the
// NRU avoids with a credit check; an assertion flags it.
module lumina_shift_fifo
  import lumina_pkg::*;
#(
  parameter int unsigned DEPTH = 13,
  parameter int unsigned NPUSH = PE_PER_NRU
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [NPUSH-1:0]         push_valid,
  input  sig_t [NPUSH-1:0]         push_data,
  input  logic                     pop,
  output sig_t                     head,
  output logic                     empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int unsigned CW = $clog2(DEPTH + 1);

  sig_t [DEPTH-1:0] mem, mem_n;
  logic [CW-1:0]    count_n;

  always_comb begin
    logic [CW:0] pos;
    mem_n = mem;
    pos   = (CW+1)'(count);
    if (pop && count != '0) begin
      for (int unsigned i = 0; i + 1 < DEPTH; i++) mem_n[i] = mem[i+1];
      pos = pos - 1'b1;
    end
    for (int unsigned l = 0; l < NPUSH; l++) begin
      if (push_valid[l] && pos < (CW+1)'(DEPTH)) begin
        mem_n[pos[CW-1:0]] = push_data[l];
        pos = pos + 1'b1;
      end
    end
    count_n = pos[CW-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) count <= '0;
    else        count <= count_n;
  end

  always_ff @(posedge clk) mem <= mem_n;

  assign head  = mem[0];
  assign empty = (count == '0);

  // Never push into a full queue.
  property p_no_overflow;
    @(posedge clk) disable iff (!rst_n)
      ((CW+2)'(count) + (CW+2)'($countones(push_valid)) - (CW+2)'(pop && count != '0)) <= (CW+2)'(DEPTH);
  endproperty
  a_no_overflow: assert property (p_no_overflow)
    else $error("lumina_shift_fifo: overflow");

endmodule
