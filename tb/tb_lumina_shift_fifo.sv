// tb_lumina_shift_fifo: random bursts of up to four pushes per cycle (never
// more than the free space) with random pops. A scoreboard queue checks that
// entries leave in lane order, that count and empty are right, and that a
// pushed entry is visible at the head one cycle after being pushed into an
// empty queue.
module tb_lumina_shift_fifo;
  import lumina_pkg::*;

  localparam int DEPTH = 13;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [3:0] push_valid;
  sig_t [3:0] push_data;
  logic       pop;
  sig_t       head;
  logic       empty;
  logic [3:0] count;

  lumina_shift_fifo #(.DEPTH(DEPTH), .NPUSH(4)) dut (.clk, .rst_n, .push_valid, .push_data,
    .pop, .head, .empty, .count);

  int checks = 0, failures = 0, seq = 0, full_seen = 0;
  sig_t sb[$];

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push_valid = '0; push_data = '0; pop = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 20000; n++) begin
      int free, np;
      @(negedge clk);
      // check state
      checks++;
      if (int'(count) != sb.size() || empty != (sb.size() == 0)) begin
        failures++; $display("count %0d vs %0d", count, sb.size());
      end
      if (sb.size() > 0) begin
        checks++;
        if (head !== sb[0]) begin failures++; $display("head mismatch at %0d", n); end
      end
      if (sb.size() == DEPTH) full_seen++;
      // next stimulus
      pop  = (sb.size() > 0) && (($urandom % 3) != 0 || n > 19000);
      free = DEPTH - sb.size() + (pop ? 1 : 0);
      push_valid = '0;
      np = 0;
      for (int l = 0; l < 4; l++) begin
        push_data[l] = '0;
        push_data[l].m.gid = 32'(seq + l);
        push_data[l].e     = 16'($urandom);
        if (np < free && ($urandom % 2) && n < 19000) begin push_valid[l] = 1; np++; end
      end
      if (pop) void'(sb.pop_front());
      for (int l = 0; l < 4; l++) if (push_valid[l]) sb.push_back(push_data[l]);
      seq += 4;
    end
    checks++;
    if (full_seen == 0) begin failures++; $display("queue never full"); end
    $display("cycles full: %0d", full_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
