// tb_lumina_cache_arb: eight requesters hold random requests until granted.
// Checks: at most one grant per cycle, only to a requester, the forwarded
// request is the winner's, grants rotate round-robin (no requester waits more
// than N-1 grants while requesting), and the response is steered back to the
// requester granted one cycle before.
module tb_lumina_cache_arb;
  import lumina_pkg::*;

  localparam int N = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [N-1:0] req_valid, gnt, rsp_valid;
  cache_req_t [N-1:0] req;
  logic c_req_valid, c_rsp_valid;
  cache_req_t c_req;

  lumina_cache_arb #(.N(N)) dut (.clk, .rst_n, .req_valid, .req, .gnt, .c_req_valid, .c_req,
    .c_rsp_valid, .rsp_valid);

  int checks = 0, failures = 0, grants = 0;
  int waited [N];
  int last_gnt = -1;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // cache stand-in: every forwarded request is answered next cycle
  always_ff @(posedge clk) c_rsp_valid <= c_req_valid;

  initial begin
    req_valid = '0; req = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      // answer to the grant taken at the last clock edge
      checks++;
      if (rsp_valid != ((last_gnt >= 0) ? (N'(1) << last_gnt) : '0)) begin
        failures++; $display("response routed to %b, expected %0d", rsp_valid, last_gnt);
      end
      // next requests: granted ones may drop, others hold
      for (int i = 0; i < N; i++) begin
        if ((last_gnt == i) || !req_valid[i]) begin
          req_valid[i] = ($urandom % 3) == 0;
          req[i].op = cache_op_e'($urandom % 2);
          req[i].ids = {$urandom, $urandom, $urandom, $urandom, $urandom};
          req[i].rgb = 24'(i);
        end
      end
      #1;
      checks++;
      if (!$onehot0(gnt) || (gnt & ~req_valid) != '0 || c_req_valid != (req_valid != '0)) begin
        failures++; $display("bad grant %b req %b", gnt, req_valid);
      end
      last_gnt = -1;
      for (int i = 0; i < N; i++) begin
        if (gnt[i]) begin
          checks++;
          if (c_req !== req[i]) begin failures++; $display("wrong request forwarded"); end
          last_gnt = i; grants++;
          waited[i] = 0;
        end else if (req_valid[i]) begin
          waited[i]++;
          checks++;
          if (waited[i] > N - 1) begin failures++; $display("requester %0d starved", i); end
        end
      end
    end
    $display("grants: %0d", grants);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
