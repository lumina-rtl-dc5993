// tb_lumina_feature_buf: fills the idle buffer with random features, checks
// that readers still see the active buffer, swaps, and reads every entry back
// through all read ports with one cycle of latency (full 4096-entry depth,
// 16 read ports).
module tb_lumina_feature_buf;
  import lumina_pkg::*;

  localparam int DEPTH = 4096, NRD = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic swap, wr_en, active_buf;
  logic [11:0] wr_addr;
  feature_t wr_data;
  logic [NRD-1:0] rd_valid;
  logic [NRD-1:0][11:0] rd_addr;
  feature_t [NRD-1:0] rd_data;

  lumina_feature_buf #(.DEPTH(DEPTH), .NRD(NRD)) dut (.clk, .rst_n, .swap, .wr_en, .wr_addr,
    .wr_data, .rd_valid, .rd_addr, .rd_data, .active_buf);

  int checks = 0, failures = 0;
  feature_t model [2][DEPTH];

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fill(input int b);
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 12'(a);
      wr_data = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      model[b][a] = wr_data;
    end
    @(negedge clk); wr_en = 0;
  endtask

  task automatic check_all(input int b);
    for (int a = 0; a < DEPTH; a += NRD) begin
      @(negedge clk);
      for (int i = 0; i < NRD; i++) begin
        rd_valid[i] = 1; rd_addr[i] = 12'((a + i * 37) % DEPTH);
      end
      @(negedge clk);
      rd_valid = '0;
      for (int i = 0; i < NRD; i++) begin
        checks++;
        if (rd_data[i] !== model[b][(a + i * 37) % DEPTH]) begin
          failures++;
          if (failures < 5) $display("port %0d addr %0d", i, (a + i * 37) % DEPTH);
        end
      end
    end
  endtask

  initial begin
    swap = 0; wr_en = 0; wr_addr = '0; wr_data = '0; rd_valid = '0; rd_addr = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    fill(1);                         // idle buffer is 1
    @(negedge clk); swap = 1; @(negedge clk); swap = 0;
    check_all(1);
    fill(0);                         // now idle buffer is 0; reads still from 1
    check_all(1);
    @(negedge clk); swap = 1; @(negedge clk); swap = 0;
    check_all(0);
    checks++;
    if (active_buf !== 1'b0) begin failures++; $display("active_buf"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
