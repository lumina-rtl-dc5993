// tb_lumina_output_buf: writes whole tiles into the four slots of the active
// buffer, swaps, reads every pixel of the idle buffer back (one-cycle
// latency), and checks that writes after the swap do not disturb it.
module tb_lumina_output_buf;
  import lumina_pkg::*;

  localparam int TILES = 4, PIX = 256;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic swap, wr_en, rd_en, active_buf;
  logic [1:0] wr_slot, rd_slot;
  logic [PIX-1:0][23:0] wr_pix;
  logic [7:0] rd_pix;
  logic [23:0] rd_data;

  lumina_output_buf #(.TILES(TILES), .PIX(PIX)) dut (.clk, .rst_n, .swap, .wr_en, .wr_slot,
    .wr_pix, .rd_en, .rd_slot, .rd_pix, .rd_data, .active_buf);

  int checks = 0, failures = 0;
  logic [23:0] model [TILES][PIX];

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_tiles(input bit keep);
    for (int t = 0; t < TILES; t++) begin
      @(negedge clk);
      wr_en = 1; wr_slot = 2'(t);
      for (int p = 0; p < PIX; p++) begin
        wr_pix[p] = 24'($urandom);
        if (keep) model[t][p] = wr_pix[p];
      end
    end
    @(negedge clk); wr_en = 0;
  endtask

  task automatic read_back();
    for (int t = 0; t < TILES; t++)
      for (int p = 0; p < PIX; p++) begin
        @(negedge clk); rd_en = 1; rd_slot = 2'(t); rd_pix = 8'(p);
        @(negedge clk); rd_en = 0;
        checks++;
        if (rd_data !== model[t][p]) begin
          failures++;
          if (failures < 5) $display("tile %0d pixel %0d: %h vs %h", t, p, rd_data, model[t][p]);
        end
      end
  endtask

  initial begin
    swap = 0; wr_en = 0; rd_en = 0; wr_slot = '0; rd_slot = '0; rd_pix = '0; wr_pix = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    write_tiles(1);
    @(negedge clk); swap = 1; @(negedge clk); swap = 0;
    write_tiles(0);       // into the other buffer
    read_back();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
