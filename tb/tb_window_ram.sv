// tb_window_ram: writes whole feature maps of several shapes (including the
// largest the default depth holds, 32x32 pixels x 2 groups) and reads back the
// 3x3 window around every pixel and group; every tap inside the map must hold
// the word written there, one cycle after the read.
//
// Map sizes include those of the published network (32x32, 16x16, 8x8) and
// odd ones; the banking under test is this design's own.
module tb_window_ram;
  import bcnn_pkg::*;
  localparam int unsigned WW = 64;

  logic clk = 0;
  logic wr_en = 0, rd_en = 0;
  logic [DIM_W-1:0] wr_y = '0, wr_x = '0, wr_wq = '0, rd_y = '0, rd_x = '0, rd_wq = '0;
  logic [GRP_W-1:0] wr_g = '0, wr_gn = '0, rd_g = '0, rd_gn = '0;
  logic [WW-1:0] wr_data = '0;
  logic [WW-1:0] rd_win [9];
  int checks = 0, failures = 0;

  window_ram #(.WORD_W(WW), .DEPTH(256)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Each word records its own coordinates plus a random tag.
  function automatic logic [WW-1:0] word_of(int y, int x, int g, int salt);
    return {16'(salt), 16'(y), 16'(x), 16'(g)};
  endfunction

  task automatic run_map(int h, int w, int gn, int salt);
    int ry, rx;
    for (int y = 0; y < h; y++)
      for (int x = 0; x < w; x++)
        for (int g = 0; g < gn; g++) begin
          @(negedge clk);
          wr_en = 1; wr_y = DIM_W'(y); wr_x = DIM_W'(x); wr_g = GRP_W'(g);
          wr_wq = DIM_W'((w + 2) / 3); wr_gn = GRP_W'(gn);
          wr_data = word_of(y, x, g, salt);
        end
    @(negedge clk); wr_en = 0;
    for (int y = 0; y < h; y++)
      for (int x = 0; x < w; x++)
        for (int g = 0; g < gn; g++) begin
          @(negedge clk);
          rd_en = 1; rd_y = DIM_W'(y); rd_x = DIM_W'(x); rd_g = GRP_W'(g);
          rd_wq = DIM_W'((w + 2) / 3); rd_gn = GRP_W'(gn);
          @(posedge clk); #1;
          rd_en = 0;
          for (int t = 0; t < 9; t++) begin
            ry = y + t / 3 - 1; rx = x + t % 3 - 1;
            if (ry >= 0 && ry < h && rx >= 0 && rx < w) begin
              checks++;
              if (rd_win[t] !== word_of(ry, rx, g, salt)) begin
                failures++;
                if (failures < 10)
                  $display("map %0dx%0dx%0d at (%0d,%0d,%0d) tap %0d: %h", h, w, gn, y, x, g, t, rd_win[t]);
              end
            end
          end
        end
  endtask

  initial begin
    run_map(32, 32, 2, 1);
    run_map(16, 16, 4, 2);
    run_map(8, 8, 8, 3);
    run_map(5, 7, 3, 4);
    run_map(1, 1, 1, 5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
