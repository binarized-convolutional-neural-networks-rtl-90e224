// window_ram: on-chip feature-map (or image) store that delivers a complete
// 3x3 window of pixel words every cycle.
//
// A word holds one pixel of a feature map: LANES channels of binary
// activations, or the channels of an image pixel. A map of height H, width W
// and G words per pixel is spread over nine banks by pixel position: pixel
// (y, x) lives in bank 3*(y mod 3) + (x mod 3), at address
// ((y div 3) * WQ + (x div 3)) * G + g, where WQ = ceil(W/3) and g is the
// channel group. The nine pixels of any 3x3 window fall into nine different
// banks, so a window is read in one cycle with single-ported banks.
//
// Read port: rd_y / rd_x give the window centre, rd_g the group, rd_wq and
// rd_gn the map's WQ and G. One cycle after rd_en, rd_win[t] holds the pixel
// at (rd_y + t/3 - 1, rd_x + t%3 - 1). Taps outside the map return
// unspecified data; the consumer masks them. rd_win[4] is the centre pixel.
// Write port: one pixel word per cycle at (wr_y, wr_x, wr_g) of a map
// described by wr_wq / wr_gn, which may differ from the read-side map.
//
// Origin: feature maps held fully on chip follow the published design; the
// nine-bank layout, the channel packing and the sizes are this design's own.
module window_ram
  import bcnn_pkg::*;
#(
  parameter int unsigned WORD_W = LANES,
  parameter int unsigned DEPTH  = 256,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic              clk,
  // write port
  input  logic              wr_en,
  input  logic [DIM_W-1:0]  wr_y,
  input  logic [DIM_W-1:0]  wr_x,
  input  logic [GRP_W-1:0]  wr_g,
  input  logic [DIM_W-1:0]  wr_wq,
  input  logic [GRP_W-1:0]  wr_gn,
  input  logic [WORD_W-1:0] wr_data,
  // window read port
  input  logic              rd_en,
  input  logic [DIM_W-1:0]  rd_y,
  input  logic [DIM_W-1:0]  rd_x,
  input  logic [GRP_W-1:0]  rd_g,
  input  logic [DIM_W-1:0]  rd_wq,
  input  logic [GRP_W-1:0]  rd_gn,
  output logic [WORD_W-1:0] rd_win [9]
);
  function automatic logic [AW-1:0] bank_addr(int unsigned qy, int unsigned qx,
                                               int unsigned g, int unsigned wq,
                                               int unsigned gn);
    int unsigned a;
    a = (qy * wq + qx) * gn + g;
    return (a < DEPTH) ? AW'(a) : '0;
  endfunction

  // Write side: bank and address of one pixel.
  logic [3:0]    wbank;
  logic [AW-1:0] waddr;
  always_comb begin
    wbank = 4'(3 * (32'(wr_y) % 3) + 32'(wr_x) % 3);
    waddr = bank_addr(32'(wr_y) / 3, 32'(wr_x) / 3, 32'(wr_g), 32'(wr_wq), 32'(wr_gn));
  end

  // Read side: bank of each tap, and address presented to each bank.
  // Coordinates are offset by 3 (r + 3 = y + dy + 2) to stay non-negative.
  logic [3:0]    tap_bank [9];
  logic [AW-1:0] raddr    [9];
  always_comb begin
    int unsigned ry, rx, qy, qx;
    for (int b = 0; b < 9; b++) raddr[b] = '0;
    for (int dy = 0; dy < 3; dy++) begin
      for (int dx = 0; dx < 3; dx++) begin
        ry = 32'(rd_y) + 32'(dy) + 2;
        rx = 32'(rd_x) + 32'(dx) + 2;
        qy = (ry >= 3) ? ry / 3 - 1 : 0;
        qx = (rx >= 3) ? rx / 3 - 1 : 0;
        tap_bank[3*dy+dx] = 4'(3 * (ry % 3) + rx % 3);
        raddr[3 * (ry % 3) + rx % 3] = bank_addr(qy, qx, 32'(rd_g), 32'(rd_wq), 32'(rd_gn));
      end
    end
  end

  logic [WORD_W-1:0] bank_q   [9];
  logic [3:0]        tap_bank_q [9];

  for (genvar b = 0; b < 9; b++) begin : g_bank
    sdp_ram #(.WIDTH(WORD_W), .DEPTH(DEPTH)) u_bank (
      .clk  (clk),
      .we   (wr_en && wbank == 4'(b)),
      .waddr(waddr),
      .wdata(wr_data),
      .re   (rd_en),
      .raddr(raddr[b]),
      .rdata(bank_q[b])
    );
  end

  always_ff @(posedge clk) begin
    if (rd_en) tap_bank_q <= tap_bank;
  end

  always_comb begin
    for (int t = 0; t < 9; t++) rd_win[t] = bank_q[tap_bank_q[t]];
  end
endmodule
