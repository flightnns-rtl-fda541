// tb_ifmap_buffer -- fills a 2-lane, 3-channel 4x5 map with random bytes
// and reads the 3x3 window of every output position and channel, checking
// each element against a reference with zero padding and the one-cycle
// read latency.
module tb_ifmap_buffer;
  import flightnn_pkg::*;

  localparam int BATCH = 2, C_IN = 3, H = 4, W = 5, K = 3, PAD = 1;
  localparam int KK = K*K, HO = H + 2*PAD - K + 1, WO = W + 2*PAD - K + 1;
  localparam int CW = $clog2(C_IN), YW = $clog2(H + 2*PAD + 1), XW = $clog2(W + 2*PAD + 1);

  logic clk = 0;
  logic wr_en = 0, rd_en = 0;
  logic [CW-1:0] wr_c = '0, rd_c = '0;
  logic [YW-1:0] wr_y = '0, rd_oy = '0;
  logic [XW-1:0] wr_x = '0, rd_ox = '0;
  logic [BATCH-1:0][ACT_W-1:0] wr_data = '0;
  logic [BATCH-1:0][KK-1:0][ACT_W-1:0] rd_win;
  logic [ACT_W-1:0] img [BATCH][C_IN][H][W];
  int checks = 0, failures = 0, pad_seen = 0;

  ifmap_buffer #(.BATCH(BATCH), .C_IN(C_IN), .H(H), .W(W), .K(K), .PAD(PAD)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < C_IN; c++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          @(negedge clk);
          wr_en = 1; wr_c = CW'(c); wr_y = YW'(y); wr_x = XW'(x);
          for (int b = 0; b < BATCH; b++) begin
            img[b][c][y][x] = ACT_W'($urandom_range(1, 255));
            wr_data[b] = img[b][c][y][x];
          end
        end
    @(negedge clk);
    wr_en = 0;
    for (int c = 0; c < C_IN; c++)
      for (int oy = 0; oy < HO; oy++)
        for (int ox = 0; ox < WO; ox++) begin
          @(negedge clk);
          rd_en = 1; rd_c = CW'(c); rd_oy = YW'(oy); rd_ox = XW'(ox);
          @(negedge clk);
          rd_en = 0;
          for (int b = 0; b < BATCH; b++)
            for (int ky = 0; ky < K; ky++)
              for (int kx = 0; kx < K; kx++) begin
                automatic int iy = oy + ky - PAD, ix = ox + kx - PAD;
                logic [ACT_W-1:0] e;
                if (iy < 0 || iy >= H || ix < 0 || ix >= W) begin
                  e = '0;
                  pad_seen++;
                end else e = img[b][c][iy][ix];
                checks++;
                if (rd_win[b][ky*K+kx] !== e) begin
                  failures++;
                  if (failures < 10)
                    $display("c%0d oy%0d ox%0d b%0d k%0d: got %h exp %h", c, oy, ox, b, ky*K+kx,
                             rd_win[b][ky*K+kx], e);
                end
              end
        end
    checks++;
    if (pad_seen == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
