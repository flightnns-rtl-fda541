// ifmap_buffer -- on-chip input feature map memory for BATCH images.
//
// One word holds the same pixel (channel c, row y, column x) of all BATCH
// images, so the batch lanes of the compute unit read in lock step. The
// host writes one word per cycle (wr_en with wr_c/wr_y/wr_x). The engine
// reads, for output position (rd_oy, rd_ox) and channel rd_c, the whole
// K x K window of input pixels (rd_oy + ky - PAD, rd_ox + kx - PAD); pixels
// that fall outside the H x W map read as zero (zero padding). The window
// appears on rd_win one cycle after rd_en (synchronous read) and holds
// until the next rd_en. Window element i = ky*K + kx.
//
// The paper only says the feature maps live in on-chip memory (BRAM); the
// word layout, the K*K-wide window read and the zero padding are this
// design's choices.
module ifmap_buffer
  import flightnn_pkg::*;
#(
  parameter int unsigned BATCH = 4,
  parameter int unsigned C_IN  = 64,
  parameter int unsigned H     = 32,
  parameter int unsigned W     = 32,
  parameter int unsigned K     = 3,
  parameter int unsigned PAD   = 1,
  localparam int unsigned HO   = H + 2*PAD - K + 1,
  localparam int unsigned WO   = W + 2*PAD - K + 1,
  localparam int unsigned KK   = K*K,
  localparam int unsigned CW   = (C_IN > 1) ? $clog2(C_IN) : 1,
  localparam int unsigned YW   = $clog2(H + 2*PAD + 1),
  localparam int unsigned XW   = $clog2(W + 2*PAD + 1),
  localparam int unsigned DEPTH = C_IN*H*W,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                                clk,
  input  logic                                wr_en,
  input  logic [CW-1:0]                       wr_c,
  input  logic [YW-1:0]                       wr_y,
  input  logic [XW-1:0]                       wr_x,
  input  logic [BATCH-1:0][ACT_W-1:0]         wr_data,
  input  logic                                rd_en,
  input  logic [CW-1:0]                       rd_c,
  input  logic [YW-1:0]                       rd_oy,
  input  logic [XW-1:0]                       rd_ox,
  output logic [BATCH-1:0][KK-1:0][ACT_W-1:0] rd_win
);

  logic [BATCH-1:0][ACT_W-1:0] mem [DEPTH];

  logic [AW-1:0] wr_addr;
  assign wr_addr = AW'((32'(wr_c)*H + 32'(wr_y))*W + 32'(wr_x));

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  // K*K read ports, one per window position
  for (genvar ky = 0; ky < K; ky++) begin : g_ky
    for (genvar kx = 0; kx < K; kx++) begin : g_kx
      logic signed [YW+1:0] iy;
      logic signed [XW+1:0] ix;
      logic                 in_map;
      logic [AW-1:0]        addr;

      always_comb begin
        iy     = $signed({2'b00, rd_oy}) + (YW+2)'(ky) - (YW+2)'(PAD);
        ix     = $signed({2'b00, rd_ox}) + (XW+2)'(kx) - (XW+2)'(PAD);
        in_map = (iy >= 0) && (iy < (YW+2)'(H)) && (ix >= 0) && (ix < (XW+2)'(W));
        addr   = in_map ? AW'((32'(rd_c)*H + 32'(unsigned'(iy)))*W + 32'(unsigned'(ix))) : '0;
      end

      always_ff @(posedge clk) begin
        if (rd_en) begin
          for (int b = 0; b < BATCH; b++)
            rd_win[b][ky*K+kx] <= in_map ? mem[addr][b] : '0;
        end
      end
    end
  end

  if (HO < 1 || WO < 1) begin : g_bad_size
    $error("ifmap_buffer: kernel larger than padded input");
  end

endmodule
