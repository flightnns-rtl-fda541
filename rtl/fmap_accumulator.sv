// fmap_accumulator -- output feature map memory that performs the
// "summation of feature maps" of a FLightNN layer.
//
// A filter with k_f shift terms is computed as k_f separate LightNN-1
// convolutions whose output maps add up to the filter's output. Each
// finished neuron value arrives here as (in_addr, in_data[BATCH], in_first).
// With in_first (term 0) the value is written; otherwise it is added onto
// the value the earlier term left at the same address.
//
// Timing: a two-stage read-modify-write. Cycle t: the request is captured
// and the old word is read. Cycle t+1: old + data (or data) is written at
// the clock edge that ends t+1. A request one cycle behind a write to the
// same address gets the written value forwarded, so back-to-back requests
// are safe. The host reads one word through rd_addr, returned on rd_data
// one cycle later (also write-first).
//
// The summation of feature maps is the paper's; the read-modify-write
// memory and its timing are this design's choices. Accumulation wraps
// modulo 2^ACC_W; ACC_W = 32 is far above what a 64-channel 3x3 layer with
// two terms can reach (about 2^24).
module fmap_accumulator #(
  parameter int unsigned BATCH = 4,
  parameter int unsigned DEPTH = 64*32*32,
  parameter int unsigned ACC_W = 32,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  input  logic                        in_first,
  input  logic [AW-1:0]               in_addr,
  input  logic [BATCH-1:0][ACC_W-1:0] in_data,
  input  logic [AW-1:0]               rd_addr,
  output logic [BATCH-1:0][ACC_W-1:0] rd_data
);

  logic [BATCH-1:0][ACC_W-1:0] mem [DEPTH];

  // stage 1 registers
  logic                        s1_valid;
  logic                        s1_first;
  logic [AW-1:0]               s1_addr;
  logic [BATCH-1:0][ACC_W-1:0] s1_data;
  logic [BATCH-1:0][ACC_W-1:0] s1_old;

  // stage 2 (write) signals
  logic                        wr_en;
  logic [BATCH-1:0][ACC_W-1:0] wr_data;

  always_comb begin
    wr_en = s1_valid;
    for (int b = 0; b < BATCH; b++)
      wr_data[b] = s1_first ? s1_data[b] : s1_old[b] + s1_data[b];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_first <= 1'b0;
      s1_addr  <= '0;
      s1_data  <= '0;
    end else begin
      s1_valid <= in_valid;
      if (in_valid) begin
        s1_first <= in_first;
        s1_addr  <= in_addr;
        s1_data  <= in_data;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[s1_addr] <= wr_data;
    if (in_valid) s1_old <= (wr_en && s1_addr == in_addr) ? wr_data : mem[in_addr];
    rd_data <= (wr_en && s1_addr == rd_addr) ? wr_data : mem[rd_addr];
  end

endmodule
