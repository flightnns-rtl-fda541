// shift_compute_unit -- the computation unit that is reused for every output
// neuron of the layer.
//
// For each of BATCH images in parallel (batched inference) it multiplies the
// KK = K*K activations of one input-channel window with the KK power-of-two
// terms of one k=1 filter slice (pow2_shift_unit each, no multipliers),
// sums the KK products, and accumulates that sum over the input channels of
// the neuron. All batch lanes share the same weight terms.
//
// Timing: one channel slice per cycle. A slice presented with in_valid at
// cycle t is added into the lane accumulators at the clock edge ending t.
// first_c restarts the accumulators with that slice; last_c marks the
// neuron's final slice, and one cycle later out_valid is high for one cycle
// with out_sum (the neuron's value, 6 more fraction bits than the
// activations) and out_tag (in_tag of the last slice, returned unchanged
// so the caller can carry an address alongside).
//
// Shift-based products, one unit reused for every neuron and batched lanes
// follow the paper; the one-slice-per-cycle schedule, the summation order
// and the widths are this design's choices.
module shift_compute_unit
  import flightnn_pkg::*;
#(
  parameter int unsigned BATCH = 4,
  parameter int unsigned KK    = 9,
  parameter int unsigned ACC_W = 32,
  parameter int unsigned TAG_W = 8
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               in_valid,
  input  logic                               first_c,
  input  logic                               last_c,
  input  logic [TAG_W-1:0]                   in_tag,
  input  logic [BATCH-1:0][KK-1:0][ACT_W-1:0] win,
  input  wcode_t [KK-1:0]                    codes,
  output logic                               out_valid,
  output logic [TAG_W-1:0]                   out_tag,
  output logic [BATCH-1:0][ACC_W-1:0]        out_sum
);

  logic signed [PROD_W-1:0] prod [BATCH][KK];
  logic signed [ACC_W-1:0]  slice_sum [BATCH];
  logic signed [ACC_W-1:0]  acc [BATCH];

  for (genvar b = 0; b < BATCH; b++) begin : g_lane
    for (genvar i = 0; i < KK; i++) begin : g_shift
      pow2_shift_unit u_shift (
        .act  (win[b][i]),
        .code (codes[i]),
        .prod (prod[b][i])
      );
    end

    always_comb begin
      slice_sum[b] = '0;
      for (int i = 0; i < KK; i++) slice_sum[b] += ACC_W'(prod[b][i]);
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)        acc[b] <= '0;
      else if (in_valid) acc[b] <= first_c ? slice_sum[b] : acc[b] + slice_sum[b];
    end

    assign out_sum[b] = acc[b];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_tag   <= '0;
    end else begin
      out_valid <= in_valid && last_c;
      if (in_valid && last_c) out_tag <= in_tag;
    end
  end

endmodule
