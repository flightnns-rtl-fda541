// flightnn_conv_top -- one FLightNN convolutional layer in hardware.
//
// FLightNN weights are sums of k_f signed powers of two, with k_f (0, 1 or
// 2) chosen per filter f. A filter with k_f terms equals k_f one-shift
// (LightNN-1) filters whose output maps are added, so the layer runs on a
// LightNN-1 engine, shift units instead of multipliers, plus an output
// feature map accumulator. Filters with fewer terms take fewer passes, and
// pruned filters (k_f = 0) take none, so the run time follows the total
// term count.
//
// Blocks: k_table (k_f per filter), weight_buffer (term slices),
// ifmap_buffer (BATCH input images, K x K window per cycle with zero
// padding), conv_controller (filter / pass / pixel / channel loops),
// shift_compute_unit (BATCH x K*K shift units, adder tree, channel
// accumulator; reused for every neuron) and fmap_accumulator (write the
// first pass, add later passes).
//
// Pipeline: S0 controller issues a slice and the buffers are read; S1
// buffer data reach the compute unit and are accumulated; S2 a finished
// neuron enters the accumulator's read-modify-write; S3 it is written.
//
// Host interface (plain write ports, used while idle): ifm_* writes one
// pixel of all BATCH images; wgt_* writes one (filter, term, channel)
// slice of K*K 4-bit codes {sign, e}, value (-1)^sign * 2^-e, e = 7 zero;
// k_* writes k_f. A one-cycle start runs the layer; busy stays high until
// the last result is stored and done pulses for one cycle; the run takes
// 4 + sum_f cost_f cycles from the start cycle to the done cycle, cost_f =
// k_f*HO*WO*C_IN (1 if k_f = 0). ofm_f/ofm_y/ofm_x read one output pixel of
// all images, valid on ofm_data one cycle later, signed with 6 more
// fraction bits than the 8-bit activations; a pruned filter reads as 0.
//
// The FLightNN paper gives the idea (shift units, per-filter k,
// decomposition into one-shift convolutions and feature map summation,
// batching, one reused computation unit), the 8-bit activations, the
// 4-bit terms, KMAX = 2 and the 64-filter width of its smallest CIFAR-10
// network, used as the C_OUT default. The 3 x 3 kernel follows its
// decomposition example. The other sizes (64 input channels, 32 x 32 maps,
// same padding, 4 images), the memory organisation, the schedule and the
// interface are this design's own.
module flightnn_conv_top
  import flightnn_pkg::*;
#(
  parameter int unsigned BATCH = 4,
  parameter int unsigned C_IN  = 64,
  parameter int unsigned C_OUT = 64,
  parameter int unsigned H     = 32,
  parameter int unsigned W     = 32,
  parameter int unsigned K     = 3,
  parameter int unsigned PAD   = 1,
  parameter int unsigned KMAX  = 2,
  parameter int unsigned ACC_W = 32,
  localparam int unsigned HO   = H + 2*PAD - K + 1,
  localparam int unsigned WO   = W + 2*PAD - K + 1,
  localparam int unsigned KK   = K*K,
  localparam int unsigned FW   = (C_OUT > 1) ? $clog2(C_OUT) : 1,
  localparam int unsigned JW   = (KMAX > 1) ? $clog2(KMAX) : 1,
  localparam int unsigned KW   = $clog2(KMAX + 1),
  localparam int unsigned CW   = (C_IN > 1) ? $clog2(C_IN) : 1,
  localparam int unsigned IYW  = $clog2(H + 2*PAD + 1),
  localparam int unsigned IXW  = $clog2(W + 2*PAD + 1),
  localparam int unsigned OYW  = (HO > 1) ? $clog2(HO) : 1,
  localparam int unsigned OXW  = (WO > 1) ? $clog2(WO) : 1,
  localparam int unsigned ODEPTH = C_OUT*HO*WO,
  localparam int unsigned OAW  = (ODEPTH > 1) ? $clog2(ODEPTH) : 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // input feature maps
  input  logic                        ifm_we,
  input  logic [CW-1:0]               ifm_c,
  input  logic [IYW-1:0]              ifm_y,
  input  logic [IXW-1:0]              ifm_x,
  input  logic [BATCH-1:0][ACT_W-1:0] ifm_data,
  // weight term slices
  input  logic                        wgt_we,
  input  logic [FW-1:0]               wgt_f,
  input  logic [JW-1:0]               wgt_j,
  input  logic [CW-1:0]               wgt_c,
  input  wcode_t [KK-1:0]             wgt_codes,
  // per-filter shift counts
  input  logic                        k_we,
  input  logic [FW-1:0]               k_f,
  input  logic [KW-1:0]               k_val,
  // control
  input  logic                        start,
  output logic                        busy,
  output logic                        done,
  // output feature maps
  input  logic [FW-1:0]               ofm_f,
  input  logic [OYW-1:0]              ofm_y,
  input  logic [OXW-1:0]              ofm_x,
  output logic [BATCH-1:0][ACC_W-1:0] ofm_data
);

  // ---------------- S0: controller issue ----------------
  logic [FW-1:0]  ctl_kf;
  logic [KW-1:0]  ctl_kval;
  logic           iss_valid, iss_first_c, iss_last_c, iss_first_pass;
  logic [FW-1:0]  iss_f;
  logic [JW-1:0]  iss_j;
  logic [CW-1:0]  iss_c;
  logic [OYW-1:0] iss_oy;
  logic [OXW-1:0] iss_ox;
  logic [KW-1:0]  rd_kval;

  k_table #(.C_OUT(C_OUT), .KMAX(KMAX)) u_k_table (
    .clk, .rst_n,
    .wr_en (k_we), .wr_f (k_f), .wr_k (k_val),
    .ra_f  (ctl_kf), .ra_k (ctl_kval),
    .rb_f  (ofm_f),  .rb_k (rd_kval)
  );

  conv_controller #(.C_OUT(C_OUT), .C_IN(C_IN), .HO(HO), .WO(WO), .KMAX(KMAX)) u_ctrl (
    .clk, .rst_n, .start, .busy, .done,
    .k_f (ctl_kf), .k_val (ctl_kval),
    .iss_valid, .iss_f, .iss_j, .iss_c, .iss_oy, .iss_ox,
    .iss_first_c, .iss_last_c, .iss_first_pass
  );

  logic [BATCH-1:0][KK-1:0][ACT_W-1:0] win;
  wcode_t [KK-1:0]                     codes;

  ifmap_buffer #(.BATCH(BATCH), .C_IN(C_IN), .H(H), .W(W), .K(K), .PAD(PAD)) u_ifmap (
    .clk,
    .wr_en (ifm_we), .wr_c (ifm_c), .wr_y (ifm_y), .wr_x (ifm_x), .wr_data (ifm_data),
    .rd_en (iss_valid), .rd_c (iss_c),
    .rd_oy (IYW'(iss_oy)), .rd_ox (IXW'(iss_ox)),
    .rd_win (win)
  );

  weight_buffer #(.C_OUT(C_OUT), .C_IN(C_IN), .KMAX(KMAX), .KK(KK)) u_wbuf (
    .clk,
    .wr_en (wgt_we), .wr_f (wgt_f), .wr_j (wgt_j), .wr_c (wgt_c), .wr_codes (wgt_codes),
    .rd_en (iss_valid), .rd_f (iss_f), .rd_j (iss_j), .rd_c (iss_c),
    .rd_codes (codes)
  );

  // tag carried with a slice: {first pass, output address}
  localparam int unsigned TAG_W = OAW + 1;
  logic [OAW-1:0] iss_oaddr;
  assign iss_oaddr = OAW'((32'(iss_f)*HO + 32'(iss_oy))*WO + 32'(iss_ox));

  // ---------------- S1: compute ----------------
  logic             s1_valid, s1_first_c, s1_last_c;
  logic [TAG_W-1:0] s1_tag;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid   <= 1'b0;
      s1_first_c <= 1'b0;
      s1_last_c  <= 1'b0;
      s1_tag     <= '0;
    end else begin
      s1_valid   <= iss_valid;
      s1_first_c <= iss_first_c;
      s1_last_c  <= iss_last_c;
      s1_tag     <= {iss_first_pass, iss_oaddr};
    end
  end

  logic                        nr_valid;
  logic [TAG_W-1:0]            nr_tag;
  logic [BATCH-1:0][ACC_W-1:0] nr_sum;

  shift_compute_unit #(.BATCH(BATCH), .KK(KK), .ACC_W(ACC_W), .TAG_W(TAG_W)) u_cu (
    .clk, .rst_n,
    .in_valid (s1_valid), .first_c (s1_first_c), .last_c (s1_last_c), .in_tag (s1_tag),
    .win, .codes,
    .out_valid (nr_valid), .out_tag (nr_tag), .out_sum (nr_sum)
  );

  // ---------------- S2/S3: feature map summation ----------------
  logic [OAW-1:0]              rd_oaddr;
  logic [BATCH-1:0][ACC_W-1:0] acc_rdata;
  logic                        rd_pruned_q;

  assign rd_oaddr = OAW'((32'(ofm_f)*HO + 32'(ofm_y))*WO + 32'(ofm_x));

  fmap_accumulator #(.BATCH(BATCH), .DEPTH(ODEPTH), .ACC_W(ACC_W)) u_facc (
    .clk, .rst_n,
    .in_valid (nr_valid), .in_first (nr_tag[TAG_W-1]), .in_addr (nr_tag[OAW-1:0]),
    .in_data  (nr_sum),
    .rd_addr  (rd_oaddr), .rd_data (acc_rdata)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_pruned_q <= 1'b0;
    else        rd_pruned_q <= (rd_kval == '0);
  end

  assign ofm_data = rd_pruned_q ? '0 : acc_rdata;

  // the host must not load the engine while it runs
  a_no_load_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
      busy |-> !(ifm_we || wgt_we || k_we))
    else $error("flightnn_conv_top: buffer written while busy");

endmodule
