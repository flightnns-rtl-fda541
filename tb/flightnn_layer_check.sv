// flightnn_layer_check -- testbench helper: one FLightNN layer engine of a
// given size together with its own stimulus and reference model.
//
// When go rises it loads random activations for BATCH images, random term
// codes and per-filter k values (filters 0, 1 and 2 are forced to k = 0, 1
// and 2), runs the layer once, checks the cycle count 4 + sum_f cost_f and
// compares every output value with an integer reference convolution. It
// then raises finished and reports its counts on checks / failures.
// Several of these, at different sizes, are driven by one testbench.
module flightnn_layer_check
  import flightnn_pkg::*;
#(
  parameter string       LABEL = "layer",
  parameter int unsigned BATCH = 4,
  parameter int unsigned C_IN  = 8,
  parameter int unsigned C_OUT = 8,
  parameter int unsigned H     = 8,
  parameter int unsigned W     = 8
) (
  input  logic clk,
  input  logic rst_n,
  input  logic go,
  output logic finished,
  output int   checks,
  output int   failures
);
  localparam int K = 3, PAD = 1, KMAX = 2, ACC_W = 32;
  localparam int HO = H + 2*PAD - K + 1, WO = W + 2*PAD - K + 1, KK = K*K;
  localparam int FW = (C_OUT > 1) ? $clog2(C_OUT) : 1;
  localparam int JW = 1, KW = 2;
  localparam int CW = (C_IN > 1) ? $clog2(C_IN) : 1;
  localparam int IYW = $clog2(H + 2*PAD + 1), IXW = $clog2(W + 2*PAD + 1);
  localparam int OYW = (HO > 1) ? $clog2(HO) : 1, OXW = (WO > 1) ? $clog2(WO) : 1;

  logic ifm_we = 0, wgt_we = 0, k_we = 0, start = 0;
  logic [CW-1:0] ifm_c = '0, wgt_c = '0;
  logic [IYW-1:0] ifm_y = '0;
  logic [IXW-1:0] ifm_x = '0;
  logic [BATCH-1:0][ACT_W-1:0] ifm_data = '0;
  logic [FW-1:0] wgt_f = '0, k_f = '0, ofm_f = '0;
  logic [JW-1:0] wgt_j = '0;
  wcode_t [KK-1:0] wgt_codes = '0;
  logic [KW-1:0] k_val = '0;
  logic [OYW-1:0] ofm_y = '0;
  logic [OXW-1:0] ofm_x = '0;
  logic busy, done;
  logic [BATCH-1:0][ACC_W-1:0] ofm_data;

  byte act [BATCH][C_IN][H][W];
  int  wq  [C_OUT][C_IN][KK];
  int  kv  [C_OUT];

  flightnn_conv_top #(.BATCH(BATCH), .C_IN(C_IN), .C_OUT(C_OUT), .H(H), .W(W), .K(K),
                      .PAD(PAD), .KMAX(KMAX), .ACC_W(ACC_W)) dut (
    .clk, .rst_n, .ifm_we, .ifm_c, .ifm_y, .ifm_x, .ifm_data,
    .wgt_we, .wgt_f, .wgt_j, .wgt_c, .wgt_codes, .k_we, .k_f, .k_val,
    .start, .busy, .done, .ofm_f, .ofm_y, .ofm_x, .ofm_data);

  function automatic int term_val(bit [3:0] c);
    if (c[2:0] == 3'd7) return 0;
    return (c[3] ? -1 : 1) * (1 << (6 - int'(c[2:0])));
  endfunction

  initial begin
    int cost, cycles, terms;
    finished = 0;
    checks   = 0;
    failures = 0;
    wait (go === 1'b1);
    // input maps
    for (int c = 0; c < C_IN; c++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          @(negedge clk);
          ifm_we = 1; ifm_c = CW'(c); ifm_y = IYW'(y); ifm_x = IXW'(x);
          for (int b = 0; b < BATCH; b++) begin
            act[b][c][y][x] = byte'($urandom_range(0, 255));
            ifm_data[b] = act[b][c][y][x];
          end
        end
    @(negedge clk);
    ifm_we = 0;
    // k values and the terms they use
    cost = 0;
    terms = 0;
    for (int f = 0; f < C_OUT; f++) begin
      kv[f] = (f < 3) ? f : $urandom_range(0, KMAX);
      cost += (kv[f] == 0) ? 1 : kv[f]*HO*WO*C_IN;
      terms += kv[f];
      @(negedge clk);
      k_we = 1; k_f = FW'(f); k_val = KW'(kv[f]);
    end
    @(negedge clk);
    k_we = 0;
    for (int f = 0; f < C_OUT; f++) begin
      for (int c = 0; c < C_IN; c++)
        for (int i = 0; i < KK; i++) wq[f][c][i] = 0;
      for (int j = 0; j < kv[f]; j++)
        for (int c = 0; c < C_IN; c++) begin
          @(negedge clk);
          wgt_we = 1; wgt_f = FW'(f); wgt_j = JW'(j); wgt_c = CW'(c);
          for (int i = 0; i < KK; i++) begin
            automatic bit [3:0] code = 4'($urandom_range(0, 15));
            wgt_codes[i] = wcode_t'(code);
            wq[f][c][i] += term_val(code);
          end
        end
    end
    @(negedge clk);
    wgt_we = 0;
    // run
    start = 1;
    @(negedge clk);
    start = 0;
    cycles = 1;
    while (!done) begin
      @(negedge clk);
      cycles++;
    end
    checks++;
    if (cycles != 4 + cost) begin
      failures++;
      $display("%s: run took %0d cycles, expected %0d", LABEL, cycles, 4 + cost);
    end
    $display("%s: %0d filters (%0d terms), %0d channels, %0dx%0d maps, %0d images: %0d cycles",
             LABEL, C_OUT, terms, C_IN, HO, WO, BATCH, cycles);
    // compare every output
    for (int f = 0; f < C_OUT; f++)
      for (int y = 0; y < HO; y++)
        for (int x = 0; x < WO; x++) begin
          ofm_f = FW'(f); ofm_y = OYW'(y); ofm_x = OXW'(x);
          @(negedge clk);
          for (int b = 0; b < BATCH; b++) begin
            automatic longint e = 0;
            if (kv[f] != 0)
              for (int c = 0; c < C_IN; c++)
                for (int ky = 0; ky < K; ky++)
                  for (int kx = 0; kx < K; kx++) begin
                    automatic int iy = y + ky - PAD, ix = x + kx - PAD;
                    if (iy >= 0 && iy < H && ix >= 0 && ix < W)
                      e += longint'(act[b][c][iy][ix]) * wq[f][c][ky*K+kx];
                  end
            checks++;
            if (longint'($signed(ofm_data[b])) != e) begin
              failures++;
              if (failures < 5)
                $display("%s: f%0d y%0d x%0d b%0d got %0d exp %0d", LABEL, f, y, x, b,
                         $signed(ofm_data[b]), e);
            end
          end
        end
    finished = 1;
  end
endmodule
