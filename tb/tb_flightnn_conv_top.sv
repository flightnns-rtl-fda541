// tb_flightnn_conv_top -- end-to-end test of the FLightNN layer engine at
// reduced sizes (3 images, 3 input channels, 7 filters, 4x5 maps).
//
// Loads random 8-bit activations for BATCH images, random 4-bit term codes
// (zero terms included) and per-filter k values (at least one pruned, one
// single-shift and one two-shift filter), runs the layer, and compares
// every output pixel of every image with an integer reference convolution
// (same padding, w = sum of k_f power-of-two terms). It also checks that
// the run takes 4 + sum_f cost_f cycles (cost_f = k_f*HO*WO*C_IN, 1 for a
// pruned filter) and counts the mechanisms exercised: pruned filters,
// one-pass filters, two-pass feature map summation, zero-padded window
// taps and zero terms. A second run with new k values checks that the
// first pass of a filter overwrites old results.
// Then all filters at k = 1 (LightNN-1) and all at k = 2 (LightNN-2):
// the two-term run must take exactly twice the one-term passes, and the
// FLightNN mix must be faster than the two-term run. Each mechanism that never
// happens counts as a failure.
module tb_flightnn_conv_top;
  import flightnn_pkg::*;

  localparam int BATCH = 3, C_IN = 3, C_OUT = 7, H = 4, W = 5, K = 3, PAD = 1;
  localparam int KMAX = 2, ACC_W = 32;
  localparam int HO = H + 2*PAD - K + 1, WO = W + 2*PAD - K + 1, KK = K*K;
  localparam int FW = (C_OUT > 1) ? $clog2(C_OUT) : 1;
  localparam int JW = (KMAX > 1) ? $clog2(KMAX) : 1;
  localparam int KW = $clog2(KMAX + 1);
  localparam int CW = (C_IN > 1) ? $clog2(C_IN) : 1;
  localparam int IYW = $clog2(H + 2*PAD + 1), IXW = $clog2(W + 2*PAD + 1);
  localparam int OYW = (HO > 1) ? $clog2(HO) : 1, OXW = (WO > 1) ? $clog2(WO) : 1;

  logic clk = 0, rst_n = 0;
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

  int checks = 0, failures = 0;
  int n_pruned = 0, n_single = 0, n_double = 0, n_pad_taps = 0, n_zero_terms = 0;
  int last_cycles = 0;

  // reference data
  byte act [BATCH][C_IN][H][W];
  int  wq  [C_OUT][C_IN][KK];        // full weight times 2^6: sum of its terms
  bit [3:0] code_m [C_OUT][KMAX][C_IN][KK];
  int  kv  [C_OUT];

  flightnn_conv_top #(.BATCH(BATCH), .C_IN(C_IN), .C_OUT(C_OUT), .H(H), .W(W), .K(K),
                      .PAD(PAD), .KMAX(KMAX), .ACC_W(ACC_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int term_val(bit [3:0] c);
    if (c[2:0] == 3'd7) return 0;
    return (c[3] ? -1 : 1) * (1 << (6 - int'(c[2:0])));
  endfunction

  // kconst < 0: a random FLightNN mix (filters 0, 1, 2 get k = 0, 1, 2);
  // kconst >= 0: every filter gets k = kconst (1 is LightNN-1, 2 LightNN-2)
  task automatic load_k_and_weights(input bit fresh_weights, input int kconst);
    for (int f = 0; f < C_OUT; f++) begin
      if (kconst >= 0) kv[f] = kconst;
      else kv[f] = (f < 3) ? f : $urandom_range(0, KMAX);
      @(negedge clk);
      k_we = 1; k_f = FW'(f); k_val = KW'(kv[f]);
    end
    @(negedge clk);
    k_we = 0;
    if (fresh_weights) begin
      for (int f = 0; f < C_OUT; f++)
        for (int j = 0; j < KMAX; j++)
          for (int c = 0; c < C_IN; c++) begin
            @(negedge clk);
            wgt_we = 1; wgt_f = FW'(f); wgt_j = JW'(j); wgt_c = CW'(c);
            for (int i = 0; i < KK; i++) begin
              code_m[f][j][c][i] = 4'($urandom_range(0, 15));
              wgt_codes[i] = wcode_t'(code_m[f][j][c][i]);
            end
          end
      @(negedge clk);
      wgt_we = 0;
    end
    for (int f = 0; f < C_OUT; f++)
      for (int c = 0; c < C_IN; c++)
        for (int i = 0; i < KK; i++) begin
          wq[f][c][i] = 0;
          for (int j = 0; j < kv[f]; j++) begin
            wq[f][c][i] += term_val(code_m[f][j][c][i]);
            if (code_m[f][j][c][i][2:0] == 3'd7) n_zero_terms++;
          end
        end
  endtask

  task automatic run_and_check();
    int cost = 0, cycles = 0;
    for (int f = 0; f < C_OUT; f++) begin
      cost += (kv[f] == 0) ? 1 : kv[f]*HO*WO*C_IN;
      if (kv[f] == 0) n_pruned++;
      if (kv[f] == 1) n_single++;
      if (kv[f] == 2) n_double++;
    end
    @(negedge clk);
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
      $display("run took %0d cycles, expected %0d", cycles, 4 + cost);
    end
    $display("run: %0d cycles for %0d filters", cycles, C_OUT);
    last_cycles = cycles;
    // read back and compare every output pixel
    for (int f = 0; f < C_OUT; f++)
      for (int y = 0; y < HO; y++)
        for (int x = 0; x < WO; x++) begin
          ofm_f = FW'(f); ofm_y = OYW'(y); ofm_x = OXW'(x);
          @(negedge clk);
          for (int b = 0; b < BATCH; b++) begin
            longint e = 0;
            for (int c = 0; c < C_IN; c++)
              for (int ky = 0; ky < K; ky++)
                for (int kx = 0; kx < K; kx++) begin
                  int iy = y + ky - PAD, ix = x + kx - PAD;
                  if (iy < 0 || iy >= H || ix < 0 || ix >= W) begin
                    if (b == 0 && c == 0 && f == 0) n_pad_taps++;
                  end else
                    e += longint'(act[b][c][iy][ix]) * wq[f][c][ky*K+kx];
                end
            checks++;
            if (longint'($signed(ofm_data[b])) != e) begin
              failures++;
              if (failures < 10)
                $display("f%0d y%0d x%0d b%0d: got %0d exp %0d", f, y, x, b,
                         $signed(ofm_data[b]), e);
            end
          end
        end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
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
    load_k_and_weights(1, -1);
    run_and_check();
    // new k values, same weights: the first pass must overwrite old maps
    load_k_and_weights(0, -1);
    run_and_check();
    begin
      // LightNN-1 and LightNN-2 are the all-one and all-two special cases;
      // a FLightNN mix (with filters below two terms) is faster than
      // LightNN-2, and with pruned filters it can beat LightNN-1 too
      int cyc_mix, cyc_l1, cyc_l2;
      cyc_mix = last_cycles;
      load_k_and_weights(0, 1);
      run_and_check();
      cyc_l1 = last_cycles;
      load_k_and_weights(0, 2);
      run_and_check();
      cyc_l2 = last_cycles;
      $display("cycles: LightNN-1 %0d, FLightNN mix %0d, LightNN-2 %0d", cyc_l1, cyc_mix, cyc_l2);
      checks += 2;
      if (cyc_l2 - 4 != 2 * (cyc_l1 - 4)) failures++;
      if (!(cyc_mix < cyc_l2)) failures++;
    end
    $display("mechanisms: pruned=%0d single=%0d double=%0d pad_taps=%0d zero_terms=%0d",
             n_pruned, n_single, n_double, n_pad_taps, n_zero_terms);
    checks += 5;
    if (n_pruned == 0) failures++;
    if (n_single == 0) failures++;
    if (n_double == 0) failures++;
    if (n_pad_taps == 0) failures++;
    if (n_zero_terms == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
