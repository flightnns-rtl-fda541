// tb_shift_compute_unit -- drives random channel slices (random window
// bytes and term codes, 1..5 channels per neuron, random idle gaps) into a
// 3-lane, 3x3 compute unit and compares each finished neuron with an
// integer reference, including its tag and that out_valid comes exactly
// one cycle after the last slice.
module tb_shift_compute_unit;
  import flightnn_pkg::*;

  localparam int BATCH = 3, KK = 9, ACC_W = 32, TAG_W = 8;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, first_c = 0, last_c = 0;
  logic [TAG_W-1:0] in_tag = '0;
  logic [BATCH-1:0][KK-1:0][ACT_W-1:0] win = '0;
  wcode_t [KK-1:0] codes = '0;
  logic out_valid;
  logic [TAG_W-1:0] out_tag;
  logic [BATCH-1:0][ACC_W-1:0] out_sum;
  int checks = 0, failures = 0;

  shift_compute_unit #(.BATCH(BATCH), .KK(KK), .ACC_W(ACC_W), .TAG_W(TAG_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_prod(int a, wcode_t c);
    if (c.e == 3'd7) return 0;
    return (c.sign ? -1 : 1) * a * (1 << (6 - int'(c.e)));
  endfunction

  int exp_sum [BATCH];
  int exp_tag_q [$];   // expected tag per neuron
  int exp_sum_q [$];   // expected sums, BATCH per neuron
  int valid_cnt = 0, neurons = 0;

  // monitor
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      valid_cnt++;
      checks++;
      if (exp_tag_q.size() == 0) begin
        failures++;
        $display("unexpected out_valid");
      end else begin
        if (int'(out_tag) != exp_tag_q[0]) failures++;
        exp_tag_q.delete(0);
        for (int b = 0; b < BATCH; b++) begin
          checks++;
          if ($signed(out_sum[b]) != exp_sum_q[0]) begin
            failures++;
            $display("lane %0d got %0d exp %0d", b, $signed(out_sum[b]), exp_sum_q[0]);
          end
          exp_sum_q.delete(0);
        end
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      automatic int nc = 1 + $urandom_range(0, 4);
      for (int b = 0; b < BATCH; b++) exp_sum[b] = 0;
      for (int c = 0; c < nc; c++) begin
        @(negedge clk);
        in_valid = 1;
        first_c  = (c == 0);
        last_c   = (c == nc - 1);
        in_tag   = TAG_W'(n);
        for (int i = 0; i < KK; i++) codes[i] = wcode_t'($urandom_range(0, 15));
        for (int b = 0; b < BATCH; b++)
          for (int i = 0; i < KK; i++) begin
            win[b][i] = ACT_W'($urandom_range(0, 255));
            exp_sum[b] += ref_prod(int'($signed(win[b][i])), codes[i]);
          end
        if (last_c) begin
          exp_tag_q.push_back(n % 256);
          for (int b = 0; b < BATCH; b++) exp_sum_q.push_back(exp_sum[b]);
          neurons++;
        end
        // out_valid must appear exactly one cycle after the last slice
        if (last_c) fork begin
          @(posedge clk); #1;
          checks++;
          if (!out_valid) begin failures++; $display("latency wrong"); end
        end join_none
        if ($urandom_range(0, 3) == 0) begin
          @(negedge clk);
          in_valid = 0;
        end
      end
    end
    @(negedge clk);
    in_valid = 0;
    repeat (4) @(posedge clk);
    checks++;
    if (valid_cnt != neurons || exp_tag_q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
