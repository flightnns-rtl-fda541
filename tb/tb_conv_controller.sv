// tb_conv_controller -- runs the sequencer over a small layer (5 filters,
// 2 channels, 2x3 outputs) with several k patterns, including pruned
// filters and out-of-range k, and compares every issued slice with the
// expected filter / pass / row / column / channel order, the first/last
// flags, and the cycle count 4 + sum(cost_f) from start to done.
module tb_conv_controller;
  localparam int C_OUT = 5, C_IN = 2, HO = 2, WO = 3, KMAX = 2;
  localparam int FW = $clog2(C_OUT), JW = 1, KW = 2, CW = 1, YW = 1, XW = 2;

  logic clk = 0, rst_n = 0, start = 0;
  logic busy, done;
  logic [FW-1:0] k_f;
  logic [KW-1:0] k_val;
  logic iss_valid, iss_first_c, iss_last_c, iss_first_pass;
  logic [FW-1:0] iss_f;
  logic [JW-1:0] iss_j;
  logic [CW-1:0] iss_c;
  logic [YW-1:0] iss_oy;
  logic [XW-1:0] iss_ox;
  int ktab [C_OUT];
  int checks = 0, failures = 0;

  assign k_val = KW'(ktab[k_f]);

  conv_controller #(.C_OUT(C_OUT), .C_IN(C_IN), .HO(HO), .WO(WO), .KMAX(KMAX)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int exp_q [$];   // encoded f*10000 + j*1000 + y*100 + x*10 + c

  task automatic run_layer(input int kv [C_OUT]);
    int cost = 0, cycles = 0;
    int e, got;
    ktab = kv;
    exp_q.delete();
    for (int f = 0; f < C_OUT; f++) begin
      int k = (kv[f] > KMAX) ? KMAX : kv[f];
      cost += (k == 0) ? 1 : k*HO*WO*C_IN;
      for (int j = 0; j < k; j++)
        for (int y = 0; y < HO; y++)
          for (int x = 0; x < WO; x++)
            for (int c = 0; c < C_IN; c++) begin
              exp_q.push_back(f*10000 + j*1000 + y*100 + x*10 + c);
            end
    end
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    cycles = 1;
    while (!done) begin
      if (iss_valid) begin
        checks++;
        if (exp_q.size() == 0) failures++;
        else begin
          e   = exp_q[0];
          exp_q.delete(0);
          got = int'(iss_f)*10000 + int'(iss_j)*1000 + int'(iss_oy)*100 + int'(iss_ox)*10 + int'(iss_c);
          if (got != e || iss_first_c != (e % 10 == 0) || iss_last_c != (e % 10 == C_IN-1) ||
              iss_first_pass != ((e / 1000) % 10 == 0)) begin
            failures++;
            $display("issue mismatch got %05d exp %05d", got, e);
          end
        end
      end
      checks++;
      if (!busy) failures++;
      @(negedge clk);
      cycles++;
    end
    checks += 3;
    if (exp_q.size() != 0) failures++;
    if (cycles != 4 + cost) begin
      failures++;
      $display("cycles %0d expected %0d", cycles, 4 + cost);
    end
    @(negedge clk);
    if (busy || done) failures++;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    run_layer('{1, 2, 0, 2, 1});
    run_layer('{0, 0, 0, 0, 0});
    run_layer('{2, 2, 2, 2, 2});
    run_layer('{3, 0, 1, 0, 2});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
