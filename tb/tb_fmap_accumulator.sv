// tb_fmap_accumulator -- sends random first/add requests, often to the
// same address on consecutive cycles (which needs the write forwarding),
// then reads every address through the host port and compares with a
// reference array. Also checks host reads that hit a write in flight.
module tb_fmap_accumulator;
  localparam int BATCH = 2, DEPTH = 8, ACC_W = 32, AW = 3;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_first = 0;
  logic [AW-1:0] in_addr = '0, rd_addr = '0;
  logic [BATCH-1:0][ACC_W-1:0] in_data = '0, rd_data;
  int model [DEPTH][BATCH];
  logic written [DEPTH];
  int checks = 0, failures = 0, b2b_same = 0;

  fmap_accumulator #(.BATCH(BATCH), .DEPTH(DEPTH), .ACC_W(ACC_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    for (int a = 0; a < DEPTH; a++) begin
      if (!written[a]) continue;
      @(negedge clk);
      in_valid = 0;
      rd_addr = AW'(a);
      @(negedge clk);
      for (int b = 0; b < BATCH; b++) begin
        checks++;
        if ($signed(rd_data[b]) != model[a][b]) begin
          failures++;
          $display("addr %0d lane %0d got %0d exp %0d", a, b, $signed(rd_data[b]), model[a][b]);
        end
      end
    end
  endtask

  initial begin
    automatic int prev_addr = -1;
    for (int a = 0; a < DEPTH; a++) written[a] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 20; round++) begin
      for (int n = 0; n < 50; n++) begin
        int a;
        @(negedge clk);
        if ($urandom_range(0, 4) == 0) begin
          in_valid = 0;
          prev_addr = -1;
          continue;
        end
        a = ($urandom_range(0, 2) == 0 && prev_addr >= 0) ? prev_addr : $urandom_range(0, DEPTH-1);
        if (a == prev_addr) b2b_same++;
        in_valid = 1;
        in_addr  = AW'(a);
        in_first = !written[a] || ($urandom_range(0, 5) == 0);
        for (int b = 0; b < BATCH; b++) begin
          automatic int v = int'($urandom_range(0, 2000)) - 1000;
          in_data[b] = ACC_W'(v);
          model[a][b] = in_first ? v : model[a][b] + v;
        end
        written[a] = 1;
        prev_addr = a;
      end
      @(negedge clk);
      in_valid = 0;
      prev_addr = -1;
      // host read in the cycle the last write lands (write-first port)
      rd_addr = in_addr;
      @(negedge clk);
      for (int b = 0; b < BATCH; b++) begin
        checks++;
        if ($signed(rd_data[b]) != model[in_addr][b]) failures++;
      end
      check_all();
    end
    checks++;
    if (b2b_same == 0) failures++;
    $display("back-to-back same-address requests: %0d", b2b_same);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
