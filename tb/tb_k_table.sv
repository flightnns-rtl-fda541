// tb_k_table -- checks that reset leaves every filter pruned (k = 0), then
// writes random k values in 0..2 and reads them back through both ports.
module tb_k_table;
  localparam int C_OUT = 6, KMAX = 2;
  localparam int FW = $clog2(C_OUT), KW = $clog2(KMAX + 1);

  logic clk = 0, rst_n = 0;
  logic wr_en = 0;
  logic [FW-1:0] wr_f = '0, ra_f = '0, rb_f = '0;
  logic [KW-1:0] wr_k = '0, ra_k, rb_k;
  int model [C_OUT];
  int checks = 0, failures = 0;

  k_table #(.C_OUT(C_OUT), .KMAX(KMAX)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < C_OUT; f++) begin
      ra_f = FW'(f);
      #1;
      checks++;
      if (ra_k != 0) failures++;
      model[f] = 0;
    end
    for (int n = 0; n < 100; n++) begin
      @(negedge clk);
      wr_en = 1;
      wr_f  = FW'($urandom_range(0, C_OUT-1));
      wr_k  = KW'($urandom_range(0, KMAX));
      model[wr_f] = int'(wr_k);
      @(negedge clk);
      wr_en = 0;
      ra_f = FW'($urandom_range(0, C_OUT-1));
      rb_f = FW'($urandom_range(0, C_OUT-1));
      #1;
      checks += 2;
      if (int'(ra_k) != model[ra_f]) failures++;
      if (int'(rb_k) != model[rb_f]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
