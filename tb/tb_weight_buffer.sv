// tb_weight_buffer -- writes random term slices to every (filter, term,
// channel) slot of a small buffer, then reads them back in random order
// and checks each slice one cycle after the read.
module tb_weight_buffer;
  import flightnn_pkg::*;

  localparam int C_OUT = 5, C_IN = 3, KMAX = 2, KK = 9;
  localparam int FW = $clog2(C_OUT), JW = 1, CW = $clog2(C_IN);

  logic clk = 0;
  logic wr_en = 0, rd_en = 0;
  logic [FW-1:0] wr_f = '0, rd_f = '0;
  logic [JW-1:0] wr_j = '0, rd_j = '0;
  logic [CW-1:0] wr_c = '0, rd_c = '0;
  wcode_t [KK-1:0] wr_codes = '0, rd_codes;
  wcode_t [KK-1:0] model [C_OUT][KMAX][C_IN];
  int checks = 0, failures = 0;

  weight_buffer #(.C_OUT(C_OUT), .C_IN(C_IN), .KMAX(KMAX), .KK(KK)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int f = 0; f < C_OUT; f++)
      for (int j = 0; j < KMAX; j++)
        for (int c = 0; c < C_IN; c++) begin
          @(negedge clk);
          wr_en = 1; wr_f = FW'(f); wr_j = JW'(j); wr_c = CW'(c);
          for (int i = 0; i < KK; i++) wr_codes[i] = wcode_t'($urandom_range(0, 15));
          model[f][j][c] = wr_codes;
        end
    @(negedge clk);
    wr_en = 0;
    for (int n = 0; n < 200; n++) begin
      automatic int f = $urandom_range(0, C_OUT-1), j = $urandom_range(0, KMAX-1), c = $urandom_range(0, C_IN-1);
      @(negedge clk);
      rd_en = 1; rd_f = FW'(f); rd_j = JW'(j); rd_c = CW'(c);
      @(negedge clk);
      rd_en = 0;
      checks++;
      if (rd_codes !== model[f][j][c]) begin
        failures++;
        $display("f%0d j%0d c%0d: got %h exp %h", f, j, c, rd_codes, model[f][j][c]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
