// tb_flightnn_workloads -- runs the largest convolutional layer of the
// wider evaluated networks, one after another, each on an engine sized for
// it (flightnn_layer_check): 128 filters (the width-128 VGG and ResNet
// networks), 256 filters (the width-256 ResNets; 8x8 CIFAR-100 maps and
// 7x7 ImageNet maps) and 512 filters (the width-512 CIFAR-10 VGG). Filter
// counts are those of the networks; input channels (taken equal to the
// filter count) and map sizes are typical for such networks, not given
// with them. The 64-filter layer is covered by tb_flightnn_full.
module tb_flightnn_workloads;
  logic clk = 0, rst_n = 0;
  logic go [4];
  logic fin [4];
  int   chk [4], fail [4];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  flightnn_layer_check #(.LABEL("width 128, 8x8"), .C_IN(128), .C_OUT(128), .H(8), .W(8)) u_w128 (
    .clk, .rst_n, .go (go[0]), .finished (fin[0]), .checks (chk[0]), .failures (fail[0]));
  flightnn_layer_check #(.LABEL("width 256, 8x8"), .C_IN(256), .C_OUT(256), .H(8), .W(8)) u_w256 (
    .clk, .rst_n, .go (go[1]), .finished (fin[1]), .checks (chk[1]), .failures (fail[1]));
  flightnn_layer_check #(.LABEL("width 256, 7x7"), .C_IN(256), .C_OUT(256), .H(7), .W(7)) u_w256i (
    .clk, .rst_n, .go (go[2]), .finished (fin[2]), .checks (chk[2]), .failures (fail[2]));
  flightnn_layer_check #(.LABEL("width 512, 8x8"), .C_IN(512), .C_OUT(512), .H(8), .W(8)) u_w512 (
    .clk, .rst_n, .go (go[3]), .finished (fin[3]), .checks (chk[3]), .failures (fail[3]));

  initial begin
    repeat (60000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4; i++) go[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 4; i++) begin
      go[i] = 1;
      wait (fin[i] === 1'b1);
      checks   += chk[i];
      failures += fail[i];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
