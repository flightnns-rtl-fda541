// k_table -- per-filter shift-term count k_f of the layer.
//
// k_f = 0 marks a filter the training pruned (its output map is all zero),
// k_f = 1 a filter computed with one shift per weight, k_f = 2 one with two
// shifts and an add (the paper trains with at most KMAX = 2). The host
// writes entries; two combinational read ports serve the sequencer (ra) and
// the result readout (rb). Reset clears every entry to 0. Values above
// KMAX are refused by an assertion.
//
// Per-filter k values are the paper's; the register-file form is this
// design's choice.
module k_table #(
  parameter int unsigned C_OUT = 64,
  parameter int unsigned KMAX  = 2,
  localparam int unsigned FW   = (C_OUT > 1) ? $clog2(C_OUT) : 1,
  localparam int unsigned KW   = $clog2(KMAX + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wr_en,
  input  logic [FW-1:0] wr_f,
  input  logic [KW-1:0] wr_k,
  input  logic [FW-1:0] ra_f,
  output logic [KW-1:0] ra_k,
  input  logic [FW-1:0] rb_f,
  output logic [KW-1:0] rb_k
);

  logic [KW-1:0] k_q [C_OUT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < C_OUT; i++) k_q[i] <= '0;
    end else if (wr_en) begin
      k_q[wr_f] <= wr_k;
    end
  end

  assign ra_k = k_q[ra_f];
  assign rb_k = k_q[rb_f];

  a_k_range: assert property (@(posedge clk) disable iff (!rst_n)
                              wr_en |-> (32'(wr_k) <= KMAX))
    else $error("k_table: k = %0d above KMAX", wr_k);

endmodule
