// weight_buffer -- on-chip memory for the power-of-two weight terms.
//
// A FLightNN filter f with k_f shift terms is stored as k_f LightNN-1
// filters: term j (j < KMAX) of filter f holds, for every input channel c,
// the K*K 4-bit codes {sign, e} of that term. One word = one (f, j, c)
// slice = KK codes; word address (f*KMAX + j)*C_IN + c. Slots for terms
// j >= k_f are never read. The host writes one slice per cycle; the engine
// reads one slice per cycle, returned on rd_codes one cycle after rd_en.
//
// Splitting each filter into k_i one-shift filters is the paper's (its
// Fig. 3); the memory layout is this design's choice.
module weight_buffer
  import flightnn_pkg::*;
#(
  parameter int unsigned C_OUT = 64,
  parameter int unsigned C_IN  = 64,
  parameter int unsigned KMAX  = 2,
  parameter int unsigned KK    = 9,
  localparam int unsigned FW   = (C_OUT > 1) ? $clog2(C_OUT) : 1,
  localparam int unsigned JW   = (KMAX > 1) ? $clog2(KMAX) : 1,
  localparam int unsigned CW   = (C_IN > 1) ? $clog2(C_IN) : 1,
  localparam int unsigned DEPTH = C_OUT*KMAX*C_IN,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic            clk,
  input  logic            wr_en,
  input  logic [FW-1:0]   wr_f,
  input  logic [JW-1:0]   wr_j,
  input  logic [CW-1:0]   wr_c,
  input  wcode_t [KK-1:0] wr_codes,
  input  logic            rd_en,
  input  logic [FW-1:0]   rd_f,
  input  logic [JW-1:0]   rd_j,
  input  logic [CW-1:0]   rd_c,
  output wcode_t [KK-1:0] rd_codes
);

  wcode_t [KK-1:0] mem [DEPTH];

  function automatic logic [AW-1:0] slice_addr(logic [FW-1:0] f, logic [JW-1:0] j,
                                              logic [CW-1:0] c);
    return AW'((32'(f)*KMAX + 32'(j))*C_IN + 32'(c));
  endfunction

  always_ff @(posedge clk) begin
    if (wr_en) mem[slice_addr(wr_f, wr_j, wr_c)] <= wr_codes;
    if (rd_en) rd_codes <= mem[slice_addr(rd_f, rd_j, rd_c)];
  end

endmodule
