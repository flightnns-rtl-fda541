// conv_controller -- sequencer of the FLightNN convolution engine.
//
// After start it walks the layer filter by filter. For filter f it reads
// k_f from the k table and runs k_f passes; pass j is a complete LightNN-1
// convolution with the j-th power-of-two term of the filter: for every
// output row oy, column ox and input channel c it issues one slice, one
// per cycle (c innermost). A pruned filter (k_f = 0) costs one idle cycle
// and issues nothing. After the last slice the controller waits DRAIN = 3
// cycles for the buffer read, compute and read-modify-write stages, then
// returns to idle and pulses done for one cycle.
//
// So a layer takes  1 + sum_f cost_f + 3  cycles from the start cycle to
// the done cycle, with cost_f = k_f*HO*WO*C_IN for k_f > 0 and 1 for
// k_f = 0: the run time grows with the total shift-term count, which is
// the speed/accuracy handle the paper's per-filter k gives.
//
// Issue outputs are valid while iss_valid is high: iss_f/iss_j/iss_c/
// iss_oy/iss_ox, iss_first_c (c == 0), iss_last_c (c == C_IN-1) and
// iss_first_pass (j == 0). start is ignored while busy. The loop order and
// the one-slice-per-cycle schedule are this design's choices; decomposing a
// k_f filter into k_f one-shift passes summed together is the paper's.
module conv_controller #(
  parameter int unsigned C_OUT = 64,
  parameter int unsigned C_IN  = 64,
  parameter int unsigned HO    = 32,
  parameter int unsigned WO    = 32,
  parameter int unsigned KMAX  = 2,
  localparam int unsigned FW   = (C_OUT > 1) ? $clog2(C_OUT) : 1,
  localparam int unsigned JW   = (KMAX > 1) ? $clog2(KMAX) : 1,
  localparam int unsigned KW   = $clog2(KMAX + 1),
  localparam int unsigned CW   = (C_IN > 1) ? $clog2(C_IN) : 1,
  localparam int unsigned YW   = (HO > 1) ? $clog2(HO) : 1,
  localparam int unsigned XW   = (WO > 1) ? $clog2(WO) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic          busy,
  output logic          done,
  // k table lookup for the current filter
  output logic [FW-1:0] k_f,
  input  logic [KW-1:0] k_val,
  // issue port
  output logic          iss_valid,
  output logic [FW-1:0] iss_f,
  output logic [JW-1:0] iss_j,
  output logic [CW-1:0] iss_c,
  output logic [YW-1:0] iss_oy,
  output logic [XW-1:0] iss_ox,
  output logic          iss_first_c,
  output logic          iss_last_c,
  output logic          iss_first_pass
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;
  localparam int unsigned DRAIN = 3;

  state_e        state;
  logic [FW-1:0] f_q;
  logic [JW-1:0] j_q;
  logic [CW-1:0] c_q;
  logic [YW-1:0] oy_q;
  logic [XW-1:0] ox_q;
  logic [1:0]    drain_q;

  logic [KW-1:0] k_eff;      // k clamped to KMAX
  logic          pruned;
  logic          last_c, last_x, last_y, last_j, last_f;

  always_comb begin
    k_eff  = (32'(k_val) > KMAX) ? KW'(KMAX) : k_val;
    pruned = (k_eff == '0);
    last_c = (32'(c_q)  == C_IN - 1);
    last_x = (32'(ox_q) == WO - 1);
    last_y = (32'(oy_q) == HO - 1);
    last_j = (32'(j_q) + 1 >= 32'(k_eff));
    last_f = (32'(f_q)  == C_OUT - 1);
  end

  assign k_f  = f_q;
  assign busy = (state != S_IDLE);

  assign iss_valid      = (state == S_RUN) && !pruned;
  assign iss_f          = f_q;
  assign iss_j          = j_q;
  assign iss_c          = c_q;
  assign iss_oy         = oy_q;
  assign iss_ox         = ox_q;
  assign iss_first_c    = (c_q == '0);
  assign iss_last_c     = last_c;
  assign iss_first_pass = (j_q == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      f_q     <= '0;
      j_q     <= '0;
      c_q     <= '0;
      oy_q    <= '0;
      ox_q    <= '0;
      drain_q <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (start) begin
            state <= S_RUN;
            f_q   <= '0;
            j_q   <= '0;
            c_q   <= '0;
            oy_q  <= '0;
            ox_q  <= '0;
          end
        end
        S_RUN: begin
          // the end of a filter: after its last pass, or at once if pruned
          if (pruned || (last_c && last_x && last_y && last_j)) begin
            c_q  <= '0;
            ox_q <= '0;
            oy_q <= '0;
            j_q  <= '0;
            if (last_f) begin
              state   <= S_DRAIN;
              drain_q <= 2'(DRAIN - 1);
            end else begin
              f_q <= f_q + 1'b1;
            end
          end else if (last_c && last_x && last_y) begin
            c_q  <= '0;
            ox_q <= '0;
            oy_q <= '0;
            j_q  <= j_q + 1'b1;
          end else if (last_c && last_x) begin
            c_q  <= '0;
            ox_q <= '0;
            oy_q <= oy_q + 1'b1;
          end else if (last_c) begin
            c_q  <= '0;
            ox_q <= ox_q + 1'b1;
          end else begin
            c_q <= c_q + 1'b1;
          end
        end
        S_DRAIN: begin
          if (drain_q == '0) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            drain_q <= drain_q - 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // issued coordinates always lie inside the layer
  a_issue_range: assert property (@(posedge clk) disable iff (!rst_n)
      iss_valid |-> (32'(iss_c) < C_IN && 32'(iss_ox) < WO && 32'(iss_oy) < HO
                     && 32'(iss_f) < C_OUT && 32'(iss_j) < KMAX))
    else $error("conv_controller: issued slice out of range");

endmodule
