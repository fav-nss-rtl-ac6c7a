// softmax4 -- hardware Softmax on the IDS class scores.
//
// Post-processing of the IDS core: converts the N_CLASS raw scores into
// probabilities p_i = exp(x_i) / sum_j exp(x_j) and reports the winning class,
// so that no processor has to run the activation.  A hardware Softmax fed by
// the IDS stream, with multipliers for the exponentials, follows the testbed
// description; the number format and the algorithm are choices of this design.
//
// Number formats.  Scores are signed IN_W-bit fixed point with FRAC fraction
// bits.  Probabilities are unsigned Q0.P_W (P_W = 16: 0xFFFF = 1.0, clamped).
//
// How it works (one result every ~21 cycles):
//   1. capture the scores; find the maximum m (and the arg-max class).
//   2. for every class, d = m - x_i >= 0 and exp(-d) = 2^-(d*log2 e):
//      d is multiplied by round(log2(e)*2^15) = 47274 (one multiplier per
//      class); the integer part k of the product is a right shift, the top four
//      fraction bits f index a 16-entry table T[f] = round(2^16 * 2^(-f/16)).
//      e_i = T[f] >> k, so the largest class always gets e = 2^16 exactly.
//      Error from the 4-bit fraction is below 4.4 % per term.
//   3. S = sum of the e_i (at least 2^16, so never zero).
//   4. p_i = e_i * 2^16 / S by N_CLASS restoring dividers in parallel,
//      one quotient bit per cycle, 17 cycles.
// Subtracting the maximum first keeps every exponential in (0, 1], the usual
// overflow-free way of evaluating Softmax.
//
// Interface.  AXI-stream style input (s_tvalid/s_tready, class i in bits
// [i*IN_W +: IN_W]); s_tready is high only while idle.  m_valid pulses for one
// cycle with prob (class i in [i*P_W +: P_W]), cls (arg-max, lowest index on
// a tie) and onehot (N_CLASS-bit one-hot of cls, the result word read by the
// bridge node).  Latency from the accepting cycle to m_valid: 21 cycles.
module softmax4 #(
  parameter int unsigned N_CLASS = 4,
  parameter int unsigned IN_W    = 16,
  parameter int unsigned FRAC    = 4,
  parameter int unsigned P_W     = 16,
  localparam int unsigned CLS_W  = (N_CLASS > 1) ? $clog2(N_CLASS) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     s_tvalid,
  output logic                     s_tready,
  input  logic [N_CLASS*IN_W-1:0]  s_tdata,
  output logic                     m_valid,
  output logic [N_CLASS*P_W-1:0]   prob,
  output logic [CLS_W-1:0]         cls,
  output logic [N_CLASS-1:0]       onehot
);

  localparam logic [15:0] LOG2E_Q15 = 16'd47274;
  localparam int unsigned DW   = IN_W + 1;          // width of m - x_i
  localparam int unsigned PW   = DW + 16;           // width of the product
  localparam int unsigned SUM_W = 17 + $clog2(N_CLASS + 1);

  typedef enum logic [2:0] {S_IDLE, S_EXP, S_SUM, S_DIV, S_OUT} state_t;

  // T[f] = round(2^16 * 2^(-f/16)), f = 0..15
  function automatic logic [16:0] exp2_frac(input logic [3:0] f);
    unique case (f)
      4'd0:  exp2_frac = 17'd65536;  4'd1:  exp2_frac = 17'd62757;
      4'd2:  exp2_frac = 17'd60097;  4'd3:  exp2_frac = 17'd57549;
      4'd4:  exp2_frac = 17'd55109;  4'd5:  exp2_frac = 17'd52773;
      4'd6:  exp2_frac = 17'd50535;  4'd7:  exp2_frac = 17'd48393;
      4'd8:  exp2_frac = 17'd46341;  4'd9:  exp2_frac = 17'd44376;
      4'd10: exp2_frac = 17'd42495;  4'd11: exp2_frac = 17'd40693;
      4'd12: exp2_frac = 17'd38968;  4'd13: exp2_frac = 17'd37316;
      4'd14: exp2_frac = 17'd35734;  default: exp2_frac = 17'd34219;
    endcase
  endfunction

  state_t                    state;
  logic signed [IN_W-1:0]    x   [N_CLASS];
  logic signed [IN_W-1:0]    xmax;
  logic [CLS_W-1:0]          amax;
  logic [16:0]               e   [N_CLASS];
  logic [16:0]               e_c [N_CLASS];
  logic [SUM_W-1:0]          sum;
  logic [SUM_W:0]            rem [N_CLASS];
  logic [16:0]               q   [N_CLASS];
  logic [4:0]                step;

  // Maximum and arg-max of the captured scores.
  always_comb begin
    xmax = x[0];
    amax = '0;
    for (int i = 1; i < N_CLASS; i++)
      if (x[i] > xmax) begin
        xmax = x[i];
        amax = CLS_W'(i);
      end
  end

  // exp(-(xmax - x_i)) in Q1.16.
  always_comb begin
    for (int i = 0; i < N_CLASS; i++) begin
      logic [DW-1:0] d;
      logic [PW-1:0] t;
      logic [PW-1:0] k;
      d = DW'(signed'({xmax[IN_W-1], xmax}) - signed'({x[i][IN_W-1], x[i]}));
      t = PW'(d) * PW'(LOG2E_Q15);                // Q(FRAC+15)
      k = t >> (FRAC + 15);
      e_c[i] = (k > PW'(16)) ? 17'd0
             : (exp2_frac(t[FRAC+14 -: 4]) >> k[4:0]);
    end
  end

  assign s_tready = (state == S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      sum     <= '0;
      step    <= '0;
      m_valid <= 1'b0;
      prob    <= '0;
      cls     <= '0;
      onehot  <= '0;
      for (int i = 0; i < N_CLASS; i++) begin
        x[i]   <= '0;
        e[i]   <= '0;
        rem[i] <= '0;
        q[i]   <= '0;
      end
    end else begin
      m_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (s_tvalid) begin
          for (int i = 0; i < N_CLASS; i++) x[i] <= s_tdata[i*IN_W +: IN_W];
          state <= S_EXP;
        end
        S_EXP: begin
          for (int i = 0; i < N_CLASS; i++) e[i] <= e_c[i];
          cls   <= amax;
          state <= S_SUM;
        end
        S_SUM: begin
          logic [SUM_W-1:0] s;
          s = '0;
          for (int i = 0; i < N_CLASS; i++) s = s + SUM_W'(e[i]);
          sum  <= s;
          for (int i = 0; i < N_CLASS; i++) begin
            rem[i] <= (SUM_W+1)'(e[i]);
            q[i]   <= '0;
          end
          step  <= 5'd0;
          state <= S_DIV;
        end
        S_DIV: begin
          for (int i = 0; i < N_CLASS; i++) begin
            if (rem[i] >= {1'b0, sum}) begin
              q[i]   <= {q[i][15:0], 1'b1};
              rem[i] <= (rem[i] - {1'b0, sum}) << 1;
            end else begin
              q[i]   <= {q[i][15:0], 1'b0};
              rem[i] <= rem[i] << 1;
            end
          end
          step <= step + 1'b1;
          if (step == 5'd16) state <= S_OUT;
        end
        default: begin              // S_OUT
          for (int i = 0; i < N_CLASS; i++)
            prob[i*P_W +: P_W] <= q[i][16] ? '1 : q[i][15 -: P_W];
          onehot  <= N_CLASS'(1) << cls;
          m_valid <= 1'b1;
          state   <= S_IDLE;
        end
      endcase
    end
  end

endmodule
