// softmax_unit: softmax over the N kept logits.
//
// Input is the base-2 exponent t of each kept entry (from logit_scale, so the
// largest entry has t = 0) and its keep flag. The unit works sequentially, one
// entry per cycle, with a single exp2 evaluator and a single multiplier:
//   1. EXP : w_j = 2^(-t_j) in Q16 (0 for dropped entries), sum = sum of w_j.
//   2. DIV : R = floor(2^32 / sum) by restoring division, one quotient bit per
//            cycle (33 cycles). sum >= 1.0 whenever one entry is kept.
//   3. NORM: p_j = (w_j * R) >> 16, the probability in Q16 (1.0 = 65536).
// done rises 2*N + 33 cycles after the edge that takes start. The method only names the
// softmax; its number formats and this sequential organisation are this
// design's own choices. If no entry is kept all probabilities are 0.
//
// Interface: start (one-cycle pulse, inputs held until done), done (one-cycle
// pulse, prob valid from then until the next start), busy.
module softmax_unit
  import had_pkg::*;
#(
  parameter int unsigned N  = TOPN_DEF,
  localparam int unsigned IW = $clog2(N),
  localparam int unsigned SUMW = 17 + $clog2(N + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [N-1:0][31:0]  t,
  input  logic [N-1:0]        keep,
  output logic [N-1:0][16:0]  prob,
  output logic                busy,
  output logic                done
);

  typedef enum logic [1:0] {S_IDLE, S_EXP, S_DIV, S_NORM} state_t;

  state_t            state;
  logic [IW-1:0]     i;
  logic [5:0]        bitc;
  logic [N-1:0][16:0] w;
  logic [SUMW-1:0]   sum;
  logic [SUMW-1:0]   rem;
  logic [32:0]       quo;

  assign busy = (state != S_IDLE);

  // per-cycle arithmetic: exp2 of the current entry, one division step,
  // one normalising multiply
  logic [16:0]   wj;
  logic [SUMW:0] r2;
  logic [49:0]   prod;

  always_comb begin
    wj   = keep[i] ? exp2_neg_q16(t[i]) : '0;
    // dividend is 2^32: its bit 32 is 1, all lower bits are 0
    r2   = {rem, (bitc == 6'd0)};
    prod = 50'(w[i]) * 50'(quo);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      i     <= '0;
      bitc  <= '0;
      w     <= '0;
      sum   <= '0;
      rem   <= '0;
      quo   <= '0;
      prob  <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          state <= S_EXP;
          i     <= '0;
          sum   <= '0;
        end
        S_EXP: begin
          w[i] <= wj;
          sum  <= sum + SUMW'(wj);
          if (int'(i) == N - 1) begin
            state <= S_DIV;
            bitc  <= 6'd0;
            rem   <= '0;
            quo   <= '0;
          end else begin
            i <= i + 1'b1;
          end
        end
        S_DIV: begin
          if (sum != '0 && r2 >= {1'b0, sum}) begin
            rem <= SUMW'(r2 - {1'b0, sum});
            quo <= {quo[31:0], 1'b1};
          end else begin
            rem <= r2[SUMW-1:0];
            quo <= {quo[31:0], 1'b0};
          end
          if (bitc == 6'd32) begin
            state <= S_NORM;
            i     <= '0;
          end else begin
            bitc <= bitc + 6'd1;
          end
        end
        S_NORM: begin
          prob[i] <= 17'(prod >> 16);
          if (int'(i) == N - 1) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            i <= i + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
