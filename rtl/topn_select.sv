// topn_select: streaming top-N selection of attention logits.
//
// Keeps the N largest (score, key index) pairs seen since clear, sorted with the
// largest first. One candidate is accepted per cycle (in_valid). A candidate is
// inserted behind every kept entry whose score is greater or equal, and the
// last entry falls out when the list is full; candidates arriving in ascending
// key order therefore win ties by lower key index. The comparison against all
// N entries and the shift happen in parallel in one cycle, so the list is
// complete the cycle after the last candidate. This realises
// A_topn = topn(A_l, N) of the method; the tie rule and the one-per-cycle
// streaming are this design's own choices.
//
// N must be at least 2.
//
// Interface: clear empties the list (takes priority over in_valid). Outputs
// ent_score/ent_idx/ent_valid are the registered list; evictions pulses for one
// cycle whenever an accepted candidate pushes a valid entry out or is itself
// dropped because the list is full.
module topn_select
  import had_pkg::*;
#(
  parameter int unsigned N   = TOPN_DEF,
  parameter int unsigned SW  = $clog2(DK_DEF) + 2,
  parameter int unsigned IW  = $clog2(CTX_DEF)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clear,
  input  logic                       in_valid,
  input  logic signed [SW-1:0]       in_score,
  input  logic [IW-1:0]              in_idx,
  output logic signed [N-1:0][SW-1:0] ent_score,
  output logic [N-1:0][IW-1:0]       ent_idx,
  output logic [N-1:0]               ent_valid,
  output logic                       eviction
);

  logic [N-1:0] keep;       // entry stays where it is (valid and >= candidate)
  logic [N-1:0] keep_prev;  // the entry above stays (candidate lands here or below)

  always_comb begin
    for (int j = 0; j < N; j++) keep[j] = ent_valid[j] && ($signed(ent_score[j]) >= in_score);
    keep_prev = {keep[N-2:0], 1'b0};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ent_valid <= '0;
      ent_score <= '0;
      ent_idx   <= '0;
      eviction  <= 1'b0;
    end else if (clear) begin
      ent_valid <= '0;
      eviction  <= 1'b0;
    end else begin
      eviction <= in_valid && ent_valid[N-1];
      if (in_valid) begin
        for (int j = 0; j < N; j++) begin
          if (keep[j]) begin
            // unchanged
          end else if (j == 0 || keep_prev[j]) begin
            ent_score[j] <= in_score;
            ent_idx[j]   <= in_idx;
            ent_valid[j] <= 1'b1;
          end else begin
            ent_score[j] <= ent_score[(j > 0) ? j - 1 : 0];
            ent_idx[j]   <= ent_idx[(j > 0) ? j - 1 : 0];
            ent_valid[j] <= ent_valid[(j > 0) ? j - 1 : 0];
          end
        end
      end
    end
  end

endmodule
