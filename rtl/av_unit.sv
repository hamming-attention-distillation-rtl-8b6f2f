// av_unit: sparse attention-probability x V accumulation.
//
// Output = A V, where A has only the nsel kept entries of the row: the unit
// reads just the value rows named by the top-N key indices and accumulates
// them, weighted by their probabilities, in LANES parallel lanes. For each
// lane group g (DK/LANES groups) it walks the kept entries j = 0..nsel-1: it
// reads V[idx_j][g] from the value buffer, multiplies each bfloat16 element by
// p_j (Q16) and adds the product to an fp32 accumulator per lane. After the
// last entry of a group the accumulators are rounded to bfloat16 and the group
// is emitted on out_*. One value word is consumed per cycle, so a row takes
// DK/LANES * nsel cycles; done rises DK/LANES * nsel + 1 cycles after the
// edge that takes start. The method names this sparse
// accumulation and keeps V in full precision; the lane count, the fp32
// accumulator and the streaming order are this design's own choices.
//
// Interface: start (pulse; prob, idx and nsel held until done), V read port
// (rd_en/rd_row/rd_grp, data rd_data one cycle later), out_valid/out_grp/
// out_data for each finished group, done pulse with the last group.
// nsel must be at least 1.
module av_unit
  import had_pkg::*;
#(
  parameter int unsigned DK    = DK_DEF,
  parameter int unsigned CTX   = CTX_DEF,
  parameter int unsigned N     = TOPN_DEF,
  parameter int unsigned LANES = LANES_DEF,
  localparam int unsigned GROUPS = DK / LANES,
  localparam int unsigned RW     = $clog2(CTX),
  localparam int unsigned GW     = (GROUPS > 1) ? $clog2(GROUPS) : 1,
  localparam int unsigned NW     = $clog2(N + 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic [NW-1:0]           nsel,
  input  logic [N-1:0][16:0]      prob,
  input  logic [N-1:0][RW-1:0]    idx,
  output logic                    rd_en,
  output logic [RW-1:0]           rd_row,
  output logic [GW-1:0]           rd_grp,
  input  bf16_t [LANES-1:0]       rd_data,
  output logic                    out_valid,
  output logic [GW-1:0]           out_grp,
  output bf16_t [LANES-1:0]       out_data,
  output logic                    busy,
  output logic                    done
);

  // issue stage: walks (g, j)
  logic            run;
  logic [GW-1:0]   g;
  logic [NW-1:0]   j;
  // data stage: what the word arriving this cycle belongs to
  logic            d_vld, d_first, d_last, d_final;
  logic [16:0]     d_p;
  logic [GW-1:0]   d_grp;
  fp32_t [LANES-1:0] acc;

  assign busy   = run || d_vld;
  assign rd_en  = run;
  assign rd_row = idx[j];
  assign rd_grp = g;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run     <= 1'b0;
      g       <= '0;
      j       <= '0;
      d_vld   <= 1'b0;
      d_first <= 1'b0;
      d_last  <= 1'b0;
      d_final <= 1'b0;
      d_p     <= '0;
      d_grp   <= '0;
    end else begin
      d_vld <= run;
      if (run) begin
        d_first <= (j == '0);
        d_last  <= (j == nsel - 1'b1);
        d_final <= (j == nsel - 1'b1) && (int'(g) == GROUPS - 1);
        d_p     <= prob[j];
        d_grp   <= g;
        if (j == nsel - 1'b1) begin
          j <= '0;
          if (int'(g) == GROUPS - 1) run <= 1'b0;
          else                       g   <= g + 1'b1;
        end else begin
          j <= j + 1'b1;
        end
      end else if (start) begin
        run <= 1'b1;
        g   <= '0;
        j   <= '0;
      end
    end
  end

  // accumulate lanes; emit a group after its last entry
  fp32_t [LANES-1:0] acc_nxt;

  always_comb begin
    for (int l = 0; l < LANES; l++)
      acc_nxt[l] = fp32_add(d_first ? fp32_t'(0) : acc[l], prod_to_fp32(rd_data[l], d_p));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      out_valid <= 1'b0;
      out_grp   <= '0;
      out_data  <= '0;
      done      <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      done      <= 1'b0;
      if (d_vld) begin
        acc <= acc_nxt;
        if (d_last)
          for (int l = 0; l < LANES; l++) out_data[l] <= fp32_to_bf16(acc_nxt[l]);
        if (d_last) begin
          out_valid <= 1'b1;
          out_grp   <= d_grp;
        end
        done <= d_final;
      end
    end
  end

endmodule
