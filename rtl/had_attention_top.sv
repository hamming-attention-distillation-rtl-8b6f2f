// had_attention_top: one binary-key attention head with top-N sparsity.
//
// Computes, for one query q against the CTX stored keys and values,
//   s_i  = sign(q) . sign(k_i)                    (+-1 dot product, key_cam)
//   S    = indices of the nsel largest s_i        (topn_select)
//   p_i  = softmax over S of s_i / sqrt(DK)       (logit_scale, softmax_unit)
//   out  = sum over S of p_i * v_i                (av_unit, v_buffer)
// Binarized keys live in a content-addressable store that scores all keys in
// one cycle; only the nsel winning value rows are ever read.
//
// Loading (while not busy): q_wr_*, k_wr_* and v_wr_* each write LANES
// bfloat16 elements of lane group *_grp (of row *_row for keys and values) per
// cycle. Query and key elements are sign-binarized on the way in, so only one
// bit per element is stored.
//
// Operation: pulse start with cfg_len (keys in use, 1..CTX), cfg_topn (kept
// logits, 1..N), cfg_mask_en and cfg_scale (log2(e)/sqrt(d_k) in Q16: 2955 for
// d_k = DK = 1024; a head of smaller d_k is run zero-padded to DK, since equal
// padding bits add the same constant to every score); key_mask (bit i = 1 masks key i) is sampled
// at start. The controller then searches the CAM (all keys in one cycle),
// streams the cfg_len scores into the top-N list (one per cycle), runs the
// softmax (2N + 33 cycles) and the value accumulation (DK/LANES * cfg_topn
// cycles), emitting the result as DK/LANES groups on out_valid/out_grp/
// out_data, and pulses done with the last group. In total done rises
//   cfg_len + 2N + (DK/LANES) * cfg_topn + 39
// cycles after the edge that takes start (835 cycles for 256 keys, N = 30,
// DK = 1024, 64 lanes). busy is high from start to done. topn_evict pulses
// each time the full top-N list drops a candidate.
//
// The chain of stages follows the method's block diagram (Binarize, MatMul,
// TopK, Scale, Mask, SoftMax, MatMul). The streaming of scores into the
// top-N list, the number formats, the load ports and all timing are this
// design's own choices; the runtime length and top-N count let one head serve
// contexts shorter than CTX with N scaled to the length, as the method does
// for its long-context runs.
module had_attention_top
  import had_pkg::*;
#(
  parameter int unsigned DK    = DK_DEF,
  parameter int unsigned CTX   = CTX_DEF,
  parameter int unsigned N     = TOPN_DEF,
  parameter int unsigned LANES = LANES_DEF,
  localparam int unsigned GROUPS = DK / LANES,
  localparam int unsigned SW     = $clog2(DK) + 2,
  localparam int unsigned RW     = $clog2(CTX),
  localparam int unsigned GW     = (GROUPS > 1) ? $clog2(GROUPS) : 1,
  localparam int unsigned NW     = $clog2(N + 1),
  localparam int unsigned LW     = $clog2(CTX + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // query load
  input  logic              q_wr_en,
  input  logic [GW-1:0]     q_wr_grp,
  input  bf16_t [LANES-1:0] q_wr_data,
  // key load
  input  logic              k_wr_en,
  input  logic [RW-1:0]     k_wr_row,
  input  logic [GW-1:0]     k_wr_grp,
  input  bf16_t [LANES-1:0] k_wr_data,
  // value load
  input  logic              v_wr_en,
  input  logic [RW-1:0]     v_wr_row,
  input  logic [GW-1:0]     v_wr_grp,
  input  bf16_t [LANES-1:0] v_wr_data,
  // operation
  input  logic              start,
  input  logic [LW-1:0]     cfg_len,
  input  logic [NW-1:0]     cfg_topn,
  input  logic              cfg_mask_en,
  input  logic [17:0]       cfg_scale,   // log2(e)/sqrt(d_k) in Q16, had_pkg::scale_q16(d_k)
  input  logic [CTX-1:0]    key_mask,
  output logic              busy,
  output logic              done,
  output logic              topn_evict,  // a score was pushed out of (or not let into) the full top-N list
  // result
  output logic              out_valid,
  output logic [GW-1:0]     out_grp,
  output bf16_t [LANES-1:0] out_data
);

  typedef enum logic [2:0] {S_IDLE, S_SEARCH, S_WAIT, S_SCAN, S_SETTLE, S_SOFT, S_AV} state_t;

  state_t            state;
  logic [DK-1:0]     qbits;
  logic [LANES-1:0]  q_bin, k_bin;
  logic [LW-1:0]     len_r, scan_i;
  logic [NW-1:0]     topn_r;
  logic              mask_en_r;
  logic [17:0]       scale_r;
  logic [CTX-1:0]    mask_r;

  // ---- binarize on the load paths ----
  binarize #(.LANES(LANES)) u_bin_q (.x(q_wr_data), .bits(q_bin));
  binarize #(.LANES(LANES)) u_bin_k (.x(k_wr_data), .bits(k_bin));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) qbits <= '0;
    else if (q_wr_en) qbits[q_wr_grp*LANES +: LANES] <= q_bin;
  end

  // ---- key CAM ----
  logic signed [CTX-1:0][SW-1:0] scores;
  logic                          scores_valid;

  key_cam #(.DK(DK), .CTX(CTX), .LANES(LANES)) u_cam (
    .clk, .rst_n,
    .wr_en(k_wr_en), .wr_row(k_wr_row), .wr_grp(k_wr_grp), .wr_bits(k_bin),
    .search(state == S_SEARCH), .query(qbits),
    .scores, .scores_valid
  );

  // ---- top-N ----
  logic signed [N-1:0][SW-1:0] ent_score;
  logic [N-1:0][RW-1:0]        ent_idx;
  logic [N-1:0]                ent_valid;

  topn_select #(.N(N), .SW(SW), .IW(RW)) u_topn (
    .clk, .rst_n,
    .clear(state == S_IDLE && start),
    .in_valid(state == S_SCAN),
    .in_score(scores[scan_i[RW-1:0]]),
    .in_idx(scan_i[RW-1:0]),
    .ent_score, .ent_idx, .ent_valid, .eviction(topn_evict)
  );

  // ---- scale and mask ----
  logic [N-1:0]       ent_masked;
  logic [N-1:0]       keep;
  logic [N-1:0][31:0] t;

  always_comb begin
    for (int j = 0; j < N; j++) ent_masked[j] = mask_r[ent_idx[j]];
  end

  logit_scale #(.N(N), .SW(SW)) u_scale (
    .score(ent_score), .valid(ent_valid), .masked(ent_masked),
    .mask_en(mask_en_r), .nsel(topn_r), .scale(scale_r), .keep, .t
  );

  // ---- softmax ----
  logic [N-1:0][16:0] prob;
  logic               sm_busy, sm_done;

  softmax_unit #(.N(N)) u_softmax (
    .clk, .rst_n,
    .start(state == S_SETTLE), .t, .keep,
    .prob, .busy(sm_busy), .done(sm_done)
  );

  // ---- value memory and A.V ----
  logic              v_rd_en;
  logic [RW-1:0]     v_rd_row;
  logic [GW-1:0]     v_rd_grp;
  bf16_t [LANES-1:0] v_rd_data;
  logic              av_busy, av_done;

  v_buffer #(.DK(DK), .CTX(CTX), .LANES(LANES)) u_vbuf (
    .clk,
    .wr_en(v_wr_en), .wr_row(v_wr_row), .wr_grp(v_wr_grp), .wr_data(v_wr_data),
    .rd_en(v_rd_en), .rd_row(v_rd_row), .rd_grp(v_rd_grp), .rd_data(v_rd_data)
  );

  av_unit #(.DK(DK), .CTX(CTX), .N(N), .LANES(LANES)) u_av (
    .clk, .rst_n,
    .start(state == S_SOFT && sm_done), .nsel(topn_r), .prob, .idx(ent_idx),
    .rd_en(v_rd_en), .rd_row(v_rd_row), .rd_grp(v_rd_grp), .rd_data(v_rd_data),
    .out_valid, .out_grp, .out_data, .busy(av_busy), .done(av_done)
  );

  // ---- controller ----
  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      len_r     <= '0;
      scan_i    <= '0;
      topn_r    <= '0;
      mask_en_r <= 1'b0;
      scale_r   <= '0;
      mask_r    <= '0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          state     <= S_SEARCH;
          len_r     <= cfg_len;
          topn_r    <= cfg_topn;
          mask_en_r <= cfg_mask_en;
          scale_r   <= cfg_scale;
          mask_r    <= key_mask;
        end
        S_SEARCH: state <= S_WAIT;
        S_WAIT: if (scores_valid) begin
          state  <= S_SCAN;
          scan_i <= '0;
        end
        S_SCAN: begin
          if (scan_i == len_r - 1'b1) state <= S_SETTLE;
          scan_i <= scan_i + 1'b1;
        end
        S_SETTLE: state <= S_SOFT;
        S_SOFT:   if (sm_done) state <= S_AV;
        S_AV: if (av_done) begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---- rules of use ----
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> state == S_IDLE);
  a_cfg_range: assert property (@(posedge clk) disable iff (!rst_n)
    (start && state == S_IDLE) |-> (cfg_len >= 1 && int'(cfg_len) <= CTX &&
                                    cfg_topn >= 1 && int'(cfg_topn) <= N));
  a_no_load_busy: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> !(q_wr_en || k_wr_en || v_wr_en));
  a_one_stage: assert property (@(posedge clk) disable iff (!rst_n)
    !(sm_busy && av_busy));

endmodule
