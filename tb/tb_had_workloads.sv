// tb_had_workloads: runs one attention row of each evaluated model setting on
// the head at its default size (DK = 1024, CTX = 256, N = 30):
//   * the 1024-dim, 256-key, top-30 head used for the area/power comparison,
//   * BERT-base on GLUE (256 tokens, top 30, head dim 64),
//   * DeiT on ImageNet (197 tokens, top 30, head dim 64),
//   * T5-base on QuALITY at 128 tokens (top 15) and 256 tokens (top 30).
// Heads of dim 64 are zero-padded to 1024 elements in Q, K and V and run with
// cfg_scale = log2(e)/sqrt(64). The reference works on the unpadded 64-dim
// vectors, so the test also shows that the padding leaves the result
// unchanged. Tolerance and cycle-count checks as in the end-to-end test.
module tb_had_workloads;
  import had_pkg::*;
  import tb_util_pkg::*;

  localparam int unsigned DK = DK_DEF, CTX = CTX_DEF, N = TOPN_DEF, LANES = LANES_DEF;
  localparam int unsigned GROUPS = DK / LANES;
  localparam int unsigned GW = $clog2(GROUPS), RW = $clog2(CTX);
  localparam int unsigned NW = $clog2(N + 1), LW = $clog2(CTX + 1);

  logic clk = 0, rst_n = 0;
  logic q_wr_en = 0, k_wr_en = 0, v_wr_en = 0;
  logic [GW-1:0] q_wr_grp = '0, k_wr_grp = '0, v_wr_grp = '0;
  logic [RW-1:0] k_wr_row = '0, v_wr_row = '0;
  bf16_t [LANES-1:0] q_wr_data = '0, k_wr_data = '0, v_wr_data = '0;
  logic start = 0, cfg_mask_en = 0;
  logic [17:0] cfg_scale = '0;
  logic [LW-1:0] cfg_len = '0;
  logic [NW-1:0] cfg_topn = '0;
  logic [CTX-1:0] key_mask = '0;
  logic busy, done, topn_evict, out_valid;
  logic [GW-1:0] out_grp;
  bf16_t [LANES-1:0] out_data;

  had_attention_top dut (.*);

  bf16_t qv [DK];
  bf16_t kv [CTX][DK];
  bf16_t vv [CTX][DK];
  real   got [DK];
  int    groups_seen;
  int    checks = 0, failures = 0;
  real   vmax = 0.0;

  always #5 clk = ~clk;

  always @(posedge clk) begin
    #1;
    if (out_valid) begin
      for (int l = 0; l < LANES; l++) got[int'(out_grp) * LANES + l] = bf16_to_real(out_data[l]);
      groups_seen++;
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int dk_used = DK;

  task automatic load_query();
    for (int c = 0; c < DK; c++) qv[c] = (c < dk_used) ? rand_bf16(110, 135) : 16'h0000;
    for (int g = 0; g < GROUPS; g++) begin
      @(negedge clk);
      q_wr_en = 1;
      q_wr_grp = GW'(g);
      for (int l = 0; l < LANES; l++) q_wr_data[l] = qv[g * LANES + l];
    end
    @(negedge clk) q_wr_en = 0;
  endtask

  task automatic load_keys_values();
    for (int r = 0; r < CTX; r++) begin
      int agree_pct;
      agree_pct = 25 + int'($urandom % 51);  // 25..75 % of signs agree with the query
      for (int c = 0; c < DK; c++) begin
        logic same;
        same = (int'($urandom % 100) < agree_pct);
        kv[r][c] = rand_bf16(110, 135);
        kv[r][c][15] = same ? qv[c][15] : ~qv[c][15];
        vv[r][c] = rand_bf16(118, 132);
        if (c >= dk_used) begin kv[r][c] = 16'h0000; vv[r][c] = 16'h0000; end
        if (bf16_to_real(vv[r][c]) > vmax) vmax = bf16_to_real(vv[r][c]);
        if (-bf16_to_real(vv[r][c]) > vmax) vmax = -bf16_to_real(vv[r][c]);
      end
    end
    for (int r = 0; r < CTX; r++)
      for (int g = 0; g < GROUPS; g++) begin
        @(negedge clk);
        k_wr_en = 1; v_wr_en = 1;
        k_wr_row = RW'(r); v_wr_row = RW'(r);
        k_wr_grp = GW'(g); v_wr_grp = GW'(g);
        for (int l = 0; l < LANES; l++) begin
          k_wr_data[l] = kv[r][g * LANES + l];
          v_wr_data[l] = vv[r][g * LANES + l];
        end
      end
    @(negedge clk) begin k_wr_en = 0; v_wr_en = 0; end
  endtask

  task automatic run_query(input int len, input int topn, input bit mask_en);
    int   sc [CTX];
    int   sel [$];
    bit   used [CTX];
    int   kept [$];
    real  w [$];
    real  sum, e, tol;
    int   cyc, expect_cyc, smax;

    // reference
    for (int r = 0; r < len; r++) begin
      sc[r] = 0;
      for (int c = 0; c < dk_used; c++)
        sc[r] += ((bf16_to_real(qv[c]) >= 0.0) == (bf16_to_real(kv[r][c]) >= 0.0)) ? 1 : -1;
      used[r] = 0;
    end
    for (int k = 0; k < N && k < len; k++) begin
      int best;
      best = -1;
      for (int r = 0; r < len; r++) if (!used[r] && (best < 0 || sc[r] > sc[best])) best = r;
      used[best] = 1;
      sel.push_back(best);
    end
    for (int k = 0; k < sel.size() && k < topn; k++) begin
      kept.push_back(sel[k]);
    end
    smax = (kept.size() > 0) ? sc[kept[0]] : 0;
    sum = 0.0;
    foreach (kept[k]) begin
      w.push_back($exp(real'(sc[kept[k]] - smax) / $sqrt(real'(dk_used))));
      sum += w[k];
    end

    // run
    groups_seen = 0;
    @(negedge clk);
    start = 1; cfg_scale = 18'(scale_q16(dk_used)); cfg_len = LW'(len); cfg_topn = NW'(topn); cfg_mask_en = mask_en;
    @(posedge clk);
    cyc = 0;
    @(negedge clk) start = 0;
    while (!done) begin
      @(posedge clk);
      cyc++;
      #2;
    end
    @(negedge clk);
    expect_cyc = len + 2 * int'(N) + int'(GROUPS) * topn + 39;
    checks++;
    if (cyc != expect_cyc) begin failures++; $display("FAIL latency %0d expected %0d", cyc, expect_cyc); end
    checks++;
    if (groups_seen != int'(GROUPS)) begin failures++; $display("FAIL %0d groups", groups_seen); end
    for (int c = 0; c < DK; c++) begin
      e = 0.0;
      foreach (kept[k]) e += w[k] / sum * bf16_to_real(vv[kept[k]][c]);
      tol = (e < 0 ? -e : e) / 64.0 + vmax / 500.0;
      checks++;
      if (got[c] - e > tol || e - got[c] > tol) begin
        failures++;
        if (failures < 10) $display("FAIL len=%0d topn=%0d col=%0d got=%g expected %g", len, topn, c, got[c], e);
      end
    end
    $display("workload d_k=%0d len=%0d topn=%0d: %0d kept, %0d cycles", dk_used, len, topn, kept.size(), cyc);
  endtask

  task automatic workload(input int dk, input int len, input int topn);
    dk_used = dk;
    load_query();
    load_keys_values();
    run_query(len, topn, 0);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    workload(1024, 256, 30);  // area/power comparison head
    workload(64, 256, 30);    // BERT-base, GLUE
    workload(64, 197, 30);    // DeiT-B / DeiT-T, ImageNet
    workload(64, 128, 15);    // T5-base, QuALITY 128 tokens
    workload(64, 256, 30);    // T5-base, QuALITY 256 tokens
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
