// tb_topn_select: streams random scores (narrow range, so ties are common)
// with ascending indices into the top-N list and compares the list with a
// stable sort (larger score first, lower index first on ties). Also checks the
// eviction count, max(0, M - N) for M candidates, and that clear empties it.
module tb_topn_select;
  localparam int unsigned N = 5, SW = 12, IW = 6;

  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0;
  logic signed [SW-1:0] in_score = '0;
  logic [IW-1:0] in_idx = '0;
  logic signed [N-1:0][SW-1:0] ent_score;
  logic [N-1:0][IW-1:0] ent_idx;
  logic [N-1:0] ent_valid;
  logic eviction;
  int checks = 0, failures = 0, evictions = 0;
  int sc [64];

  topn_select #(.N(N), .SW(SW), .IW(IW)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) if (eviction) evictions++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int it = 0; it < 40; it++) begin
      int m;
      int ref_idx [$];
      ref_idx.delete();
      m = 1 + int'($urandom % 30);
      if (it == 0) m = 3;
      @(negedge clk) clear = 1;
      @(negedge clk) clear = 0;
      evictions = 0;
      checks++;
      if (ent_valid != '0) begin failures++; $display("FAIL clear"); end
      for (int i = 0; i < m; i++) begin
        sc[i] = int'($urandom % 9) - 4;
        if (it == 1) sc[i] = -2047;
        in_valid = 1; in_score = SW'(sc[i]); in_idx = IW'(i);
        @(negedge clk);
      end
      in_valid = 0;
      @(negedge clk);
      // reference: selection by repeated max with lowest index first
      begin
        bit used [64];
        for (int i = 0; i < 64; i++) used[i] = 0;
        for (int k = 0; k < N && k < m; k++) begin
          int best;
          best = -1;
          for (int i = 0; i < m; i++)
            if (!used[i] && (best < 0 || sc[i] > sc[best])) best = i;
          used[best] = 1;
          ref_idx.push_back(best);
        end
      end
      for (int k = 0; k < N; k++) begin
        checks++;
        if (k < ref_idx.size()) begin
          int got;
          got = int'($signed(ent_score[k]));
          if (!ent_valid[k] || int'(ent_idx[k]) != ref_idx[k] || got != sc[ref_idx[k]]) begin
            failures++;
            if (failures < 10) $display("FAIL it=%0d k=%0d idx=%0d score=%0d expected idx=%0d score=%0d",
                                        it, k, ent_idx[k], got, ref_idx[k], sc[ref_idx[k]]);
          end
        end else if (ent_valid[k]) begin
          failures++;
          $display("FAIL it=%0d k=%0d should be empty", it, k);
        end
      end
      checks++;
      if (evictions != ((m > N) ? m - N : 0)) begin
        failures++;
        $display("FAIL it=%0d evictions=%0d m=%0d", it, evictions, m);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
