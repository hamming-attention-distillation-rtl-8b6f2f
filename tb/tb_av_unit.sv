// tb_av_unit: random probabilities, key indices and bfloat16 value rows;
// checks every output element against sum_j p_j * V[idx_j] computed in real
// arithmetic (tolerance: 1/128 relative plus 1/1000 of the largest value
// magnitude), the group order of the outputs, and that done rises
// DK/LANES * nsel + 1 cycles after start is taken. The value memory is modelled
// here with the same one-cycle read latency as the value buffer.
module tb_av_unit;
  import had_pkg::*;
  import tb_util_pkg::*;

  localparam int unsigned DK = 64, CTX = 16, N = 4, LANES = 16;
  localparam int unsigned GROUPS = DK / LANES, NW = $clog2(N + 1);

  logic clk = 0, rst_n = 0, start = 0;
  logic [NW-1:0] nsel = '0;
  logic [N-1:0][16:0] prob = '0;
  logic [N-1:0][3:0] idx = '0;
  logic rd_en;
  logic [3:0] rd_row;
  logic [1:0] rd_grp;
  bf16_t [LANES-1:0] rd_data;
  logic out_valid, busy, done;
  logic [1:0] out_grp;
  bf16_t [LANES-1:0] out_data;
  bf16_t vmem [CTX][DK];
  real expv [DK];
  real vmax;
  int checks = 0, failures = 0, next_grp = 0;

  av_unit #(.DK(DK), .CTX(CTX), .N(N), .LANES(LANES)) dut (.*);

  always #5 clk = ~clk;

  always_ff @(posedge clk)
    if (rd_en) for (int l = 0; l < LANES; l++) rd_data[l] <= vmem[rd_row][int'(rd_grp) * LANES + l];

  always @(posedge clk) begin
    #1;
    if (out_valid) begin
      checks++;
      if (int'(out_grp) != next_grp) begin failures++; $display("FAIL group order %0d", out_grp); end
      for (int l = 0; l < LANES; l++) begin
        real got, e, tol;
        got = bf16_to_real(out_data[l]);
        e = expv[int'(out_grp) * LANES + l];
        tol = (e < 0 ? -e : e) / 128.0 + vmax / 1000.0;
        checks++;
        if (got - e > tol || e - got > tol) begin
          failures++;
          if (failures < 10) $display("FAIL grp=%0d lane=%0d got=%g expected %g", out_grp, l, got, e);
        end
      end
      next_grp++;
    end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int it = 0; it < 30; it++) begin
      int n, cyc, rest;
      vmax = 0.0;
      for (int r = 0; r < CTX; r++)
        for (int c = 0; c < DK; c++) begin
          vmem[r][c] = rand_bf16(120, 134);
          if (c % 13 == 5) vmem[r][c] = 16'h0000;
          if (bf16_to_real(vmem[r][c]) > vmax) vmax = bf16_to_real(vmem[r][c]);
          if (-bf16_to_real(vmem[r][c]) > vmax) vmax = -bf16_to_real(vmem[r][c]);
        end
      n = 1 + int'($urandom % N);
      nsel = NW'(n);
      rest = 65536;
      for (int j = 0; j < N; j++) begin
        int p;
        p = (j == n - 1) ? rest : int'($urandom % 32'(rest + 1));
        if (j >= n) p = int'($urandom % 65536);  // beyond nsel: must be ignored
        else rest -= p;
        prob[j] = 17'(p);
        idx[j] = 4'($urandom);
      end
      for (int c = 0; c < DK; c++) begin
        expv[c] = 0.0;
        for (int j = 0; j < n; j++)
          expv[c] += real'(prob[j]) / 65536.0 * bf16_to_real(vmem[idx[j]][c]);
      end
      next_grp = 0;
      @(negedge clk) start = 1;
      @(posedge clk);
      cyc = 0;
      @(negedge clk) start = 0;
      while (!done) begin
        @(posedge clk);
        cyc++;
        #1;
      end
      checks++;
      if (cyc != GROUPS * n + 1) begin failures++; $display("FAIL latency %0d expected %0d", cyc, GROUPS * n + 1); end
      @(negedge clk);
      checks++;
      if (next_grp != GROUPS) begin failures++; $display("FAIL %0d groups emitted", next_grp); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
