// tb_key_cam: writes random binary keys in lane groups, searches with random
// queries and compares every row's score with a bit-by-bit +-1 dot product.
// Also checks that scores_valid follows search by exactly one cycle.
module tb_key_cam;
  import had_pkg::*;

  localparam int unsigned DK = 64, CTX = 16, LANES = 16;
  localparam int unsigned GROUPS = DK / LANES, SW = $clog2(DK) + 2;

  logic clk = 0, rst_n = 0;
  logic wr_en = 0, search = 0;
  logic [$clog2(CTX)-1:0] wr_row = '0;
  logic [$clog2(GROUPS)-1:0] wr_grp = '0;
  logic [LANES-1:0] wr_bits = '0;
  logic [DK-1:0] query = '0;
  logic signed [CTX-1:0][SW-1:0] scores;
  logic scores_valid;
  logic [DK-1:0] keys [CTX];
  int checks = 0, failures = 0;

  key_cam #(.DK(DK), .CTX(CTX), .LANES(LANES)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int r = 0; r < CTX; r++) begin
      for (int g = 0; g < GROUPS; g++) keys[r][g*LANES +: LANES] = LANES'($urandom);
      if (r == 3) keys[r] = '1;
      if (r == 4) keys[r] = '0;
    end
    for (int r = 0; r < CTX; r++)
      for (int g = 0; g < GROUPS; g++) begin
        @(negedge clk);
        wr_en = 1; wr_row = 4'(r); wr_grp = 2'(g); wr_bits = keys[r][g*LANES +: LANES];
      end
    @(negedge clk) wr_en = 0;
    for (int it = 0; it < 20; it++) begin
      for (int g = 0; g < GROUPS; g++) query[g*LANES +: LANES] = LANES'($urandom);
      if (it == 0) query = '1;
      @(negedge clk) search = 1;
      @(negedge clk) search = 0;
      checks++;
      if (!scores_valid) begin failures++; $display("FAIL scores_valid not one cycle after search"); end
      for (int r = 0; r < CTX; r++) begin
        int s;
        s = 0;
        for (int b = 0; b < DK; b++) s += (query[b] == keys[r][b]) ? 1 : -1;
        checks++;
        if (int'($signed(scores[r])) != s) begin
          failures++;
          if (failures < 10) $display("FAIL it=%0d row=%0d score=%0d expected %0d", it, r, scores[r], s);
        end
      end
      @(negedge clk);
      checks++;
      if (scores_valid) begin failures++; $display("FAIL scores_valid held"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
