// tb_v_buffer: fills the value memory with random words, reads them back in
// random order and checks the data one cycle after each read request.
module tb_v_buffer;
  import had_pkg::*;

  localparam int unsigned DK = 64, CTX = 16, LANES = 16, GROUPS = DK / LANES;

  logic clk = 0;
  logic wr_en = 0, rd_en = 0;
  logic [3:0] wr_row = '0, rd_row = '0;
  logic [1:0] wr_grp = '0, rd_grp = '0;
  bf16_t [LANES-1:0] wr_data = '0, rd_data;
  logic [LANES*16-1:0] model [CTX][GROUPS];
  int checks = 0, failures = 0;

  v_buffer #(.DK(DK), .CTX(CTX), .LANES(LANES)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < CTX; r++)
      for (int g = 0; g < GROUPS; g++) begin
        for (int l = 0; l < LANES; l++) model[r][g][l*16 +: 16] = 16'($urandom);
        @(negedge clk);
        wr_en = 1; wr_row = 4'(r); wr_grp = 2'(g); wr_data = model[r][g];
      end
    @(negedge clk) wr_en = 0;
    for (int it = 0; it < 200; it++) begin
      int r, g;
      r = int'($urandom % CTX);
      g = int'($urandom % GROUPS);
      rd_en = 1; rd_row = 4'(r); rd_grp = 2'(g);
      @(negedge clk);
      rd_en = 0;
      checks++;
      if (rd_data != model[r][g]) begin
        failures++;
        if (failures < 10) $display("FAIL row=%0d grp=%0d", r, g);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
