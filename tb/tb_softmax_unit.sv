// tb_softmax_unit: random base-2 exponents (the first entry 0, as the scale
// stage gives) and keep flags; compares each probability with
// 2^-t / sum(2^-t) in real arithmetic (tolerance 0.002) and checks that done
// rises 2N + 33 cycles after start is taken. Includes the all-dropped case.
module tb_softmax_unit;
  localparam int unsigned N = 8;

  logic clk = 0, rst_n = 0, start = 0;
  logic [N-1:0][31:0] t;
  logic [N-1:0] keep;
  logic [N-1:0][16:0] prob;
  logic busy, done;
  int checks = 0, failures = 0;

  softmax_unit #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    t = '0;
    keep = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int it = 0; it < 60; it++) begin
      real w [N];
      real sum;
      int cyc;
      for (int j = 0; j < N; j++) begin
        t[j] = (j == 0) ? 32'd0 : 32'($urandom % (6 * 65536));
        if (it % 10 == 3 && j > 0) t[j] = 32'($urandom % (40 * 65536));
        keep[j] = (j == 0) ? 1'b1 : 1'($urandom % 4 != 0);
      end
      if (it == 5) keep = '0;
      sum = 0.0;
      for (int j = 0; j < N; j++) begin
        w[j] = keep[j] ? 2.0 ** (-real'(t[j]) / 65536.0) : 0.0;
        sum += w[j];
      end
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
      if (cyc != 2 * N + 33) begin failures++; $display("FAIL latency %0d expected %0d", cyc, 2 * N + 33); end
      for (int j = 0; j < N; j++) begin
        real p, e;
        p = real'(prob[j]) / 65536.0;
        e = (sum > 0.0) ? w[j] / sum : 0.0;
        checks++;
        if (p - e > 0.002 || e - p > 0.002) begin
          failures++;
          if (failures < 10) $display("FAIL it=%0d j=%0d p=%f expected %f", it, j, p, e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
