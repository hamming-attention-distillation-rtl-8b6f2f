// tb_logit_scale: random sorted logit lists with random valid, mask and count
// settings; checks the keep flags and the base-2 exponents against
// (s_max - s) * round(log2(e) / sqrt(d_k) * 2^16), d_k = 1024 or 64, computed
// here in real arithmetic, with s_max the first surviving entry.
module tb_logit_scale;
  import had_pkg::*;

  localparam int unsigned N = 8, SW = 12, NW = $clog2(N + 1);

  logic signed [N-1:0][SW-1:0] score;
  logic [N-1:0] valid, masked, keep;
  logic mask_en;
  logic [NW-1:0] nsel;
  logic [17:0] scale;
  logic [N-1:0][31:0] t;
  int checks = 0, failures = 0;

  logit_scale #(.N(N), .SW(SW)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 300; it++) begin
      real dk;
      int s, nv, smax;
      bit found;
      dk = (it % 2 == 0) ? 1024.0 : 64.0;
      scale = 18'($floor(1.4426950408889634 / $sqrt(dk) * 65536.0 + 0.5));
      s = 1024 - int'($urandom % 64);
      nv = int'($urandom % (N + 1));
      for (int j = 0; j < N; j++) begin
        score[j] = SW'(s);
        s = s - 2 * int'($urandom % 20);
        valid[j] = (j < nv);
        masked[j] = 1'($urandom % 3 == 0);
      end
      mask_en = 1'($urandom);
      nsel = NW'(1 + $urandom % N);
      #1;
      found = 0;
      smax = 0;
      for (int j = 0; j < N; j++) begin
        bit k;
        k = valid[j] && (j < int'(nsel)) && !(mask_en && masked[j]);
        if (k && !found) begin found = 1; smax = int'($signed(score[j])); end
        checks++;
        if (keep[j] != k) begin
          failures++;
          if (failures < 10) $display("FAIL it=%0d j=%0d keep=%b expected %b", it, j, keep[j], k);
        end
      end
      for (int j = 0; j < N; j++) begin
        longint et;
        et = keep[j] ? longint'(smax - int'($signed(score[j]))) * scale : 0;
        checks++;
        if (longint'(t[j]) != et) begin
          failures++;
          if (failures < 10) $display("FAIL it=%0d j=%0d t=%0d expected %0d", it, j, t[j], et);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
