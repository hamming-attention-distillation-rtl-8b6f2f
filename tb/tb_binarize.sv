// tb_binarize: checks sign binarization of random and corner-case bfloat16
// elements against the sign of their real value (zero and -0 count as +1).
module tb_binarize;
  import had_pkg::*;
  import tb_util_pkg::*;

  localparam int unsigned LANES = 16;

  bf16_t [LANES-1:0] x;
  logic  [LANES-1:0] bits;
  int checks = 0, failures = 0;

  binarize #(.LANES(LANES)) dut (.x, .bits);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 200; it++) begin
      for (int l = 0; l < LANES; l++) begin
        case ($urandom % 6)
          0: x[l] = 16'h0000;
          1: x[l] = 16'h8000;
          2: x[l] = {1'($urandom), 8'h00, 7'($urandom)};  // denormal
          default: x[l] = rand_bf16(1, 254);
        endcase
      end
      #1;
      for (int l = 0; l < LANES; l++) begin
        logic exp_bit;
        exp_bit = (bf16_to_real(x[l]) >= 0.0);
        checks++;
        if (bits[l] !== exp_bit) begin
          failures++;
          if (failures < 10) $display("FAIL x=%h bit=%b expected %b", x[l], bits[l], exp_bit);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
