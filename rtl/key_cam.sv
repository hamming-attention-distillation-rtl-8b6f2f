// key_cam: binary key store with associative XNOR matching.
//
// Holds CTX binarized keys of DK bits. A search compares the binarized query
// with every stored key at once: XNOR per bit, a population count of the
// agreeing bits per row, and the +-1 dot product s = 2*agreeing - DK per row
// (the logit A_l = Q.K^T of the method). In the method the comparison is done
// by a capacitive content-addressable memory, whose match lines sum the agreeing
// cells in charge; that analog array is not described in enough detail to
// model, so this block gives the same per-row result with digital XNOR and
// popcount logic.
//
// Interface and timing:
//   * write: wr_en, wr_row, wr_grp, wr_bits write LANES key bits (bits
//     wr_grp*LANES .. +LANES-1) of row wr_row at the clock edge.
//   * search: a one-cycle pulse on search with query stable; scores of all rows
//     are registered at that edge and scores_valid is high the next cycle.
//     Scores hold until the next search.
module key_cam
  import had_pkg::*;
#(
  parameter int unsigned DK    = DK_DEF,
  parameter int unsigned CTX   = CTX_DEF,
  parameter int unsigned LANES = LANES_DEF,
  localparam int unsigned GROUPS = DK / LANES,
  localparam int unsigned SW     = $clog2(DK) + 2,
  localparam int unsigned RW     = $clog2(CTX),
  localparam int unsigned GW     = (GROUPS > 1) ? $clog2(GROUPS) : 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        wr_en,
  input  logic [RW-1:0]               wr_row,
  input  logic [GW-1:0]               wr_grp,
  input  logic [LANES-1:0]            wr_bits,
  input  logic                        search,
  input  logic [DK-1:0]               query,
  output logic signed [CTX-1:0][SW-1:0] scores,
  output logic                        scores_valid
);

  logic [DK-1:0] mem [CTX];

  function automatic logic [SW-1:0] dot_pm1(input logic [DK-1:0] a, input logic [DK-1:0] b);
    logic [DK-1:0]           agree;
    logic [$clog2(DK+1)-1:0] cnt;
    agree = ~(a ^ b);
    cnt   = '0;
    for (int i = 0; i < DK; i++) cnt = cnt + agree[i];
    return SW'(2 * cnt) - SW'(DK);
  endfunction

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_row][wr_grp*LANES +: LANES] <= wr_bits;
  end

  // one match line per stored key
  for (genvar r = 0; r < CTX; r++) begin : g_row
    always_ff @(posedge clk) begin
      if (search) scores[r] <= dot_pm1(mem[r], query);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) scores_valid <= 1'b0;
    else        scores_valid <= search;
  end

endmodule
