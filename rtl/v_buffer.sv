// v_buffer: value-matrix memory of the attention head.
//
// Holds V, CTX rows of DK bfloat16 elements, as CTX*DK/LANES words of LANES
// elements. One write port and one synchronous read port, both addressed by
// (row, lane group): read data appear the cycle after rd_en. The method gives
// V's shape for the evaluated head (256 x 1024) and keeps V at full precision;
// the word organisation and the port timing are this design's own choices.
module v_buffer
  import had_pkg::*;
#(
  parameter int unsigned DK    = DK_DEF,
  parameter int unsigned CTX   = CTX_DEF,
  parameter int unsigned LANES = LANES_DEF,
  localparam int unsigned GROUPS = DK / LANES,
  localparam int unsigned RW     = $clog2(CTX),
  localparam int unsigned GW     = (GROUPS > 1) ? $clog2(GROUPS) : 1
) (
  input  logic                    clk,
  input  logic                    wr_en,
  input  logic [RW-1:0]           wr_row,
  input  logic [GW-1:0]           wr_grp,
  input  bf16_t [LANES-1:0]       wr_data,
  input  logic                    rd_en,
  input  logic [RW-1:0]           rd_row,
  input  logic [GW-1:0]           rd_grp,
  output bf16_t [LANES-1:0]       rd_data
);

  logic [LANES*16-1:0] mem [CTX*GROUPS];

  function automatic int unsigned addr(input logic [RW-1:0] row, input logic [GW-1:0] grp);
    return int'(row) * GROUPS + int'(grp);
  endfunction

  always_ff @(posedge clk) begin
    if (wr_en) mem[addr(wr_row, wr_grp)] <= wr_data;
    if (rd_en) rd_data <= mem[addr(rd_row, rd_grp)];
  end

endmodule
