// softmax_buffer: the core's 2 KB softmax buffer.
//
// Holds the exponentials e^x (bfloat16) of one attention row, DEPTH = 1024
// entries of 16 bits = 2 KB (the size the paper assumes). It is written one
// entry per cycle as scores arrive and read RD_N = 8 consecutive entries at a
// time (one row of the array) when the eight V values of a cycle are scaled.
// Write is synchronous; read is combinational from the row address, so the
// entries of a row are available in the cycle they are addressed. The row
// organisation and the read port are this design's choices; the paper gives
// only the capacity and the connections of Fig. 6.
module softmax_buffer
  import opal_pkg::*;
#(
  parameter int DEPTH = 1024,
  parameter int RD_N  = 8,
  localparam int AW   = $clog2(DEPTH),
  localparam int ROWS = DEPTH / RD_N,
  localparam int RW   = $clog2(ROWS)
) (
  input  logic            clk,
  input  logic            we,
  input  logic [AW-1:0]   waddr,
  input  bf16_t           wdata,
  input  logic [RW-1:0]   raddr,    // row = entries RD_N*raddr .. RD_N*raddr + RD_N-1
  output bf16_t [RD_N-1:0] rdata
);
  localparam int LW = $clog2(RD_N);

  bf16_t [RD_N-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr[AW-1:LW]][waddr[LW-1:0]] <= wdata;
  end

  assign rdata = mem[raddr];
endmodule
