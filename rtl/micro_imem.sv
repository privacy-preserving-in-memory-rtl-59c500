// micro_imem: the micro-instruction memory (uIM) of a core controller, 1024 x 128 bit
// (16 KB, the paper's size).
//
// Written 32 bits at a time (one chunk per uIM-write C-Inst, chunk c = bits
// [32c+31:32c]); read one 128-bit micro-instruction per cycle with a registered
// (synchronous) read: rdata holds the word addressed by raddr in the cycle after
// re is high. The chunked write is this design's choice; the paper says only that a
// C-Inst writes a micro-instruction into all core controllers at once. Not reset.
module micro_imem
  import ppimce_pkg::*;
#(
  parameter int unsigned DEPTH = 1 << UIM_AW,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic            clk,
  input  logic            we,
  input  logic [AW-1:0]   waddr,
  input  logic [1:0]      wchunk,
  input  logic [31:0]     wdata,
  input  logic            re,
  input  logic [AW-1:0]   raddr,
  output logic [UI_W-1:0] rdata
);

  logic [UI_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr][32*wchunk +: 32] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
