// cem_array: one compute-enabled memory (CEM) array, 256 words of 32 bits (1 KB).
//
// A CEM array is an SRAM whose sense amplifiers can combine two words: the rows ra and
// rb are activated together and the array returns A AND B, A OR B, A XOR B, NOT A, or
// A + B (with an optional carry-in of 1, used for subtraction after a NOT of the
// subtrahend). Following the paper, the adder is a full-width adder (the paper uses
// carry-lookahead; here it is written as '+' and left to synthesis).
//
// Interface and timing: op_res is combinational from ra, rb and fn in the same cycle
// (the array's read and compute). The write port (we, wa, wd) writes at the clock
// edge; the write driver outside the array selects wd. A third read port (ha/hq) lets
// the host side read a row without disturbing the compute ports. The memory is not
// reset: rows must be written before they are read.
module cem_array
  import ppimce_pkg::*;
#(
  parameter int unsigned ROWS_P = ROWS,
  parameter int unsigned W      = WORD_W,
  localparam int unsigned AW    = $clog2(ROWS_P)
) (
  input  logic          clk,
  // compute ports
  input  logic [AW-1:0] ra,
  input  logic [AW-1:0] rb,
  input  cem_fn_e       fn,
  output logic [W-1:0]  op_res,
  // write port (write driver)
  input  logic          we,
  input  logic [AW-1:0] wa,
  input  logic [W-1:0]  wd,
  // host read port
  input  logic [AW-1:0] ha,
  output logic [W-1:0]  hq
);

  logic [W-1:0] mem [ROWS_P];
  logic [W-1:0] a, b;

  assign a  = mem[ra];
  assign b  = mem[rb];
  assign hq = mem[ha];

  always_comb begin
    unique case (fn)
      CEM_READ: op_res = a;
      CEM_AND:  op_res = a & b;
      CEM_OR:   op_res = a | b;
      CEM_XOR:  op_res = a ^ b;
      CEM_NOT:  op_res = ~a;
      CEM_ADD:  op_res = a + b;
      CEM_ADDC: op_res = a + b + W'(1);
      CEM_RDB:  op_res = b;
      default:  op_res = a;
    endcase
  end

  always_ff @(posedge clk) begin
    if (we) mem[wa] <= wd;
  end

endmodule
