// lut_fabric: the table-lookup unit of an IMC-PE.
//
// Four LUTs, one per 32-bit lane (one AES column each). Each LUT holds three 256 x 8
// tables: T0 (the paper's RA/CAM array) and T1, T2 (6T-SRAM arrays), which makes the
// paper's count of 4 RA/CAM and 8 SRAM arrays per fabric. All four LUTs hold the same
// tables; a table write (from the LUT-write C-Inst) goes to all four copies.
//
// mode 0 (XOR-tree mode): for lane bytes x0..x3 the output byte r is
//     T1[x_r] ^ T2[x_(r+1)] ^ T0[x_(r+2)] ^ T0[x_(r+3)]     (indices mod 4)
//   With T0 = S-box, T1 = 2*S-box, T2 = 3*S-box over GF(2^8) this is AES SubBytes
//   followed by MixColumns of one column, i.e. table-based GF(2^8) multiplication
//   with an XOR tree, as the paper describes.
// mode 1 (direct mode): output byte r is T0[x_r]. With T0 = S-box this is SubBytes
//   alone (last AES round); with T0[{a,b}] = a*b it is the 4-bit x 4-bit integer
//   multiplication the paper uses as the Karatsuba base case.
// The paper gives the table sizes, the XOR networks and the two uses; the exact
// formula above and the meaning of the 1-bit "memory mode switch" as the choice
// between the two read paths are this design's interpretation.
//
// Reads are combinational (dout follows din and mode); table writes happen at the
// clock edge. The tables are not reset.
module lut_fabric
  import ppimce_pkg::*;
(
  input  logic              clk,
  input  logic [LINE_W-1:0] din,
  input  logic              mode,
  output logic [LINE_W-1:0] dout,
  // table write
  input  logic              we,
  input  logic [1:0]        wtbl,
  input  logic [7:0]        widx,
  input  logic [7:0]        wdata
);

  // t[lut][table][index]
  logic [7:0] t [N_ARR][3][256];

  always_ff @(posedge clk) begin
    if (we && wtbl != 2'd3)
      for (int l = 0; l < N_ARR; l++) t[l][wtbl][widx] <= wdata;
  end

  for (genvar l = 0; l < N_ARR; l++) begin : g_lut
    for (genvar r = 0; r < 4; r++) begin : g_byte
      logic [7:0] x0, x1, x2, x3;
      assign x0 = din[32*l + 8*r +: 8];
      assign x1 = din[32*l + 8*((r+1)%4) +: 8];
      assign x2 = din[32*l + 8*((r+2)%4) +: 8];
      assign x3 = din[32*l + 8*((r+3)%4) +: 8];
      assign dout[32*l + 8*r +: 8] = mode ? t[l][0][x0]
                                          : (t[l][1][x0] ^ t[l][2][x1] ^ t[l][0][x2] ^ t[l][0][x3]);
    end
  end

endmodule
