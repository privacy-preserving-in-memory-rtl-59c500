// shifter: the permutation / shift unit of an IMC-PE.
//
// It works on the 128-bit line formed by the four CEM arrays' 32-bit output words
// (lane i = array i). Seen as an AES state, lane c is column c and byte r of a lane is
// row r. The paper names its jobs: byte permutation (AES ShiftRows and InvShiftRows),
// rotations, shifts and bit extensions (the MSB extension that turns the sign of a
// difference into an all-ones/all-zeros select mask during modular reduction, and the
// LSB extension of a label used by Half-Gate). The 5-bit function code layout and the
// power-of-two shift amounts are this design's choice (see ppimce_pkg); larger
// shifts are built from several passes.
//
// Purely combinational: dout follows din, cls and arg in the same cycle. The IMC-PE
// registers the result in the shifter output buffer.
module shifter
  import ppimce_pkg::*;
(
  input  logic [LINE_W-1:0] din,
  input  logic [1:0]        cls,
  input  logic [2:0]        arg,
  output logic [LINE_W-1:0] dout
);

  function automatic logic [7:0] get_byte(logic [LINE_W-1:0] s, int c, int r);
    return s[32*c + 8*r +: 8];
  endfunction

  logic [7:0]  amt;
  logic [63:0] rot;
  assign amt = 8'd1 << arg;

  always_comb begin
    dout = din;
    rot  = '0;
    unique case (cls)
      SH_MISC: begin
        unique case (arg)
          SH_SROWS:
            for (int c = 0; c < 4; c++)
              for (int r = 0; r < 4; r++)
                dout[32*c + 8*r +: 8] = get_byte(din, (c + r) % 4, r);
          SH_ISROWS:
            for (int c = 0; c < 4; c++)
              for (int r = 0; r < 4; r++)
                dout[32*c + 8*r +: 8] = get_byte(din, (c + 4 - r) % 4, r);
          SH_MSBX:
            for (int l = 0; l < N_ARR; l++)
              dout[32*l +: 32] = {32{din[32*l + 31]}};
          SH_LSBX:
            dout = {LINE_W{din[0]}};
          default: dout = din;
        endcase
      end
      SH_SHL:
        for (int l = 0; l < N_ARR; l++)
          dout[32*l +: 32] = (amt >= 8'd32) ? 32'd0 : din[32*l +: 32] << amt;
      SH_SHR:
        for (int l = 0; l < N_ARR; l++)
          dout[32*l +: 32] = (amt >= 8'd32) ? 32'd0 : din[32*l +: 32] >> amt;
      SH_ROTL:
        for (int l = 0; l < N_ARR; l++) begin
          rot = {din[32*l +: 32], din[32*l +: 32]} >> (6'd32 - {1'b0, amt[4:0]});
          dout[32*l +: 32] = rot[31:0];
        end
      default: dout = din;
    endcase
  end

endmodule
