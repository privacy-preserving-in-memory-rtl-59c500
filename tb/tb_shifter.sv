// tb_shifter: checks ShiftRows / InvShiftRows against the FIPS-197 round-1 values,
// the extensions, and lane shifts and rotations against independent expressions.
module tb_shifter;
  import ppimce_pkg::*;
  import tb_util_pkg::*;
  logic [127:0] din, dout;
  logic [1:0] cls;
  logic [2:0] arg;
  int checks = 0, failures = 0;

  shifter dut (.din, .cls, .arg, .dout);

  task automatic expect_eq(logic [127:0] exp, string what);
    #1; checks++;
    if (dout !== exp) begin failures++; $display("FAIL %s: got %h exp %h", what, dout, exp); end
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    // FIPS-197 Appendix B, round 1: after SubBytes -> after ShiftRows
    din = from_bytes(128'hd42711aee0bf98f1b8b45de51e415230);
    cls = SH_MISC; arg = SH_SROWS;
    expect_eq(from_bytes(128'hd4bf5d30e0b452aeb84111f11e2798e5), "ShiftRows");
    din = from_bytes(128'hd4bf5d30e0b452aeb84111f11e2798e5); arg = SH_ISROWS;
    expect_eq(from_bytes(128'hd42711aee0bf98f1b8b45de51e415230), "InvShiftRows");
    for (int k = 0; k < 200; k++) begin
      logic [127:0] e;
      din = {$urandom, $urandom, $urandom, $urandom};
      cls = SH_MISC; arg = SH_PASS; expect_eq(din, "pass");
      arg = SH_MSBX;
      for (int l = 0; l < 4; l++) e[32*l +: 32] = din[32*l+31] ? 32'hffffffff : 32'h0;
      expect_eq(e, "msb ext");
      arg = SH_LSBX; expect_eq(din[0] ? '1 : '0, "lsb ext");
      arg = 3'($urandom_range(0, 7));
      cls = SH_SHL;
      for (int l = 0; l < 4; l++) e[32*l +: 32] = (arg >= 5) ? 0 : din[32*l +: 32] * (32'd1 << (1 << arg));
      expect_eq(e, "shl");
      cls = SH_SHR;
      for (int l = 0; l < 4; l++) e[32*l +: 32] = (arg >= 5) ? 0 : din[32*l +: 32] / (33'd1 << (1 << arg));
      expect_eq(e, "shr");
      cls = SH_ROTL;
      for (int l = 0; l < 4; l++) begin
        int n;
        n = (1 << arg) % 32;
        for (int b = 0; b < 32; b++) e[32*l + (b + n) % 32] = din[32*l + b];
      end
      expect_eq(e, "rotl");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
