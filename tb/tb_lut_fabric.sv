// tb_lut_fabric: loads S, 2S and 3S tables and checks the XOR-tree mode against
// SubBytes+MixColumns (FIPS-197 round 1 and random states) and the direct mode
// against SubBytes; then loads a 4-bit x 4-bit product table and checks it.
module tb_lut_fabric;
  import ppimce_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [127:0] din, dout;
  logic mode, we;
  logic [1:0] wtbl;
  logic [7:0] widx, wdata;
  int checks = 0, failures = 0;
  sbox_t sb;

  lut_fabric dut (.clk, .din, .mode, .dout, .we, .wtbl, .widx, .wdata);

  task automatic wr(int t, int i, logic [7:0] d);
    @(negedge clk); we = 1; wtbl = 2'(t); widx = 8'(i); wdata = d;
    @(posedge clk); #1 we = 0;
  endtask

  function automatic logic [127:0] ref_mix(logic [127:0] s, logic last);
    // aes_round applies ShiftRows first; undo it by feeding the InvShiftRows'ed state
    logic [127:0] u;
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++) u[32*((c+r)%4) + 8*r +: 8] = s[32*c + 8*r +: 8];
    return aes_round(u, '0, last, sb);
  endfunction

  initial begin
    repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    we = 0; mode = 0; din = '0; wtbl = 0; widx = 0; wdata = 0;
    for (int i = 0; i < 256; i++) sb[i] = sbox(8'(i));
    checks++; if (sb[8'h53] !== 8'hed || sb[8'h00] !== 8'h63) failures++;
    for (int i = 0; i < 256; i++) begin
      wr(0, i, sb[i]); wr(1, i, gmul(sb[i], 8'h02)); wr(2, i, gmul(sb[i], 8'h03));
    end
    // FIPS-197 round 1: after ShiftRows -> after MixColumns
    @(negedge clk); mode = 0; din = from_bytes(128'hd4bf5d30e0b452aeb84111f11e2798e5);
    // the fabric applies SubBytes too, so feed the pre-SubBytes bytes
    for (int k = 0; k < 16; k++)
      for (int y = 0; y < 256; y++) if (sb[y] == din[8*k +: 8]) begin din[8*k +: 8] = 8'(y); break; end
    #1; checks++;
    if (dout !== from_bytes(128'h046681e5e0cb199a48f8d37a2806264c)) begin
      failures++; $display("FAIL FIPS mix: %h", dout);
    end
    for (int k = 0; k < 100; k++) begin
      @(negedge clk); din = {$urandom, $urandom, $urandom, $urandom};
      mode = 0; #1; checks++;
      if (dout !== ref_mix(din, 0)) begin failures++; $display("FAIL mix %h", din); end
      mode = 1; #1; checks++;
      if (dout !== ref_mix(din, 1)) begin failures++; $display("FAIL sub %h", din); end
    end
    // 4-bit integer multiplication table
    for (int i = 0; i < 256; i++) wr(0, i, 8'((i >> 4) * (i & 15)));
    for (int k = 0; k < 100; k++) begin
      @(negedge clk); din = {$urandom, $urandom, $urandom, $urandom}; mode = 1; #1;
      for (int b = 0; b < 16; b++) begin
        checks++;
        if (dout[8*b +: 8] !== din[8*b+4 +: 4] * din[8*b +: 4]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
