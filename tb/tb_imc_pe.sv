// tb_imc_pe: drives micro-instructions straight into one IMC-PE and checks
// FreeXOR (in-memory XOR of two labels), one AES round through shifter and LUT
// fabric against FIPS-197 round 1, subtraction by NOT + ADD with carry-in, and the
// sign mask made by MSB extension and written back through the write driver.
module tb_imc_pe;
  import ppimce_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, ui_valid, lut_we, host_we;
  uinst_t ui;
  logic [1:0] lut_wtbl;
  logic [7:0] lut_widx, lut_wdata, host_row;
  logic [127:0] host_wdata, host_rdata, mem_buf, sh_buf, lut_buf;
  int checks = 0, failures = 0;
  sbox_t sb;

  imc_pe dut (.clk, .rst_n, .ui_valid, .ui, .lut_we, .lut_wtbl, .lut_widx, .lut_wdata,
              .host_we, .host_row, .host_wdata, .host_rdata, .mem_buf, .sh_buf, .lut_buf);

  task automatic hw(int row, logic [127:0] d);
    @(negedge clk); host_we = 1; host_row = 8'(row); host_wdata = d;
    @(negedge clk); host_we = 0;
  endtask
  task automatic hr(int row, output logic [127:0] q);
    host_row = 8'(row); #1; q = host_rdata;
  endtask
  task automatic run(uinst_t u);
    @(negedge clk); ui_valid = 1; ui = u;
    @(negedge clk); ui_valid = 0; ui = '0;
  endtask
  task automatic chk(logic [127:0] got, logic [127:0] exp, string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h exp %h", what, got, exp); end
  endtask

  initial begin
    repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [127:0] a, b, q;
    rst_n = 0; ui_valid = 0; ui = '0; lut_we = 0; host_we = 0; host_row = 0;
    host_wdata = 0; lut_wtbl = 0; lut_widx = 0; lut_wdata = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 256; i++) sb[i] = sbox(8'(i));
    for (int t = 0; t < 3; t++)
      for (int i = 0; i < 256; i++) begin
        @(negedge clk); lut_we = 1; lut_wtbl = 2'(t); lut_widx = 8'(i);
        lut_wdata = (t == 0) ? sb[i] : gmul(sb[i], (t == 1) ? 8'h02 : 8'h03);
      end
    @(negedge clk); lut_we = 0;
    // FreeXOR on random labels
    for (int k = 0; k < 20; k++) begin
      a = {$urandom, $urandom, $urandom, $urandom}; b = {$urandom, $urandom, $urandom, $urandom};
      hw(1, a); hw(2, b);
      run(u_cem(CEM_XOR, 8'd1, 8'd2, 8'd3, WS_CEM));
      hr(3, q); chk(q, a ^ b, "FreeXOR row");
      chk(mem_buf, a ^ b, "FreeXOR buffer");
    end
    // one AES round: state (after AddRoundKey 0) -> ShiftRows -> SubBytes+MixColumns -> + rk1
    hw(4, from_bytes(128'h193de3bea0f4e22b9ac68d2ae9f84808));
    hw(5, from_bytes(128'ha0fafe1788542cb123a339392a6c7605));
    run(u_cem(CEM_READ, 8'd4, 8'd0, 8'd0, WS_NONE));
    run(u_sh(SH_MISC, SH_SROWS));
    chk(sh_buf, from_bytes(128'h19f48d08a0c648be9af8e32be93de22a), "ShiftRows buffer");
    run(u_lut(1'b0));
    run(u_cem(CEM_READ, 8'd0, 8'd0, 8'd6, WS_LUT));
    run(u_cem(CEM_XOR, 8'd6, 8'd5, 8'd7, WS_CEM));
    hr(7, q); chk(q, from_bytes(128'ha49c7ff2689f352b6b5bea43026a5049), "AES round 1");
    // subtraction and sign mask per 32-bit lane
    for (int k = 0; k < 20; k++) begin
      logic [127:0] d, m;
      a = {$urandom, $urandom, $urandom, $urandom}; b = {$urandom, $urandom, $urandom, $urandom};
      hw(10, a); hw(11, b);
      run(u_cem(CEM_NOT, 8'd11, 8'd0, 8'd12, WS_CEM));
      run(u_cem(CEM_ADDC, 8'd10, 8'd12, 8'd13, WS_CEM));
      for (int l = 0; l < 4; l++) begin
        d[32*l +: 32] = a[32*l +: 32] - b[32*l +: 32];
        m[32*l +: 32] = {32{d[32*l+31]}};
      end
      hr(13, q); chk(q, d, "sub");
      run(u_sh(SH_MISC, SH_MSBX));
      run(u_cem(CEM_READ, 8'd0, 8'd0, 8'd14, WS_SHIFT));
      hr(14, q); chk(q, m, "msb mask");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
