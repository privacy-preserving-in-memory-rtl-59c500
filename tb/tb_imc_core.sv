// tb_imc_core: one IMC core driven only by C-Insts and the host port. Loads the
// AES-128 micro-code (the fixed-key AES that a Half-Gate uses to hash labels),
// the FreeXOR micro-code and a polynomial-subtraction micro-code, then checks
// AES-128 against the FIPS-197 example (and random blocks against a software AES),
// FreeXOR and subtraction results, and each operation's latency (L + 2 cycles).
module tb_imc_core;
  import ppimce_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, cin_valid, ready, done, host_we;
  cinst_t cin;
  logic [7:0] host_row;
  logic [127:0] host_wdata, host_rdata;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc++;
  sbox_t  sb;
  rkeys_t rk;

  imc_core dut (.clk, .rst_n, .cin_valid, .cin, .ready, .done,
                .host_we, .host_row, .host_wdata, .host_rdata);

  task automatic send(cinst_t c);
    @(negedge clk); cin_valid = 1; cin = c;
    @(negedge clk); cin_valid = 0;
  endtask
  task automatic load(int addr, uinst_t u);
    for (int k = 0; k < 4; k++) send(ci_uim(addr, k, u[32*k +: 32]));
  endtask
  task automatic hw(int row, logic [127:0] d);
    @(negedge clk); host_we = 1; host_row = 8'(row); host_wdata = d;
    @(negedge clk); host_we = 0;
  endtask
  task automatic hr(int row, output logic [127:0] q);
    host_row = 8'(row); #1; q = host_rdata;
  endtask
  // run a C-Inst, return cycles from acceptance to done
  task automatic exec(cinst_t c, output int lat);
    int t0;
    @(negedge clk); cin_valid = 1; cin = c;
    @(posedge clk); t0 = cyc; @(negedge clk); cin_valid = 0;
    while (!done && cyc - t0 < 200) @(negedge clk);
    lat = cyc - t0;
  endtask
  task automatic chk(logic [127:0] got, logic [127:0] exp, string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h exp %h", what, got, exp); end
  endtask

  initial begin
    repeat (100000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    ucode_t aes;
    logic [127:0] q, a, b, d;
    int lat;
    rst_n = 0; cin_valid = 0; cin = '0; host_we = 0; host_row = 0; host_wdata = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 256; i++) sb[i] = sbox(8'(i));
    // tables
    for (int i = 0; i < 256; i++) begin
      send(ci_lut(0, i, sb[i])); send(ci_lut(1, i, gmul(sb[i], 8'h02)));
      send(ci_lut(2, i, gmul(sb[i], 8'h03)));
    end
    // micro-code: AES at 0, FreeXOR at 64, PSUB at 70
    aes = aes_ucode(8'd200, 8'd199);
    foreach (aes[i]) load(i, aes[i]);
    send(ci_dec(OP_HALFGATE, 0, aes.size()));
    load(64, u_cem(CEM_XOR, ROW_SRC0, ROW_SRC1, ROW_DST, WS_CEM));
    send(ci_dec(OP_FREEXOR, 64, 1));
    load(70, u_cem(CEM_NOT, ROW_SRC1, 8'h00, 8'd198, WS_CEM));
    load(71, u_cem(CEM_ADDC, ROW_SRC0, 8'd198, ROW_DST, WS_CEM));
    send(ci_dec(OP_PSUB, 70, 2));
    // FIPS-197 example
    rk = key_expand(from_bytes(128'h2b7e151628aed2a6abf7158809cf4f3c), sb);
    chk(rk[1], from_bytes(128'ha0fafe1788542cb123a339392a6c7605), "key schedule");
    for (int r = 0; r < 11; r++) hw(200 + r, rk[r]);
    hw(20, from_bytes(128'h3243f6a8885a308d313198a2e0370734));
    exec(ci(OP_HALFGATE, 16'd20, 16'd0, 16'd30), lat);
    hr(30, q);
    chk(q, from_bytes(128'h3925841d02dc09fbdc118597196a0b32), "AES-128 FIPS-197");
    checks++; if (lat != aes.size() + 2) begin failures++; $display("FAIL AES latency %0d", lat); end
    for (int k = 0; k < 5; k++) begin
      a = {$urandom, $urandom, $urandom, $urandom};
      hw(21, a);
      exec(ci(OP_HALFGATE, 16'd21, 16'd0, 16'd31), lat);
      hr(31, q); chk(q, aes_encrypt(a, rk, sb), "AES-128 random");
    end
    // FreeXOR
    for (int k = 0; k < 10; k++) begin
      a = {$urandom, $urandom, $urandom, $urandom}; b = {$urandom, $urandom, $urandom, $urandom};
      hw(40, a); hw(41, b);
      exec(ci(OP_FREEXOR, 16'd40, 16'd41, 16'd42), lat);
      hr(42, q); chk(q, a ^ b, "FreeXOR");
      checks++; if (lat != 3) begin failures++; $display("FAIL FreeXOR latency %0d", lat); end
    end
    // subtraction, four 32-bit coefficients per line
    for (int k = 0; k < 10; k++) begin
      a = {$urandom, $urandom, $urandom, $urandom}; b = {$urandom, $urandom, $urandom, $urandom};
      hw(50, a); hw(51, b);
      exec(ci(OP_PSUB, 16'd50, 16'd51, 16'd52), lat);
      for (int l = 0; l < 4; l++) d[32*l +: 32] = a[32*l +: 32] - b[32*l +: 32];
      hr(52, q); chk(q, d, "PSUB");
      checks++; if (lat != 4) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
