// tb_core_controller: programs the decoder and uIM through C-Insts, then checks the
// micro-instruction stream of a C-Inst (order, operand-row substitution), its timing
// (done 2+L cycles after acceptance, ready again then), a zero-length sequence, and
// the LUT-write path.
module tb_core_controller;
  import ppimce_pkg::*;
  import tb_util_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, cin_valid, ready, done, ui_valid, lut_we;
  cinst_t cin;
  uinst_t ui;
  logic [1:0] lut_wtbl;
  logic [7:0] lut_widx, lut_wdata;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  core_controller dut (.clk, .rst_n, .cin_valid, .cin, .ready, .done, .ui_valid, .ui,
                       .lut_we, .lut_wtbl, .lut_widx, .lut_wdata);

  task automatic send(cinst_t c);
    @(negedge clk); cin_valid = 1; cin = c;
    @(negedge clk); cin_valid = 0;
  endtask
  task automatic load(int addr, uinst_t u);
    for (int k = 0; k < 4; k++) send(ci_uim(addr, k, u[32*k +: 32]));
  endtask

  initial begin
    repeat (5000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  uinst_t prog [5];
  initial begin
    rst_n = 0; cin_valid = 0; cin = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    prog[0] = u_cem(CEM_NOT, ROW_SRC1, 8'h00, 8'h20, WS_CEM);
    prog[1] = u_cem(CEM_ADDC, ROW_SRC0, 8'h20, ROW_DST, WS_CEM);
    prog[2] = u_sh(SH_SHR, 3'd2);
    prog[3] = u_lut(1'b1);
    prog[4] = u_cem(CEM_XOR, 8'h33, ROW_SRC1, 8'h44, WS_LUT);
    for (int i = 0; i < 5; i++) load(100 + i, prog[i]);
    send(ci_dec(OP_PSUB, 100, 5));
    for (int len = 1; len <= 5; len++) begin
      int t0, n;
      send(ci_dec(OP_PSUB, 100, len));
      @(negedge clk); cin_valid = 1; cin = ci(OP_PSUB, 16'd7, 16'd9, 16'd11);
      checks++; if (!ready) failures++;
      @(posedge clk); t0 = cyc; @(negedge clk); cin_valid = 0;
      n = 0;
      while (!done) begin
        if (ui_valid) begin
          uinst_t e;
          e = prog[n];
          for (int i = 0; i < 4; i++) begin
            if (e.cem[i].ra == ROW_SRC0) e.cem[i].ra = 8'd7;
            if (e.cem[i].ra == ROW_SRC1) e.cem[i].ra = 8'd9;
            if (e.cem[i].rb == ROW_SRC1) e.cem[i].rb = 8'd9;
            if (e.cem[i].rd == ROW_DST)  e.cem[i].rd = 8'd11;
          end
          checks++;
          if (ui !== e) begin failures++; $display("FAIL len %0d uinst %0d: %h", len, n, ui); end
          n++;
        end
        checks++; if (ready) failures++;
        @(negedge clk);
        if (cyc - t0 > 20) break;
      end
      checks++;
      if (n != len || cyc - t0 != len + 2) begin
        failures++; $display("FAIL len %0d: %0d uinsts, done after %0d", len, n, cyc - t0);
      end
      checks++; if (!ready) failures++;
    end
    // zero-length sequence
    begin
      int t0;
      @(negedge clk); cin_valid = 1; cin = ci(OP_NTT, 0, 0, 0);
      @(posedge clk); t0 = cyc; @(negedge clk); cin_valid = 0;
      while (!done && cyc - t0 < 10) @(negedge clk);
      checks++; if (cyc - t0 != 2) begin failures++; $display("FAIL len 0 %0d", cyc - t0); end
    end
    // LUT write pass-through
    @(negedge clk); cin_valid = 1; cin = ci_lut(2, 8'h5a, 8'hc3); #1;
    checks++;
    if (!(lut_we && lut_wtbl == 2 && lut_widx == 8'h5a && lut_wdata == 8'hc3)) failures++;
    @(negedge clk); cin_valid = 0; #1;
    checks++; if (lut_we) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
