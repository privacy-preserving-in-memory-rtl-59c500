// tb_ppimce_top: end-to-end test of the engine at a reduced size (32 cores in 4 GC
// computing units of 8 cores, an 8-entry C-Inst Bank and a 16-entry OA-CAM).
//
// Everything is set up through the two external ports only: LUT tables, micro-code
// and decoder entries are loaded with broadcast C-Insts, labels and AES round keys
// are written through the host port. The test then runs
//   1. a random garbled-circuit DAG of FreeXOR and Half-Gate (fixed-key AES-128)
//      C-Insts, with single-assignment addresses, in GC mode;
//   2. an HE polynomial addition and subtraction broadcast to all cores (mode switch);
//   3. a second GC DAG after the switch back.
// A reference model keeps every core's rows. Whenever the scheduler hands a C-Inst
// to a unit, the model applies it to that unit's cores (FreeXOR = XOR, Half-Gate
// hash = AES-128 from the software reference, PADD/PSUB = four 32-bit lane sums).
// At each issue the model also checks that no source of the C-Inst is the
// destination of a C-Inst still executing (the read-after-write rule the OA-CAM
// enforces) and that a unit is never given work while busy. At the end every row of
// every core is compared with the model through host_rdata.
//
// Mechanisms counted (each must happen at least once): direct issue, bank insert,
// issue from the bank, dependency wait, wait for a free unit, HE broadcast,
// back-pressure in GC mode (bank/CAM full), and the mode-switch stall (an HE C-Inst
// waiting for all GC units to drain).
module tb_ppimce_top;
  import ppimce_pkg::*;
  import tb_util_pkg::*;
  localparam int NC = 32, NU = 4, CPU = NC / NU, NROWS = 120;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, in_valid, in_ready, host_we, host_bcast, idle;
  cinst_t in_cinst;
  logic [4:0] host_core;
  logic [7:0] host_row;
  logic [127:0] host_wdata, host_rdata;
  logic [31:0] cnt_direct, cnt_banked, cnt_from_bank, cnt_dep_wait, cnt_unit_wait, cnt_broadcast;
  int checks = 0, failures = 0, cyc = 0;
  int n_gc_stall = 0, n_mode_stall = 0, n_issue = 0;
  sbox_t  sb;
  rkeys_t rk;
  logic [127:0] m [NC][256];       // reference model of the CEM rows
  bit ubusy [NU];
  int udst  [NU];
  bit check_on = 0;

  ppimce_top #(.N_CORES(NC), .N_UNITS(NU), .BANK_DEPTH(8), .CAM_DEPTH(16)) dut (
    .clk, .rst_n, .in_valid, .in_cinst, .in_ready, .host_we, .host_bcast, .host_core,
    .host_row, .host_wdata, .host_rdata, .idle, .cnt_direct, .cnt_banked, .cnt_from_bank,
    .cnt_dep_wait, .cnt_unit_wait, .cnt_broadcast);

  initial begin
    repeat (200000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [127:0] lane_op(logic [127:0] a, logic [127:0] b, bit sub);
    logic [127:0] r;
    for (int l = 0; l < 4; l++) r[32*l +: 32] = sub ? a[32*l +: 32] - b[32*l +: 32]
                                                    : a[32*l +: 32] + b[32*l +: 32];
    return r;
  endfunction

  // issue monitor and reference model
  always @(posedge clk) begin
    cyc++;
    if (in_valid && !in_ready) begin
      if (is_gc_op(in_cinst.op)) n_gc_stall++; else n_mode_stall++;
    end
    for (int u = 0; u < NU; u++) if (ubusy[u] && dut.unit_done[u]) ubusy[u] = 0;
    for (int u = 0; u < NU; u++) begin
      if (dut.unit_valid[u] && is_exec_op(dut.unit_cinst.op)) begin
        cinst_t c;
        c = dut.unit_cinst;
        n_issue++;
        if (check_on) begin
          checks++;
          if (ubusy[u]) begin failures++; $display("FAIL unit %0d given work while busy", u); end
          for (int v = 0; v < NU; v++) if (ubusy[v] && is_gc_op(c.op) &&
              (udst[v] == int'(c.src0) || (c.op == OP_FREEXOR && udst[v] == int'(c.src1)))) begin
            failures++; $display("FAIL RAW: %0d issued while producer on unit %0d runs", c.dst, v);
          end
        end
        ubusy[u] = 1; udst[u] = int'(c.dst);
        for (int k = u * CPU; k < (u + 1) * CPU; k++) begin
          case (c.op)
            OP_FREEXOR:  m[k][c.dst[7:0]] = m[k][c.src0[7:0]] ^ m[k][c.src1[7:0]];
            OP_HALFGATE: m[k][c.dst[7:0]] = aes_encrypt(m[k][c.src0[7:0]], rk, sb);
            OP_PADD:     m[k][c.dst[7:0]] = lane_op(m[k][c.src0[7:0]], m[k][c.src1[7:0]], 0);
            OP_PSUB:     m[k][c.dst[7:0]] = lane_op(m[k][c.src0[7:0]], m[k][c.src1[7:0]], 1);
            default: ;
          endcase
        end
      end
    end
  end

  task automatic send(cinst_t c);
    @(negedge clk); in_valid = 1; in_cinst = c;
    @(posedge clk); while (!in_ready) @(posedge clk);
    @(negedge clk); in_valid = 0;
  endtask
  task automatic load(int addr, uinst_t u);
    for (int k = 0; k < 4; k++) send(ci_uim(addr, k, u[32*k +: 32]));
  endtask
  task automatic hw(int core, bit bc, int row, logic [127:0] d);
    @(negedge clk); host_we = 1; host_bcast = bc; host_core = 5'(core); host_row = 8'(row);
    host_wdata = d;
    @(negedge clk); host_we = 0; host_bcast = 0;
    for (int k = 0; k < NC; k++) if (bc || k == core) m[k][row] = d;
  endtask
  task automatic wait_idle();
    @(negedge clk); while (!idle) @(negedge clk);
    repeat (3) @(negedge clk);
  endtask
  // random GC DAG: n C-Insts writing rows base, base+1, ...; sources from the
  // inputs (rows 1..8) or earlier results
  task automatic gc_dag(int base, int n);
    for (int i = 0; i < n; i++) begin
      int s0, s1;
      s0 = ($urandom_range(0, 2) == 0 || i == 0) ? $urandom_range(1, 8) : base + $urandom_range(0, i - 1);
      s1 = ($urandom_range(0, 2) == 0 || i == 0) ? $urandom_range(1, 8) : base + $urandom_range(0, i - 1);
      if ($urandom_range(0, 2) == 0) send(ci(OP_HALFGATE, 16'(s0), 16'd0, 16'(base + i)));
      else                           send(ci(OP_FREEXOR, 16'(s0), 16'(s1), 16'(base + i)));
    end
  endtask
  task automatic compare_all(string what);
    for (int k = 0; k < NC; k++)
      for (int r = 1; r < NROWS; r++) begin
        @(negedge clk); host_core = 5'(k); host_row = 8'(r); #1;
        checks++;
        if (host_rdata !== m[k][r]) begin
          failures++;
          if (failures < 10) $display("FAIL %s core %0d row %0d: got %h exp %h", what, k, r, host_rdata, m[k][r]);
        end
      end
  endtask

  initial begin
    ucode_t aes;
    rst_n = 0; in_valid = 0; in_cinst = '0; host_we = 0; host_bcast = 0; host_core = 0;
    host_row = 0; host_wdata = 0;
    for (int u = 0; u < NU; u++) ubusy[u] = 0;
    for (int k = 0; k < NC; k++) for (int r = 0; r < 256; r++) m[k][r] = '0;
    for (int i = 0; i < 256; i++) sb[i] = sbox(8'(i));
    rk = key_expand({$urandom, $urandom, $urandom, $urandom}, sb);
    repeat (2) @(negedge clk); rst_n = 1;
    // clear the compared rows, keys
    for (int r = 0; r < NROWS; r++) hw(0, 1, r, '0);
    for (int r = 0; r < 11; r++) hw(0, 1, 200 + r, rk[r]);
    // LUT tables (SubBytes, 2*S, 3*S) and micro-code, broadcast to every core
    for (int i = 0; i < 256; i++) begin
      send(ci_lut(0, i, sb[i])); send(ci_lut(1, i, gmul(sb[i], 8'h02)));
      send(ci_lut(2, i, gmul(sb[i], 8'h03)));
    end
    aes = aes_ucode(8'd200, 8'd199);
    foreach (aes[i]) load(i, aes[i]);
    send(ci_dec(OP_HALFGATE, 0, aes.size()));
    load(64, u_cem(CEM_XOR, ROW_SRC0, ROW_SRC1, ROW_DST, WS_CEM));
    send(ci_dec(OP_FREEXOR, 64, 1));
    load(66, u_cem(CEM_ADD, ROW_SRC0, ROW_SRC1, ROW_DST, WS_CEM));
    send(ci_dec(OP_PADD, 66, 1));
    load(70, u_cem(CEM_NOT, ROW_SRC1, 8'h00, 8'd198, WS_CEM));
    load(71, u_cem(CEM_ADDC, ROW_SRC0, 8'd198, ROW_DST, WS_CEM));
    send(ci_dec(OP_PSUB, 70, 2));
    // per-core random input labels
    for (int k = 0; k < NC; k++)
      for (int r = 1; r <= 8; r++) hw(k, 0, r, {$urandom, $urandom, $urandom, $urandom});
    check_on = 1;
    // 1. GC
    gc_dag(10, 40);
    // 2. HE (waits for the GC units to drain)
    send(ci(OP_PADD, 16'd1, 16'd2, 16'd60));
    send(ci(OP_PSUB, 16'd60, 16'd3, 16'd61));
    send(ci(OP_PADD, 16'd61, 16'd30, 16'd62));
    // 3. GC again
    gc_dag(70, 40);
    wait_idle();
    compare_all("rows");
    // every mechanism must have happened
    checks++; if (cnt_direct == 0)    begin failures++; $display("FAIL no direct issue"); end
    checks++; if (cnt_banked == 0)    begin failures++; $display("FAIL no bank insert"); end
    checks++; if (cnt_from_bank == 0) begin failures++; $display("FAIL no issue from bank"); end
    checks++; if (cnt_dep_wait == 0)  begin failures++; $display("FAIL no dependency wait"); end
    checks++; if (cnt_unit_wait == 0) begin failures++; $display("FAIL no unit wait"); end
    checks++; if (cnt_broadcast == 0) begin failures++; $display("FAIL no broadcast"); end
    checks++; if (n_gc_stall == 0)    begin failures++; $display("FAIL no GC back-pressure"); end
    checks++; if (n_mode_stall == 0)  begin failures++; $display("FAIL no mode-switch stall"); end
    checks++; if (cnt_direct + cnt_from_bank != 80) begin
      failures++; $display("FAIL GC issues %0d + %0d != 80", cnt_direct, cnt_from_bank);
    end
    $display("mechanisms: direct %0d banked %0d from_bank %0d dep_wait %0d unit_wait %0d broadcast %0d gc_stall_cycles %0d mode_stall_cycles %0d",
             cnt_direct, cnt_banked, cnt_from_bank, cnt_dep_wait, cnt_unit_wait, cnt_broadcast,
             n_gc_stall, n_mode_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
