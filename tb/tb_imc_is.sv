// tb_imc_is: replays the paper's two-unit GC scheduling example (gates Ia..Ie, FreeXOR
// 3 cycles and Half-Gate 44 cycles from issue to completion, the spacing of the
// example's cycles 2 -> 46 and 4 -> 48) and checks the cycle and unit of every issue
// and the scheduler's event counts. Then checks an HE-mode broadcast, a GC C-Inst
// that arrives while HE work runs, a stall when the bank is full, and a random
// dependency graph against a reference that tracks which outputs are ready.
module tb_imc_is;
  import ppimce_pkg::*;
  import tb_util_pkg::*;
  localparam int NU = 2;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, in_valid, in_ready, idle;
  cinst_t in_cinst, unit_cinst;
  logic [NU-1:0] unit_valid, unit_done;
  logic [31:0] c_direct, c_banked, c_from_bank, c_dep, c_unit, c_bc;
  int checks = 0, failures = 0, cyc = 0;

  imc_is #(.N_UNITS(NU), .BANK_DEPTH(4), .CAM_DEPTH(8)) dut (
    .clk, .rst_n, .in_valid, .in_cinst, .in_ready, .unit_valid, .unit_cinst, .unit_done,
    .idle, .cnt_direct(c_direct), .cnt_banked(c_banked), .cnt_from_bank(c_from_bank),
    .cnt_dep_wait(c_dep), .cnt_unit_wait(c_unit), .cnt_broadcast(c_bc));

  // unit models: done LAT cycles after issue
  logic   ubusy [NU];
  int     ustart [NU], ulat [NU];
  cinst_t ucinst [NU];
  always_comb for (int u = 0; u < NU; u++) unit_done[u] = ubusy[u] && (cyc == ustart[u] + ulat[u]);

  // issue log
  int     log_cyc [$], log_unit [$];
  cinst_t log_ci [$];
  bit     done_ready [logic [15:0]];  // outputs written by completed C-Insts

  function automatic int latency(cinst_t c);
    case (c.op)
      OP_FREEXOR:  return 3;
      OP_HALFGATE: return 44;
      default:     return 5;
    endcase
  endfunction

  always @(posedge clk) begin
    for (int u = 0; u < NU; u++)
      if (unit_done[u]) begin
        ubusy[u] <= 0;
        if (is_gc_op(ucinst[u].op)) done_ready[ucinst[u].dst] = 1;
      end
    for (int u = 0; u < NU; u++) begin
      if (unit_valid[u]) begin
        if (is_gc_op(unit_cinst.op)) begin
          // every input must have been produced already
          checks++;
          if (!(done_ready.exists(unit_cinst.src0) && done_ready.exists(unit_cinst.src1))) begin
            failures++; $display("FAIL cycle %0d: issued before inputs ready (dst %0d src %0d %0d) bank=%0d", cyc, unit_cinst.dst, unit_cinst.src0, unit_cinst.src1, dut.bank_issue);
          end
        end
        if (is_exec_op(unit_cinst.op)) begin
          checks++; if (ubusy[u] && !unit_done[u]) begin failures++; $display("FAIL issue to busy unit"); end
          ubusy[u] <= 1; ustart[u] <= cyc; ulat[u] <= latency(unit_cinst); ucinst[u] <= unit_cinst;
        end
        log_cyc.push_back(cyc); log_unit.push_back(u); log_ci.push_back(unit_cinst);
      end
    end
    cyc <= cyc + 1;
  end

  // drive one C-Inst, holding it until accepted
  task automatic push(cinst_t c);
    @(negedge clk); in_valid = 1; in_cinst = c;
    @(posedge clk); while (!in_ready) @(posedge clk);
    @(negedge clk); in_valid = 0;
  endtask
  task automatic stream(cinst_t cs [$]);
    foreach (cs[i]) begin
      @(negedge clk); in_valid = 1; in_cinst = cs[i];
      #1; while (!in_ready) begin @(negedge clk); #1; end
    end
    @(negedge clk); in_valid = 0;
  endtask
  task automatic expect_issue(int n, int c, int u, logic [15:0] dst);
    checks++;
    if (log_cyc.size() <= n || log_cyc[n] != c || log_unit[n] != u || log_ci[n].dst != dst) begin
      failures++;
      if (log_cyc.size() > n)
        $display("FAIL issue %0d: cycle %0d unit %0d dst %0d, expected cycle %0d unit %0d dst %0d",
                 n, log_cyc[n], log_unit[n], log_ci[n].dst, c, u, dst);
      else $display("FAIL issue %0d missing", n);
    end
  endtask
  task automatic wait_idle();
    int t = 0;
    @(negedge clk); while (!idle && t < 2000) begin @(negedge clk); t++; end
  endtask

  initial begin
    repeat (100000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    cinst_t prog [$];
    for (int u = 0; u < NU; u++) begin ubusy[u] = 0; ustart[u] = 0; ulat[u] = 0; end
    rst_n = 0; in_valid = 0; in_cinst = '0;
    for (int a = 100; a < 200; a++) done_ready[16'(a)] = 1;   // primary inputs
    repeat (2) @(negedge clk); rst_n = 1;
    @(posedge clk); #1;
    cyc = 1;
    // Fig. 3 example: w0..w4 are addresses 0..4; Ia is presented in cycle 1
    prog = {ci(OP_FREEXOR,  16'd100, 16'd101, 16'd0),   // Ia -> w0
            ci(OP_HALFGATE, 16'd102, 16'd103, 16'd1),   // Ib -> w1
            ci(OP_HALFGATE, 16'd104, 16'd105, 16'd2),   // Ic -> w2
            ci(OP_HALFGATE, 16'd0,   16'd1,   16'd3),   // Id -> w3
            ci(OP_FREEXOR,  16'd1,   16'd2,   16'd4)};  // Ie -> w4
    stream(prog);
    wait_idle();
    expect_issue(0, 1, 0, 16'd0);   // cycle 1: Ia to unit 0
    expect_issue(1, 2, 1, 16'd1);   // cycle 2: Ib to unit 1
    expect_issue(2, 4, 0, 16'd2);   // cycle 4: Ic from the bank to unit 0
    expect_issue(3, 46, 1, 16'd3);  // cycle 46: Id to unit 1
    expect_issue(4, 48, 0, 16'd4);  // cycle 48: Ie to unit 0
    checks++;
    if (c_direct != 2 || c_banked != 3 || c_from_bank != 3 || c_dep != 2 || c_unit != 1) begin
      failures++;
      $display("FAIL counters direct %0d banked %0d from_bank %0d dep %0d unit %0d",
               c_direct, c_banked, c_from_bank, c_dep, c_unit);
    end
    // HE mode: broadcast to both units, then a GC C-Inst waits for the HE work
    log_cyc.delete(); log_unit.delete(); log_ci.delete();
    prog = {ci(OP_PADD, 16'd10, 16'd11, 16'd12), ci(OP_FREEXOR, 16'd100, 16'd101, 16'd20)};
    stream(prog);
    wait_idle();
    checks++;
    if (log_ci.size() != 3 || log_ci[0].op != OP_PADD || log_ci[1].op != OP_PADD ||
        log_cyc[0] != log_cyc[1] || log_ci[2].op != OP_FREEXOR || log_cyc[2] != log_cyc[0] + 5) begin
      failures++; $display("FAIL HE broadcast / GC after HE (%0d issues)", log_ci.size());
    end
    checks++; if (c_bc != 1) begin failures++; $display("FAIL broadcasts %0d", c_bc); end
    // random dependency graphs (single assignment per round), bank of 4 gets full
    for (int round = 0; round < 10; round++) begin
      cinst_t g [$];
      logic [15:0] base;
      base = 16'(1000 + 64 * round);
      for (int i = 0; i < 12; i++) begin
        logic [15:0] s0, s1;
        s0 = (i > 0 && $urandom_range(0, 1)) ? base + 16'($urandom_range(0, i - 1)) : 16'(100 + i);
        s1 = (i > 0 && $urandom_range(0, 1)) ? base + 16'($urandom_range(0, i - 1)) : 16'(150 + i);
        g.push_back(ci($urandom_range(0, 1) ? OP_FREEXOR : OP_HALFGATE, s0, s1, base + 16'(i)));
      end
      stream(g);
      wait_idle();
      for (int i = 0; i < 12; i++) begin
        checks++; if (!done_ready.exists(base + 16'(i))) begin failures++; $display("FAIL gate %0d never ran", i); end
      end
    end
    checks++; if (!idle) begin failures++; $display("FAIL not idle"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
