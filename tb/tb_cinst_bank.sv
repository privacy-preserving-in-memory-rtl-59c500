// tb_cinst_bank: random insert / wake-up / pop traffic against a software model of
// the bank: an entry is ready once both producers' OA-CAM entries have been freed
// (including in the current cycle); the lowest ready slot is offered; full and
// empty follow the occupancy.
module tb_cinst_bank;
  import ppimce_pkg::*;
  import tb_util_pkg::*;
  localparam int D = 8, CD = 16;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, ins_valid, ins_wait0, ins_wait1, full, empty, out_valid, pop;
  cinst_t ins_cinst, out_cinst;
  logic [3:0] ins_otag, ins_tag0, ins_tag1, out_otag;
  logic [CD-1:0] free_mask;
  int checks = 0, failures = 0;
  bit mv [D], mw0 [D], mw1 [D];
  int mt0 [D], mt1 [D];
  cinst_t mc [D];

  cinst_bank #(.DEPTH(D), .CAM_DEPTH(CD)) dut (
    .clk, .rst_n, .ins_valid, .ins_cinst, .ins_otag, .ins_wait0, .ins_tag0, .ins_wait1, .ins_tag1,
    .full, .empty, .free_mask, .out_valid, .out_cinst, .out_otag, .pop);

  initial begin
    repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int n_pops = 0;
    rst_n = 0; ins_valid = 0; ins_cinst = '0; ins_otag = 0; ins_wait0 = 0; ins_wait1 = 0;
    ins_tag0 = 0; ins_tag1 = 0; free_mask = '0; pop = 0;
    for (int i = 0; i < D; i++) mv[i] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int k = 0; k < 3000; k++) begin
      int lowfree, ready, occ;
      bit w0n [D], w1n [D];
      @(negedge clk);
      free_mask = 16'($urandom) & 16'($urandom);
      ins_cinst = ci(OP_HALFGATE, 16'($urandom), 16'($urandom), 16'($urandom));
      ins_otag = 4'($urandom); ins_tag0 = 4'($urandom); ins_tag1 = 4'($urandom);
      ins_wait0 = $urandom_range(0, 1) && !free_mask[ins_tag0];
      ins_wait1 = $urandom_range(0, 1) && !free_mask[ins_tag1];
      lowfree = -1; ready = -1; occ = 0;
      for (int i = D - 1; i >= 0; i--) begin
        w0n[i] = mw0[i] && !free_mask[mt0[i]];
        w1n[i] = mw1[i] && !free_mask[mt1[i]];
        if (!mv[i]) lowfree = i; else occ++;
        if (mv[i] && !w0n[i] && !w1n[i]) ready = i;
      end
      ins_valid = (lowfree >= 0) && $urandom_range(0, 2) != 0;
      pop = $urandom_range(0, 2) == 0;
      #1;
      checks++;
      if (full != (lowfree < 0) || empty != (occ == 0) || out_valid != (ready >= 0)) begin
        failures++; $display("FAIL flags full %0d empty %0d out_valid %0d (ready %0d)", full, empty, out_valid, ready);
      end
      if (ready >= 0) begin
        checks++;
        if (out_cinst !== mc[ready]) begin failures++; $display("FAIL out slot %0d", ready); end
      end
      @(posedge clk);
      for (int i = 0; i < D; i++) begin mw0[i] = w0n[i]; mw1[i] = w1n[i]; end
      if (pop && ready >= 0) begin mv[ready] = 0; n_pops++; end
      if (ins_valid) begin
        mv[lowfree] = 1; mc[lowfree] = ins_cinst; mw0[lowfree] = ins_wait0; mw1[lowfree] = ins_wait1;
        mt0[lowfree] = ins_tag0; mt1[lowfree] = ins_tag1;
      end
    end
    checks++; if (n_pops < 100) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
