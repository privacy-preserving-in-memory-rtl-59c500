// imc_is: the IMC-Instruction Scheduler.
//
// It takes one C-Inst per cycle from the host processor and hands C-Insts to the GC
// computing units (groups of IMC cores that execute the same C-Inst in lockstep).
//
// GC mode (FreeXOR, Half-Gate), following the paper's description and Fig. 3:
//   * every accepted GC C-Inst writes its output address into the OA-CAM; the entry
//     is removed when the unit running it reports done;
//   * its two input addresses are searched in the OA-CAM; entries freed in this cycle
//     do not count;
//   * each cycle at most one C-Inst is issued, to the lowest-numbered free unit: a
//     ready C-Inst from the C-Inst Bank first, else the incoming one if it has no
//     dependency; a unit that reports done in this cycle is already free;
//   * an incoming C-Inst that is not issued goes into the bank.
//   The single issue per cycle, the bank-first priority and the lowest-slot choice
//   inside the bank are this design's choices; they reproduce every state of the
//   paper's two-unit example.
// HE mode (all other opcodes, including uIM and LUT writes): the C-Inst is broadcast
//   to all units without OA-CAM or bank checks, as the paper says. This design lets a
//   broadcast go only when every unit is idle and the bank is empty, so HE and GC work
//   never overlap on a core; a later GC C-Inst waits in the bank while HE runs.
//
// Flow control: in_ready is combinational and does not depend on in_valid. Unit
// outputs (unit_valid, unit_cinst) are combinational; a unit must accept in that cycle
// (IMC cores are ready whenever they are not busy, which the scheduler tracks).
// Event counters count, since reset, each scheduling mechanism.
module imc_is
  import ppimce_pkg::*;
#(
  parameter int unsigned N_UNITS    = 16,
  parameter int unsigned BANK_DEPTH = 16384 / (CINST_W / 8),
  parameter int unsigned CAM_DEPTH  = 16384 / (ADDR_W / 8),
  localparam int unsigned TW        = $clog2(CAM_DEPTH),
  localparam int unsigned UW        = (N_UNITS > 1) ? $clog2(N_UNITS) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // from the host processor
  input  logic               in_valid,
  input  cinst_t             in_cinst,
  output logic               in_ready,
  // to / from the GC computing units
  output logic [N_UNITS-1:0] unit_valid,
  output cinst_t             unit_cinst,
  input  logic [N_UNITS-1:0] unit_done,
  // status
  output logic               idle,
  output logic [31:0]        cnt_direct,    // GC C-Insts issued on arrival
  output logic [31:0]        cnt_banked,    // GC C-Insts written into the bank
  output logic [31:0]        cnt_from_bank, // GC C-Insts issued from the bank
  output logic [31:0]        cnt_dep_wait,  // arrivals that hit in the OA-CAM
  output logic [31:0]        cnt_unit_wait, // ready arrivals with no free unit
  output logic [31:0]        cnt_broadcast  // HE-mode broadcasts
);

  logic [N_UNITS-1:0] busy, ugc, done_eff, unit_free;
  logic [TW-1:0]      utag [N_UNITS];
  logic [CAM_DEPTH-1:0] free_mask;
  logic               any_free, all_idle;
  logic [UW-1:0]      first_free;

  // OA-CAM
  logic          cam_full, hit0, hit1;
  logic [TW-1:0] cam_idx, idx0, idx1;
  logic [TW:0]   cam_count;
  // bank
  logic          bank_full, bank_empty, bank_out_valid;
  cinst_t        bank_out_cinst;
  logic [TW-1:0] bank_out_otag;

  logic in_gc, in_deps;
  logic bank_issue, direct_issue, accept_gc, accept_bc, to_bank;

  // -------------------------------------------------------- completions
  assign done_eff  = unit_done & busy;
  assign unit_free = ~busy | done_eff;

  always_comb begin
    free_mask = '0;
    for (int u = 0; u < N_UNITS; u++)
      if (done_eff[u] && ugc[u]) free_mask[utag[u]] = 1'b1;
  end

  always_comb begin
    any_free   = 1'b0;
    first_free = '0;
    for (int u = N_UNITS - 1; u >= 0; u--)
      if (unit_free[u]) begin
        any_free   = 1'b1;
        first_free = UW'(u);
      end
  end

  assign all_idle = (&unit_free) && bank_empty;
  assign idle     = (busy == '0) && bank_empty;

  // -------------------------------------------------------- issue decision
  assign in_gc        = is_gc_op(in_cinst.op);
  assign in_deps      = hit0 || hit1;
  assign in_ready     = in_gc ? (!cam_full && !bank_full) : all_idle;
  assign bank_issue   = bank_out_valid && any_free;
  assign accept_gc    = in_valid && in_gc && !cam_full && !bank_full;
  assign direct_issue = accept_gc && !in_deps && any_free && !bank_issue;
  assign to_bank      = accept_gc && !direct_issue;
  assign accept_bc    = in_valid && !in_gc && all_idle;

  always_comb begin
    unit_valid = '0;
    unit_cinst = in_cinst;
    if (bank_issue) begin
      unit_valid[first_free] = 1'b1;
      unit_cinst             = bank_out_cinst;
    end else if (direct_issue) begin
      unit_valid[first_free] = 1'b1;
    end else if (accept_bc) begin
      unit_valid = '1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= '0;
      ugc  <= '0;
      for (int u = 0; u < N_UNITS; u++) utag[u] <= '0;
    end else begin
      busy <= busy & ~done_eff;
      if (bank_issue || direct_issue) begin
        busy[first_free] <= 1'b1;
        ugc[first_free]  <= 1'b1;
        utag[first_free] <= bank_issue ? bank_out_otag : cam_idx;
      end else if (accept_bc && is_exec_op(in_cinst.op)) begin
        busy <= '1;
        ugc  <= '0;
      end
    end
  end

  // -------------------------------------------------------- OA-CAM and bank
  oa_cam #(.DEPTH(CAM_DEPTH)) u_cam (
    .clk, .rst_n,
    .alloc     (accept_gc),
    .alloc_addr(in_cinst.dst),
    .alloc_idx (cam_idx),
    .full      (cam_full),
    .free_mask (free_mask),
    .key0      (in_cinst.src0),
    .key1      (in_cinst.src1),
    .hit0, .idx0, .hit1, .idx1,
    .count     (cam_count)
  );

  cinst_bank #(.DEPTH(BANK_DEPTH), .CAM_DEPTH(CAM_DEPTH)) u_bank (
    .clk, .rst_n,
    .ins_valid (to_bank),
    .ins_cinst (in_cinst),
    .ins_otag  (cam_idx),
    .ins_wait0 (hit0),
    .ins_tag0  (idx0),
    .ins_wait1 (hit1),
    .ins_tag1  (idx1),
    .full      (bank_full),
    .empty     (bank_empty),
    .free_mask (free_mask),
    .out_valid (bank_out_valid),
    .out_cinst (bank_out_cinst),
    .out_otag  (bank_out_otag),
    .pop       (bank_issue)
  );

  // -------------------------------------------------------- event counters
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_direct    <= '0;
      cnt_banked    <= '0;
      cnt_from_bank <= '0;
      cnt_dep_wait  <= '0;
      cnt_unit_wait <= '0;
      cnt_broadcast <= '0;
    end else begin
      if (direct_issue)                     cnt_direct    <= cnt_direct + 1;
      if (to_bank)                          cnt_banked    <= cnt_banked + 1;
      if (bank_issue)                       cnt_from_bank <= cnt_from_bank + 1;
      if (accept_gc && in_deps)             cnt_dep_wait  <= cnt_dep_wait + 1;
      if (accept_gc && !in_deps && to_bank) cnt_unit_wait <= cnt_unit_wait + 1;
      if (accept_bc)                        cnt_broadcast <= cnt_broadcast + 1;
    end
  end

  // An OA-CAM entry is held by every GC C-Inst in flight, so the CAM never holds fewer
  // entries than the bank.
  a_done_busy: assert property (@(posedge clk) disable iff (!rst_n) (unit_done & ~busy) == '0)
    else $error("imc_is: done from an idle unit");

  logic unused_cam_count;
  assign unused_cam_count = ^cam_count;

endmodule
