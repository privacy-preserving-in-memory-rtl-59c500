// cinst_bank: the C-Inst Bank of the instruction scheduler.
//
// Holds GC C-Insts that could not be sent to a GC computing unit when they arrived,
// either because an input address was unavailable (hit in the OA-CAM) or because no
// unit was free. The paper re-checks every bank entry against the OA-CAM each cycle.
// This design records, when an entry is written, which OA-CAM entry produces each of
// its inputs (tag0/tag1 with wait0/wait1), and each cycle clears a wait bit when that
// OA-CAM entry is freed. For single-assignment addresses this gives the same answer
// as searching the CAM with the entry's input addresses every cycle, with far less
// logic. Each entry also carries its own OA-CAM entry (otag) so the scheduler can free
// it on completion.
//
// Size: 16 KB as in the paper; with the 64-bit C-Inst that is 2048 entries.
//
// Ports and timing:
//   ins_*      : write a new entry into the lowest free slot at the clock edge
//                (ignored when full). Wait bits given here are already final.
//   free_mask  : OA-CAM entries freed this cycle; a waiting input whose producer is
//                freed counts as ready in this same cycle.
//   out_valid / out_* : the ready entry with the lowest slot number, combinational.
//   pop        : remove that entry at the clock edge.
module cinst_bank
  import ppimce_pkg::*;
#(
  parameter int unsigned DEPTH     = 16384 / (CINST_W / 8),
  parameter int unsigned CAM_DEPTH = 16384 / (ADDR_W / 8),
  localparam int unsigned TW       = $clog2(CAM_DEPTH)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 ins_valid,
  input  cinst_t               ins_cinst,
  input  logic [TW-1:0]        ins_otag,
  input  logic                 ins_wait0,
  input  logic [TW-1:0]        ins_tag0,
  input  logic                 ins_wait1,
  input  logic [TW-1:0]        ins_tag1,
  output logic                 full,
  output logic                 empty,
  input  logic [CAM_DEPTH-1:0] free_mask,
  output logic                 out_valid,
  output cinst_t               out_cinst,
  output logic [TW-1:0]        out_otag,
  input  logic                 pop
);

  localparam int unsigned SW = $clog2(DEPTH);

  logic [DEPTH-1:0] valid, wait0, wait1;
  logic [DEPTH-1:0] w0_now, w1_now;
  cinst_t           cinst [DEPTH];
  logic [TW-1:0]    otag  [DEPTH];
  logic [TW-1:0]    tag0  [DEPTH];
  logic [TW-1:0]    tag1  [DEPTH];
  logic [SW-1:0]    ins_slot, out_slot;

  // wake-up: a wait bit falls when its producer's OA-CAM entry is freed
  always_comb begin
    for (int i = 0; i < DEPTH; i++) begin
      w0_now[i] = wait0[i] && !free_mask[tag0[i]];
      w1_now[i] = wait1[i] && !free_mask[tag1[i]];
    end
  end

  always_comb begin
    full     = 1'b1;
    ins_slot = '0;
    out_valid = 1'b0;
    out_slot  = '0;
    for (int i = DEPTH - 1; i >= 0; i--) begin
      if (!valid[i]) begin
        full     = 1'b0;
        ins_slot = SW'(i);
      end
      if (valid[i] && !w0_now[i] && !w1_now[i]) begin
        out_valid = 1'b1;
        out_slot  = SW'(i);
      end
    end
  end

  assign empty     = (valid == '0);
  assign out_cinst = cinst[out_slot];
  assign out_otag  = otag[out_slot];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= '0;
      wait0 <= '0;
      wait1 <= '0;
    end else begin
      wait0 <= w0_now;
      wait1 <= w1_now;
      if (pop && out_valid) valid[out_slot] <= 1'b0;
      if (ins_valid && !full) begin
        valid[ins_slot] <= 1'b1;
        wait0[ins_slot] <= ins_wait0;
        wait1[ins_slot] <= ins_wait1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (ins_valid && !full) begin
      cinst[ins_slot] <= ins_cinst;
      otag[ins_slot]  <= ins_otag;
      tag0[ins_slot]  <= ins_tag0;
      tag1[ins_slot]  <= ins_tag1;
    end
  end

  a_no_ins_full: assert property (@(posedge clk) disable iff (!rst_n) !(ins_valid && full))
    else $error("cinst_bank: insert while full");

endmodule
