// oa_cam: output-address content-addressable memory of the instruction scheduler.
//
// Each valid entry holds the output address of a GC C-Inst that is executing or
// waiting in the C-Inst Bank: that address is "unavailable". An instruction reading an
// address that hits in the CAM must wait. Entries are written when a C-Inst is
// accepted and removed when it completes (the paper's scheme, Fig. 3 walk-through).
//
// Size: 16 KB as in the paper; with a 16-bit address per entry that is 8192 entries.
//
// Ports and timing:
//   alloc       : write addr into the lowest free entry at the clock edge; alloc_idx
//                 (combinational) tells which, full says none is free.
//   free_mask   : one bit per entry; entries whose bit is set are cleared at the edge
//                 (completions). Freed entries are not reused in the same cycle.
//   key0/key1   : two parallel searches (an instruction's two input addresses).
//                 hitN/idxN are combinational; entries being freed in this cycle do not
//                 hit, so a completing producer releases its consumer in the same cycle
//                 (as in cycle 4 of the paper's example). If several entries match,
//                 idxN is the lowest; with single-assignment wire addresses, as a GC
//                 circuit compiler produces, at most one does.
module oa_cam
  import ppimce_pkg::*;
#(
  parameter int unsigned DEPTH = 16384 / (ADDR_W / 8),
  localparam int unsigned IW   = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              alloc,
  input  logic [ADDR_W-1:0] alloc_addr,
  output logic [IW-1:0]     alloc_idx,
  output logic              full,
  input  logic [DEPTH-1:0]  free_mask,
  input  logic [ADDR_W-1:0] key0,
  input  logic [ADDR_W-1:0] key1,
  output logic              hit0,
  output logic [IW-1:0]     idx0,
  output logic              hit1,
  output logic [IW-1:0]     idx1,
  output logic [IW:0]       count
);

  logic [DEPTH-1:0]  valid;
  logic [ADDR_W-1:0] addr [DEPTH];

  always_comb begin
    full      = 1'b1;
    alloc_idx = '0;
    for (int i = DEPTH - 1; i >= 0; i--) begin
      if (!valid[i]) begin
        full      = 1'b0;
        alloc_idx = IW'(i);
      end
    end
  end

  always_comb begin
    hit0 = 1'b0; idx0 = '0;
    hit1 = 1'b0; idx1 = '0;
    for (int i = DEPTH - 1; i >= 0; i--) begin
      if (valid[i] && !free_mask[i] && addr[i] == key0) begin hit0 = 1'b1; idx0 = IW'(i); end
      if (valid[i] && !free_mask[i] && addr[i] == key1) begin hit1 = 1'b1; idx1 = IW'(i); end
    end
  end

  always_comb begin
    count = '0;
    for (int i = 0; i < DEPTH; i++) count += (IW+1)'(valid[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= '0;
    end else begin
      valid <= valid & ~free_mask;
      if (alloc && !full) valid[alloc_idx] <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (alloc && !full) addr[alloc_idx] <= alloc_addr;
  end

  // A completion may only free an entry that is in use.
  a_free_valid: assert property (@(posedge clk) disable iff (!rst_n) (free_mask & ~valid) == '0)
    else $error("oa_cam: freeing an unused entry");

endmodule
