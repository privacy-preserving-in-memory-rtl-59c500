// tb_oa_cam: random allocate / free / search traffic against a software model of
// the CAM (entries, lowest-free allocation, same-cycle free masking, full flag).
module tb_oa_cam;
  import ppimce_pkg::*;
  localparam int D = 16;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, alloc, full, hit0, hit1;
  logic [15:0] alloc_addr, key0, key1;
  logic [3:0] alloc_idx, idx0, idx1;
  logic [D-1:0] free_mask;
  logic [4:0] count;
  int checks = 0, failures = 0;
  bit mv [D];
  logic [15:0] ma [D];

  oa_cam #(.DEPTH(D)) dut (.clk, .rst_n, .alloc, .alloc_addr, .alloc_idx, .full, .free_mask,
                           .key0, .key1, .hit0, .idx0, .hit1, .idx1, .count);

  initial begin
    repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    rst_n = 0; alloc = 0; alloc_addr = 0; key0 = 0; key1 = 0; free_mask = '0;
    for (int i = 0; i < D; i++) mv[i] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int k = 0; k < 3000; k++) begin
      int lowest, n, e0, e1;
      @(negedge clk);
      free_mask = '0;
      for (int i = 0; i < D; i++) if (mv[i] && $urandom_range(0, 3) == 0) free_mask[i] = 1;
      alloc = $urandom_range(0, 1); alloc_addr = 16'($urandom_range(0, 31));
      key0 = 16'($urandom_range(0, 31)); key1 = 16'($urandom_range(0, 31));
      #1;
      lowest = -1; n = 0; e0 = -1; e1 = -1;
      for (int i = D - 1; i >= 0; i--) begin
        if (!mv[i]) lowest = i;
        if (mv[i]) n++;
        if (mv[i] && !free_mask[i] && ma[i] == key0) e0 = i;
        if (mv[i] && !free_mask[i] && ma[i] == key1) e1 = i;
      end
      checks++;
      if (full != (lowest < 0) || (lowest >= 0 && alloc_idx != 4'(lowest)) || count != 5'(n)) begin
        failures++; $display("FAIL alloc: full %0d idx %0d exp %0d count %0d/%0d", full, alloc_idx, lowest, count, n);
      end
      checks++;
      if (hit0 != (e0 >= 0) || (e0 >= 0 && idx0 != 4'(e0)) || hit1 != (e1 >= 0) || (e1 >= 0 && idx1 != 4'(e1))) begin
        failures++; $display("FAIL search key0 %0d hit %0d idx %0d exp %0d", key0, hit0, idx0, e0);
      end
      @(posedge clk);
      for (int i = 0; i < D; i++) if (free_mask[i]) mv[i] = 0;
      if (alloc && lowest >= 0) begin mv[lowest] = 1; ma[lowest] = alloc_addr; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
