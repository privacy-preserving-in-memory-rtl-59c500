// tb_micro_imem: writes random micro-instructions chunk by chunk and reads them back,
// checking the one-cycle read latency and that a chunk write leaves the others alone.
module tb_micro_imem;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we, re;
  logic [9:0] waddr, raddr;
  logic [1:0] wchunk;
  logic [31:0] wdata;
  logic [127:0] rdata;
  logic [127:0] model [1024];
  int checks = 0, failures = 0;

  micro_imem dut (.clk, .we, .waddr, .wchunk, .wdata, .re, .raddr, .rdata);

  initial begin
    repeat (50000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    we = 0; re = 0; waddr = 0; raddr = 0; wchunk = 0; wdata = 0;
    for (int a = 0; a < 1024; a++)
      for (int c = 0; c < 4; c++) begin
        @(negedge clk); we = 1; waddr = 10'(a); wchunk = 2'(c); wdata = $urandom;
        model[a][32*c +: 32] = wdata;
      end
    @(negedge clk); we = 0;
    // overwrite one chunk of a few words
    for (int k = 0; k < 50; k++) begin
      @(negedge clk); we = 1; waddr = 10'($urandom); wchunk = 2'($urandom); wdata = $urandom;
      model[waddr][32*wchunk +: 32] = wdata;
    end
    @(negedge clk); we = 0;
    for (int k = 0; k < 500; k++) begin
      @(negedge clk); re = 1; raddr = 10'($urandom);
      @(posedge clk); #1; re = 0;
      checks++;
      if (rdata !== model[raddr]) begin failures++; $display("FAIL addr %0d", raddr); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
