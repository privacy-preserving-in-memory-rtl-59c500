// tb_cem_array: checks every CEM function code on random rows against a software
// copy of the array, the write port, and the host read port.
module tb_cem_array;
  import ppimce_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [7:0] ra, rb, wa, ha;
  cem_fn_e fn;
  logic [31:0] op_res, wd, hq;
  logic we;
  int checks = 0, failures = 0;
  logic [31:0] model [256];

  cem_array dut (.clk, .ra, .rb, .fn, .op_res, .we, .wa, .wd, .ha, .hq);

  function automatic logic [31:0] ref_op(cem_fn_e f, logic [31:0] a, logic [31:0] b);
    case (f)
      CEM_READ: return a;
      CEM_AND:  return a & b;
      CEM_OR:   return a | b;
      CEM_XOR:  return a ^ b;
      CEM_NOT:  return ~a;
      CEM_ADD:  return a + b;
      CEM_ADDC: return a + b + 1;
      default:  return b;
    endcase
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; ra = 0; rb = 0; wa = 0; ha = 0; wd = 0; fn = CEM_READ;
    for (int i = 0; i < 256; i++) begin
      @(negedge clk); we = 1; wa = 8'(i); wd = $urandom; model[i] = wd;
    end
    @(negedge clk); we = 0;
    for (int k = 0; k < 400; k++) begin
      @(negedge clk);
      ra = 8'($urandom); rb = 8'($urandom); fn = cem_fn_e'(k % 8); ha = 8'($urandom);
      #1;
      checks++;
      if (op_res !== ref_op(fn, model[ra], model[rb])) begin
        failures++; $display("FAIL fn=%0d ra=%0d rb=%0d got %h", fn, ra, rb, op_res);
      end
      checks++;
      if (hq !== model[ha]) failures++;
      // write back the result, as the write driver would
      we = 1; wa = 8'($urandom); wd = op_res;
      @(posedge clk); #1; model[wa] = wd; we = 0;
    end
    // subtraction as the paper does it: NOT the subtrahend, then ADD with carry-in 1
    for (int k = 0; k < 50; k++) begin
      logic [31:0] x, y, ny;
      x = $urandom; y = $urandom;
      @(negedge clk); we = 1; wa = 8'd10; wd = x; @(negedge clk); wa = 8'd11; wd = y;
      @(negedge clk); we = 0; ra = 8'd11; fn = CEM_NOT; #1; ny = op_res;
      we = 1; wa = 8'd12; wd = ny; @(negedge clk); we = 0;
      ra = 8'd10; rb = 8'd12; fn = CEM_ADDC; #1;
      checks++;
      if (op_res !== x - y) begin failures++; $display("FAIL sub %h-%h got %h", x, y, op_res); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
