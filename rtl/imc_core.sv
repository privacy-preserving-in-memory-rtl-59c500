// imc_core: one IMC core = core controller + IMC-PE.
//
// The core accepts a C-Inst when ready, runs its micro-instruction sequence on the
// IMC-PE and raises done for one cycle when the last micro-instruction has executed
// (timing in core_controller). The host port reaches the four CEM arrays directly
// (128 bits per row). Cores keep no state between C-Insts other than their memories,
// so all cores given the same C-Inst run in lockstep.
module imc_core
  import ppimce_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cin_valid,
  input  cinst_t            cin,
  output logic              ready,
  output logic              done,
  input  logic              host_we,
  input  logic [ROW_AW-1:0] host_row,
  input  logic [LINE_W-1:0] host_wdata,
  output logic [LINE_W-1:0] host_rdata
);

  logic       ui_valid;
  uinst_t     ui;
  logic       lut_we;
  logic [1:0] lut_wtbl;
  logic [7:0] lut_widx, lut_wdata;
  logic [LINE_W-1:0] mem_buf, sh_buf, lut_buf;

  core_controller u_ctrl (
    .clk, .rst_n, .cin_valid, .cin, .ready, .done,
    .ui_valid, .ui, .lut_we, .lut_wtbl, .lut_widx, .lut_wdata
  );

  imc_pe u_pe (
    .clk, .rst_n, .ui_valid, .ui,
    .lut_we, .lut_wtbl, .lut_widx, .lut_wdata,
    .host_we, .host_row, .host_wdata, .host_rdata,
    .mem_buf, .sh_buf, .lut_buf
  );

endmodule
