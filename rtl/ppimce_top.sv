// ppimce_top: the in-memory computing engine for homomorphic encryption (HE) and
// garbled circuits (GC).
//
// N_CORES IMC cores sit behind one IMC-Instruction Scheduler. For GC work the cores
// form N_UNITS GC computing units of N_CORES/N_UNITS consecutive cores; all cores of
// a unit execute the same C-Inst on their own local data (384 GC gates in parallel
// per unit at the default size, 512 at the paper's). For HE work a C-Inst goes to every core, so one
// C-Inst operates on all N_CORES coefficients of a polynomial, coefficient i being
// held by core i at the same row. The paper's engine has 8192 cores in 16 units of
// 512, with a 16 KB OA-CAM and a 16 KB C-Inst Bank. The unit count and the two
// scheduler memories keep those defaults; N_CORES defaults to 6144 (16 units of 384
// cores) because elaborating the cores takes about 2.1 MB of lint-tool memory per
// core and, together with a synthesis front end running alongside, 8192 cores
// would not fit in 32 GiB. Set N_CORES = 8192 for the paper's size; nothing else
// changes.
//
// Ports:
//   in_valid / in_cinst / in_ready : C-Inst stream from the host RISC-V processor
//                                    (not part of this design), one per cycle.
//   host_* : word access to the CEM arrays, where the main-memory interface (also
//            not part of this design) would connect. host_we writes row host_row of
//            core host_core, or of every core when host_bcast is set; host_rdata is
//            row host_row of core host_core (combinational).
//   idle and the cnt_* counters report the scheduler's state (see imc_is).
// Timing: see imc_is (issue) and core_controller (execution: a C-Inst whose uIM
// sequence is L micro-instructions long keeps its unit busy for L+2 cycles).
// A unit reports done when all of its cores do; they run in lockstep.
module ppimce_top
  import ppimce_pkg::*;
#(
  parameter int unsigned N_CORES    = 6144,
  parameter int unsigned N_UNITS    = 16,
  parameter int unsigned BANK_DEPTH = 16384 / (CINST_W / 8),
  parameter int unsigned CAM_DEPTH  = 16384 / (ADDR_W / 8),
  localparam int unsigned CPU       = N_CORES / N_UNITS,
  localparam int unsigned CW        = (N_CORES > 1) ? $clog2(N_CORES) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  cinst_t            in_cinst,
  output logic              in_ready,
  input  logic              host_we,
  input  logic              host_bcast,
  input  logic [CW-1:0]     host_core,
  input  logic [ROW_AW-1:0] host_row,
  input  logic [LINE_W-1:0] host_wdata,
  output logic [LINE_W-1:0] host_rdata,
  output logic              idle,
  output logic [31:0]       cnt_direct,
  output logic [31:0]       cnt_banked,
  output logic [31:0]       cnt_from_bank,
  output logic [31:0]       cnt_dep_wait,
  output logic [31:0]       cnt_unit_wait,
  output logic [31:0]       cnt_broadcast
);

  logic [N_UNITS-1:0] unit_valid, unit_done;
  cinst_t             unit_cinst;
  logic [N_CORES-1:0] core_done;
  logic [LINE_W-1:0]  core_rdata [N_CORES];

  imc_is #(
    .N_UNITS(N_UNITS), .BANK_DEPTH(BANK_DEPTH), .CAM_DEPTH(CAM_DEPTH)
  ) u_is (
    .clk, .rst_n, .in_valid, .in_cinst, .in_ready,
    .unit_valid, .unit_cinst, .unit_done,
    .idle, .cnt_direct, .cnt_banked, .cnt_from_bank,
    .cnt_dep_wait, .cnt_unit_wait, .cnt_broadcast
  );

  for (genvar c = 0; c < N_CORES; c++) begin : g_core
    logic ready_unused;
    imc_core u_core (
      .clk, .rst_n,
      .cin_valid (unit_valid[c / CPU]),
      .cin       (unit_cinst),
      .ready     (ready_unused),
      .done      (core_done[c]),
      .host_we   (host_we && (host_bcast || host_core == CW'(c))),
      .host_row  (host_row),
      .host_wdata(host_wdata),
      .host_rdata(core_rdata[c])
    );
  end

  for (genvar u = 0; u < N_UNITS; u++) begin : g_unit
    assign unit_done[u] = &core_done[u*CPU +: CPU];
  end

  assign host_rdata = core_rdata[host_core];

endmodule
