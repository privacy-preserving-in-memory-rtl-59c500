// imc_pe: the in-memory processing element of one IMC core.
//
// Structure (as in the paper's core diagram): four CEM arrays, a memory output buffer,
// the shifter, a shifter output buffer, the LUT fabric, a LUT output buffer, and a
// write driver that can put the CEM result, the shifter output buffer or the LUT
// output buffer back into a CEM array row.
//
// One micro-instruction arrives per cycle and all of its fields act in that cycle, in
// parallel, on what each unit's input holds at that moment (the core controller's
// static schedule is responsible for the order):
//   CEM array i (if en): res_i = fn(row ra, row rb); memory output buffer lane i <= res_i;
//                        row rd <= {res_i | shifter buffer lane i | LUT buffer lane i}
//                        as selected by wsrc (WS_NONE: no write)
//   shifter    (if en):  shifter output buffer <= shift(memory output buffer)
//   LUT fabric (if en):  LUT output buffer     <= lookup(shifter output buffer)
// So a value goes CEM -> shifter -> LUT in three successive micro-instructions and is
// written back in a fourth. The host port (host_we / host_row / host_wdata, 128 bits
// across the four arrays) is this design's way of loading data from main memory and
// reading results; a host write takes priority over a micro-instruction write in the
// same cycle. host_rdata is combinational. Buffers reset to zero.
module imc_pe
  import ppimce_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              ui_valid,
  input  uinst_t            ui,
  // LUT table write
  input  logic              lut_we,
  input  logic [1:0]        lut_wtbl,
  input  logic [7:0]        lut_widx,
  input  logic [7:0]        lut_wdata,
  // host access
  input  logic              host_we,
  input  logic [ROW_AW-1:0] host_row,
  input  logic [LINE_W-1:0] host_wdata,
  output logic [LINE_W-1:0] host_rdata,
  // buffers, for observation
  output logic [LINE_W-1:0] mem_buf,
  output logic [LINE_W-1:0] sh_buf,
  output logic [LINE_W-1:0] lut_buf
);

  logic [LINE_W-1:0] res, sh_out, lut_out;
  logic [N_ARR-1:0]  we;
  logic [ROW_AW-1:0] wa [N_ARR];
  logic [WORD_W-1:0] wd [N_ARR];

  for (genvar i = 0; i < N_ARR; i++) begin : g_arr
    // write driver
    always_comb begin
      we[i] = 1'b0;
      wa[i] = ui.cem[i].rd;
      wd[i] = res[WORD_W*i +: WORD_W];
      if (host_we) begin
        we[i] = 1'b1;
        wa[i] = host_row;
        wd[i] = host_wdata[WORD_W*i +: WORD_W];
      end else if (ui_valid && ui.cem[i].en) begin
        we[i] = (ui.cem[i].wsrc != WS_NONE);
        unique case (ui.cem[i].wsrc)
          WS_SHIFT: wd[i] = sh_buf[WORD_W*i +: WORD_W];
          WS_LUT:   wd[i] = lut_buf[WORD_W*i +: WORD_W];
          default:  wd[i] = res[WORD_W*i +: WORD_W];
        endcase
      end
    end

    cem_array u_cem (
      .clk   (clk),
      .ra    (ui.cem[i].ra),
      .rb    (ui.cem[i].rb),
      .fn    (ui.cem[i].fn),
      .op_res(res[WORD_W*i +: WORD_W]),
      .we    (we[i]),
      .wa    (wa[i]),
      .wd    (wd[i]),
      .ha    (host_row),
      .hq    (host_rdata[WORD_W*i +: WORD_W])
    );

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)                             mem_buf[WORD_W*i +: WORD_W] <= '0;
      else if (ui_valid && ui.cem[i].en)      mem_buf[WORD_W*i +: WORD_W] <= res[WORD_W*i +: WORD_W];
    end
  end

  shifter u_shifter (
    .din (mem_buf),
    .cls (ui.shft.cls),
    .arg (ui.shft.arg),
    .dout(sh_out)
  );

  lut_fabric u_lut (
    .clk  (clk),
    .din  (sh_buf),
    .mode (ui.lut.mode),
    .dout (lut_out),
    .we   (lut_we),
    .wtbl (lut_wtbl),
    .widx (lut_widx),
    .wdata(lut_wdata)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sh_buf  <= '0;
      lut_buf <= '0;
    end else if (ui_valid) begin
      if (ui.shft.en)  sh_buf  <= sh_out;
      if (ui.lut.en) lut_buf <= lut_out;
    end
  end

endmodule
