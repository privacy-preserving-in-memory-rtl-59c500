// core_controller: turns a C-Inst into a run of micro-instructions for one IMC-PE.
//
// It holds the decoder and the uIM of the paper's core diagram. The decoder maps the
// C-Inst opcode to an address sequence in the uIM: here a start address and a length,
// one entry per opcode, which is programmable (written by OP_UIM_WR with dst[15] set),
// so new HE/GC operations can be added by software as the paper intends. The uIM then
// delivers one micro-instruction per cycle until the end of the sequence.
//
// Before a micro-instruction leaves, the CEM row fields that hold the codes ROW_SRC0,
// ROW_SRC1 or ROW_DST (0xFD..0xFF) are replaced by the low bits of the C-Inst's src0,
// src1 and dst operands. This is how one uIM sequence serves any operand addresses
// ("every IMC core performs the Half-Gate operation using data in their local address
// 0 and address 1"); the reserved-code scheme is this design's choice.
//
// OP_UIM_WR and OP_LUT_WR are carried out in the cycle they are accepted and leave the
// controller idle. Other opcodes:
//   cycle t      C-Inst accepted (cin_valid & ready)
//   cycle t+1    decode; uIM read of the first micro-instruction
//   cycle t+2..  micro-instruction k on ui (ui_valid), one per cycle, len in all
//   cycle t+2+len  done is high for one cycle and ready is high again
// so a one-micro-instruction FreeXOR occupies the core for 3 cycles, as in the paper's
// scheduling example. A sequence of length 0 finishes at t+2.
module core_controller
  import ppimce_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cin_valid,
  input  cinst_t      cin,
  output logic        ready,
  output logic        done,
  // to the IMC-PE
  output logic        ui_valid,
  output uinst_t      ui,
  output logic        lut_we,
  output logic [1:0]  lut_wtbl,
  output logic [7:0]  lut_widx,
  output logic [7:0]  lut_wdata
);

  typedef enum logic [1:0] {S_IDLE, S_DEC, S_RUN} state_e;

  state_e                  state;
  cinst_t                  creg;
  logic [UIM_AW-1:0]       dec_start [16];
  logic [SEQ_LEN_W-1:0]    dec_len   [16];
  logic [UIM_AW-1:0]       ptr;
  logic [SEQ_LEN_W-1:0]    rem;

  logic                    accept;
  logic                    uim_we, uim_re;
  logic [UIM_AW-1:0]       uim_raddr;
  logic [UI_W-1:0]         uim_rdata;

  assign ready  = (state == S_IDLE);
  assign accept = cin_valid && ready;

  // ------------------------------------------------------------ writes on accept
  assign uim_we    = accept && (cin.op == OP_UIM_WR) && !cin.dst[15];
  assign lut_we    = accept && (cin.op == OP_LUT_WR);
  assign lut_wtbl  = cin.src1[1:0];
  assign lut_widx  = cin.src0[7:0];
  assign lut_wdata = cin.imm[7:0];

  micro_imem u_uim (
    .clk   (clk),
    .we    (uim_we),
    .waddr (cin.dst[2 +: UIM_AW]),
    .wchunk(cin.dst[1:0]),
    .wdata ({cin.src1, cin.src0}),
    .re    (uim_re),
    .raddr (uim_raddr),
    .rdata (uim_rdata)
  );

  // ------------------------------------------------------------ sequencing
  always_comb begin
    uim_re    = 1'b0;
    uim_raddr = ptr;
    if (state == S_DEC) begin
      uim_re    = (dec_len[creg.op] != '0);
      uim_raddr = dec_start[creg.op];
    end else if (state == S_RUN && rem > SEQ_LEN_W'(1)) begin
      uim_re    = 1'b1;
      uim_raddr = ptr;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      creg  <= '0;
      ptr   <= '0;
      rem   <= '0;
      done  <= 1'b0;
      for (int i = 0; i < 16; i++) begin
        dec_start[i] <= '0;
        dec_len[i]   <= '0;
      end
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (accept) begin
            if (cin.op == OP_UIM_WR && cin.dst[15]) begin
              dec_start[cin.dst[3:0]] <= cin.src0[UIM_AW-1:0];
              dec_len[cin.dst[3:0]]   <= cin.src1[SEQ_LEN_W-1:0];
            end else if (is_exec_op(cin.op)) begin
              creg  <= cin;
              state <= S_DEC;
            end
          end
        end
        S_DEC: begin
          rem <= dec_len[creg.op];
          ptr <= dec_start[creg.op] + UIM_AW'(1);
          if (dec_len[creg.op] == '0) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            state <= S_RUN;
          end
        end
        S_RUN: begin
          rem <= rem - SEQ_LEN_W'(1);
          if (rem > SEQ_LEN_W'(1)) ptr <= ptr + UIM_AW'(1);
          else begin
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------------ operand substitution
  function automatic logic [ROW_AW-1:0] subst(logic [ROW_AW-1:0] r, cinst_t c);
    if (r == ROW_SRC0) return c.src0[ROW_AW-1:0];
    if (r == ROW_SRC1) return c.src1[ROW_AW-1:0];
    if (r == ROW_DST)  return c.dst[ROW_AW-1:0];
    return r;
  endfunction

  always_comb begin
    ui       = uinst_t'(uim_rdata);
    ui_valid = (state == S_RUN);
    for (int i = 0; i < N_ARR; i++) begin
      ui.cem[i].ra = subst(ui.cem[i].ra, creg);
      ui.cem[i].rb = subst(ui.cem[i].rb, creg);
      ui.cem[i].rd = subst(ui.cem[i].rd, creg);
    end
    if (!ui_valid) ui = '0;
  end

endmodule
