// eqasm_core -- instruction pipeline of the CC-Light eQASM processor.
//
// Fetches 32-bit eQASM words from the instruction memory and executes them in
// order.  Two stages: F presents the byte PC (bits [16:2]) to the
// synchronous instruction memory; X decodes the returned word, reads the GPRs,
// executes and writes back in the same cycle.  A taken BR sends the target to
// the memory instead of PC+4, so no instruction after a taken branch is
// executed (no branch delay slot, as specified).  X stalls, holding the
// instruction and re-reading its address, when
//   * LD waits one cycle for the synchronous data memory (LD takes 2 cycles),
//   * FMR waits until the measurement-result register of the qubit is valid,
//   * a quantum instruction finds the timing queue, a target qubit's event
//     queue or a qubit's measurement counter full,
//   * STOP has executed (it repeats itself forever; `stopped` goes high).
// All other instructions take one cycle.  Because results are written at the
// end of X, every dependence (GPR, comparison flags, FMR) is resolved in
// hardware; the compiler spacing rules of the specification (one instruction
// between CMP and BR/FBR, two between a measurement and FMR) are harmless here.
//
// Quantum side.  The core keeps the current timing label.  QWAIT/QWAITR and a
// bundle word with PI > 0 increment it and push {label, interval} to the
// timing controller.  SMIS/SMIT write the target registers (the low five bits
// of the 6-bit Sd/Td field address them).  For each of the two operation
// slots of a bundle word with a non-zero opcode the microcode unit is read and
// the S or T register (as the control-store entry says) is expanded to the
// qubits it selects; each selected qubit receives one event record in its
// event queue, stamped with the current label.  A pair's source gets
// `cw_src`, its target `cw_tgt` (and likewise `cw2_src`/`cw2_tgt` with
// `dly2` for a two-codeword decomposition).  If both slots select one qubit slot 0 wins
// and `op_conflict` is set (sticky).  A measurement event also tells the
// measurement-result registers that a result is outstanding.
//
// `tl_close` tells the timing controller that the open timing point may be
// released: the core has stopped, or FMR is waiting for a result.
//
// `uc_opcode` is taken straight from the instruction word returned by the
// instruction memory (bits [30:22] and [16:8]); the control store is read in
// the same X cycle, so these 18 output bits depend on an input without logic
// in between.  This is intended, not a passthrough of the block.
//
// `run` low holds the core at PC 0 with nothing in flight; the host raises it
// after loading the memories and configuration.
module eqasm_core
  import eqasm_pkg::*;
#(
  parameter int unsigned DMEM_AW = 10
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       run,
  // instruction memory fetch port
  output logic [PC_W-3:0]            imem_addr,
  input  logic [31:0]                imem_rdata,
  // data memory port
  output logic                       dm_en,
  output logic                       dm_we,
  output logic [DMEM_AW-1:0]         dm_addr,
  output logic [31:0]                dm_wdata,
  input  logic [31:0]                dm_rdata,
  // microcode unit
  output qop_t   [1:0]               uc_opcode,
  input  ucode_t [1:0]               uc_entry,
  // timing controller
  output logic                       tq_push,
  output label_t                     tq_label,
  output wait_t                      tq_wait,
  input  logic                       tq_full,
  // event queues
  output logic   [NQUBITS-1:0]       ev_push,
  output event_t [NQUBITS-1:0]       ev_data,
  input  logic   [NQUBITS-1:0]       ev_full,
  // measurement result registers
  output logic   [NQUBITS-1:0]       meas_issue,
  input  logic   [NQUBITS-1:0]       qmrr_valid,
  input  logic   [NQUBITS-1:0]       qmrr_value,
  input  logic   [NQUBITS-1:0]       qmrr_sat,
  // status
  output logic                       tl_close,   // no more ops for the open timing point
  output logic                       stopped,
  output logic                       op_conflict,
  output logic                       retire,
  output logic [PC_W-1:0]            pc
);
  // ---------------------------------------------------------------- fetch
  logic [PC_W-1:0] pc_f, pc_x, br_target, next_addr;
  logic            x_valid, stall, taken;
  logic [31:0]     ir;

  assign ir = imem_rdata;
  assign pc = pc_x;

  always_comb begin
    if (stall)      next_addr = pc_x;
    else if (taken) next_addr = br_target;
    else            next_addr = pc_f;
  end
  assign imem_addr = run ? next_addr[PC_W-1:2] : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc_f    <= '0;
      pc_x    <= '0;
      x_valid <= 1'b0;
    end else if (!run) begin
      pc_f    <= '0;
      pc_x    <= '0;
      x_valid <= 1'b0;
    end else if (!stall) begin
      pc_x    <= next_addr;
      pc_f    <= next_addr + PC_W'(4);
      x_valid <= 1'b1;
    end
  end

  // ---------------------------------------------------------------- decode
  logic [5:0] op;
  logic       is_bundle;
  logic [4:0] f_rd, f_rs, f_rt;
  assign is_bundle = ir[31];
  assign op        = ir[30:25];
  assign f_rd      = ir[24:20];
  assign f_rs      = ir[19:15];
  assign f_rt      = ir[14:10];

  logic v;                      // a valid single-format instruction in X
  assign v = x_valid && run && !is_bundle;
  logic vb;                     // a valid bundle word in X
  assign vb = x_valid && run && is_bundle;

  // ---------------------------------------------------------------- GPRs, ALU, flags
  logic [XLEN-1:0] rs_val, rt_val, alu_res, wb_data;
  logic [NCFLAGS-1:0] cmp_flags;
  logic            gpr_we, cf_sel_flag;
  logic [4:0]      wb_addr;
  alu_op_e         alu_op;

  gpr_file #(.NREGS(NGPR), .WIDTH(XLEN)) u_gpr (
    .clk, .rst_n,
    .rs_addr(f_rs), .rs_data(rs_val),
    .rt_addr(f_rt), .rt_data(rt_val),
    .we(gpr_we), .wd_addr(wb_addr), .wd_data(wb_data)
  );

  always_comb begin
    unique case (op)
      OP_SUB:  alu_op = ALU_SUB;
      OP_AND:  alu_op = ALU_AND;
      OP_OR:   alu_op = ALU_OR;
      OP_XOR:  alu_op = ALU_XOR;
      OP_NOT:  alu_op = ALU_NOT;
      default: alu_op = ALU_ADD;
    endcase
  end

  alu u_alu (.op(alu_op), .rs(rs_val), .rt(rt_val), .result(alu_res), .flags(cmp_flags));

  comp_flags u_cf (
    .clk, .rst_n,
    .we(v && op == OP_CMP), .flags_in(cmp_flags),
    .sel(ir[3:0]), .flag(cf_sel_flag)
  );

  // ---------------------------------------------------------------- target registers
  logic [1:0][4:0]         qreg;
  logic [1:0][NQUBITS-1:0] s_mask;
  logic [1:0][NPAIRS-1:0]  t_mask;
  assign qreg[0] = ir[21:17];
  assign qreg[1] = ir[7:3];

  qotr_file u_qotr (
    .clk, .rst_n,
    .s_we(v && op == OP_SMIS), .s_waddr(ir[23:19]), .s_wdata(ir[6:0]),
    .t_we(v && op == OP_SMIT), .t_waddr(ir[23:19]), .t_wdata(ir[15:0]),
    .raddr(qreg), .s_rdata(s_mask), .t_rdata(t_mask)
  );

  logic [1:0][NQUBITS-1:0] p_src, p_tgt;
  logic [1:0]              p_conf;
  for (genvar k = 0; k < 2; k++) begin : g_pair
    pair_mask_decoder u_pd (.mask(t_mask[k]), .src(p_src[k]), .tgt(p_tgt[k]),
                            .conflict(p_conf[k]));
  end

  // ---------------------------------------------------------------- quantum issue
  label_t                  cur_label, new_label;
  logic [2:0]              pi;
  logic [1:0][NQUBITS-1:0] sel;       // qubits each slot acts on
  event_t [1:0][NQUBITS-1:0] slot_ev;
  logic [NQUBITS-1:0]      q_sel, q_meas;
  logic                    q_block, slot_clash;

  assign pi        = ir[2:0];
  assign new_label = cur_label + label_t'(1);
  assign uc_opcode[0] = ir[30:22];
  assign uc_opcode[1] = ir[16:8];

  always_comb begin
    for (int k = 0; k < 2; k++) begin
      for (int q = 0; q < NQUBITS; q++) begin
        slot_ev[k][q].label   = (pi != 3'd0) ? new_label : cur_label;
        slot_ev[k][q].cond    = uc_entry[k].cond;
        slot_ev[k][q].is_meas = uc_entry[k].is_meas;
        slot_ev[k][q].cw      = (uc_entry[k].two_qubit && p_tgt[k][q]) ?
                                uc_entry[k].cw_tgt : uc_entry[k].cw_src;
        slot_ev[k][q].dly2    = uc_entry[k].dly2;
        slot_ev[k][q].cw2     = (uc_entry[k].two_qubit && p_tgt[k][q]) ?
                                uc_entry[k].cw2_tgt : uc_entry[k].cw2_src;
      end
      if (uc_opcode[k] == '0)          sel[k] = '0;          // QNOP
      else if (uc_entry[k].two_qubit)  sel[k] = p_src[k] | p_tgt[k];
      else                             sel[k] = s_mask[k];
    end
    q_sel      = sel[0] | sel[1];
    slot_clash = |(sel[0] & sel[1]);
    for (int q = 0; q < NQUBITS; q++) begin
      ev_data[q] = sel[0][q] ? slot_ev[0][q] : slot_ev[1][q];
      q_meas[q]  = q_sel[q] && ev_data[q].is_meas;
    end
    q_block = ((pi != 3'd0) && tq_full) || |(q_sel & ev_full) || |(q_meas & qmrr_sat);
  end

  assign ev_push    = (vb && !q_block) ? q_sel  : '0;
  assign meas_issue = (vb && !q_block) ? q_meas : '0;

  // ---------------------------------------------------------------- timing points
  always_comb begin
    tq_push  = 1'b0;
    tq_label = new_label;
    tq_wait  = '0;
    if (v && op == OP_QWAIT) begin
      tq_push = 1'b1;
      tq_wait = ir[19:0];
    end else if (v && op == OP_QWAITR) begin
      tq_push = 1'b1;
      tq_wait = rs_val[19:0];
    end else if (vb && pi != 3'd0) begin
      tq_push = !q_block;
      tq_wait = wait_t'(pi);
    end
    if (tq_full) tq_push = 1'b0;
  end

  // ---------------------------------------------------------------- execute / stall
  logic ld_wait;      // LD: data memory read issued, result next cycle
  logic fmr_ok;
  assign fmr_ok = (ir[2:0] != 3'd7) && qmrr_valid[ir[2:0]];

  always_comb begin
    stall = 1'b0;
    if (vb) stall = q_block;
    else if (v) begin
      unique case (op)
        OP_LD:              stall = !ld_wait;
        OP_FMR:             stall = !fmr_ok;
        OP_QWAIT, OP_QWAITR: stall = tq_full;
        OP_STOP:            stall = 1'b1;
        default:            stall = 1'b0;
      endcase
    end
  end

  // While FMR waits, no operation can join the open timing point; letting the
  // timing controller release it avoids waiting for a measurement that is
  // itself held in that timing point.
  assign tl_close  = stopped || (v && op == OP_FMR && !fmr_ok);

  assign br_target = pc_x + {ir[18:4], 2'b00};   // Imm21[14:0] << 2
  assign taken     = v && op == OP_BR && cf_sel_flag;
  assign retire    = (v || vb) && !stall;

  // data memory: byte address Rt + SignExt(Imm10), word aligned
  logic [XLEN-1:0] ea;   // only bits [DMEM_AW+1:2] address the word memory
  assign ea       = rt_val + {{22{ir[9]}}, ir[9:0]};
  assign dm_addr  = ea[DMEM_AW+1:2];
  assign dm_wdata = rs_val;
  assign dm_en    = v && ((op == OP_LD && !ld_wait) || op == OP_ST);
  assign dm_we    = v && op == OP_ST;

  // write-back
  always_comb begin
    gpr_we  = 1'b0;
    wb_addr = f_rd;
    wb_data = alu_res;
    if (v && !stall) begin
      unique case (op)
        OP_ADD, OP_SUB, OP_AND, OP_OR, OP_XOR, OP_NOT: gpr_we = 1'b1;
        OP_LDI:  begin gpr_we = 1'b1; wb_data = {{12{ir[19]}}, ir[19:0]}; end
        OP_LDUI: begin gpr_we = 1'b1; wb_data = {ir[14:0], rs_val[16:0]}; end
        OP_FBR:  begin gpr_we = 1'b1; wb_data = XLEN'(cf_sel_flag); end
        OP_FMR:  begin gpr_we = 1'b1; wb_data = XLEN'(qmrr_value[ir[2:0]]); end
        OP_LD:   begin gpr_we = 1'b1; wb_data = dm_rdata; end
        default: gpr_we = 1'b0;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ld_wait     <= 1'b0;
      cur_label   <= '0;
      stopped     <= 1'b0;
      op_conflict <= 1'b0;
    end else if (!run) begin
      ld_wait     <= 1'b0;
    end else begin
      ld_wait <= v && op == OP_LD && !ld_wait;
      if (tq_push) cur_label <= new_label;
      if (v && op == OP_STOP) stopped <= 1'b1;
      if (vb && !q_block && (slot_clash ||
          (uc_opcode[0] != '0 && uc_entry[0].two_qubit && p_conf[0]) ||
          (uc_opcode[1] != '0 && uc_entry[1].two_qubit && p_conf[1])))
        op_conflict <= 1'b1;
    end
  end
endmodule
