// cclight_top -- CC-Light eQASM quantum control processor.
//
// Connects the architectural state of eQASM: instruction memory and PC, data
// memory, GPRs and comparison flags (inside eqasm_core), quantum operation
// target registers (inside eqasm_core), the microcode unit, the timing
// controller with its timing queue, the per-qubit event queues with fast
// conditional execution, the measurement result registers and the execution
// flags.  What lies outside the digital design is brought out as ports:
//   * host side: instruction-memory load port, a second data-memory port, the
//     control-store configuration port, `run`, and status outputs;
//   * qubit side: per-qubit codeword outputs (to the codeword-triggered pulse
//     generators), measurement triggers, and measurement results coming back
//     from the readout/discrimination chain (`meas_res_valid`, `meas_res`).
// Status: `timing_late` (sticky) records a timing point or operation issued
// after its time; `op_conflict` (sticky) records two operations of a bundle on
// one qubit, or a second codeword lost to an overlapping decomposition.
// Timing: one clock; codewords leave one cycle after their timing label is
// released.  The timing domain of the specification ticks in 20 ns cycles
// (QWAIT 10000 = 200 us), so this clock is meant to run at 50 MHz.
module cclight_top
  import eqasm_pkg::*;
#(
  parameter int unsigned IMEM_DEPTH = 32768,
  parameter int unsigned DMEM_DEPTH = 1024,
  parameter int unsigned TQ_DEPTH   = 32,
  parameter int unsigned EQ_DEPTH   = 16,
  localparam int unsigned IAW = $clog2(IMEM_DEPTH),
  localparam int unsigned DAW = $clog2(DMEM_DEPTH)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       run,
  // host: instruction memory load
  input  logic                       host_imem_we,
  input  logic [IAW-1:0]             host_imem_addr,
  input  logic [31:0]                host_imem_wdata,
  // host: data memory
  input  logic                       host_dmem_en,
  input  logic                       host_dmem_we,
  input  logic [DAW-1:0]             host_dmem_addr,
  input  logic [31:0]                host_dmem_wdata,
  output logic [31:0]                host_dmem_rdata,
  // host: control store configuration
  input  logic                       host_uc_we,
  input  qop_t                       host_uc_addr,
  input  ucode_t                     host_uc_data,
  // status
  output logic                       stopped,
  output logic                       timing_late,     // sticky
  output logic                       op_conflict,     // sticky: qubit clash in a bundle or overlapping codewords
  output logic                       retire,          // an instruction completed
  output logic [PC_W-1:0]            pc,              // address of the instruction in execute
  // qubit side
  output logic [NQUBITS-1:0]         cw_valid,
  output cw_t  [NQUBITS-1:0]         cw,
  output logic [NQUBITS-1:0]         meas_trig,
  input  logic [NQUBITS-1:0]         meas_res_valid,
  input  logic [NQUBITS-1:0]         meas_res
);
  logic [PC_W-3:0] imem_addr;
  logic [31:0]     imem_rdata;
  logic            dm_en, dm_we;
  logic [DAW-1:0]  dm_addr;
  logic [31:0]     dm_wdata, dm_rdata;
  qop_t   [1:0]    uc_opcode;
  ucode_t [1:0]    uc_entry;
  logic            tl_close, tq_push, tq_full, emit, late, late_fire, overlap;
  logic            core_conflict, seq_overlap;
  label_t          tq_label, emit_label;
  wait_t           tq_wait;
  logic   [NQUBITS-1:0] ev_push, ev_full, meas_issue, meas_cancel;
  event_t [NQUBITS-1:0] ev_data;
  logic   [NQUBITS-1:0] qmrr_valid, qmrr_value, qmrr_sat;
  logic   [NQUBITS-1:0][3:0] xflags;

  instr_mem #(.DEPTH(IMEM_DEPTH)) u_imem (
    .clk, .rd_addr(IAW'(imem_addr)), .rd_data(imem_rdata),
    .wr_en(host_imem_we), .wr_addr(host_imem_addr), .wr_data(host_imem_wdata)
  );

  data_mem #(.DEPTH(DMEM_DEPTH)) u_dmem (
    .clk,
    .a_en(dm_en), .a_we(dm_we), .a_addr(dm_addr), .a_wdata(dm_wdata), .a_rdata(dm_rdata),
    .b_en(host_dmem_en), .b_we(host_dmem_we), .b_addr(host_dmem_addr),
    .b_wdata(host_dmem_wdata), .b_rdata(host_dmem_rdata)
  );

  eqasm_core #(.DMEM_AW(DAW)) u_core (
    .clk, .rst_n, .run,
    .imem_addr, .imem_rdata,
    .dm_en, .dm_we, .dm_addr, .dm_wdata, .dm_rdata,
    .uc_opcode, .uc_entry,
    .tq_push, .tq_label, .tq_wait, .tq_full,
    .ev_push, .ev_data, .ev_full,
    .meas_issue, .qmrr_valid, .qmrr_value, .qmrr_sat,
    .tl_close, .stopped, .op_conflict(core_conflict), .retire, .pc
  );

  microcode_unit #(.NOPC(512)) u_ucode (
    .clk, .cfg_we(host_uc_we), .cfg_addr(host_uc_addr), .cfg_data(host_uc_data),
    .opcode(uc_opcode), .entry(uc_entry)
  );

  timing_controller #(.DEPTH(TQ_DEPTH)) u_timing (
    .clk, .rst_n,
    .push(tq_push), .push_label(tq_label), .push_wait(tq_wait), .full(tq_full),
    .closed(tl_close), .emit, .emit_label, .late
  );

  event_distributor #(.DEPTH(EQ_DEPTH)) u_events (
    .clk, .rst_n,
    .push(ev_push), .push_data(ev_data), .full(ev_full),
    .emit, .emit_label, .xflags,
    .cw_valid, .cw, .meas_trig, .meas_cancel, .late_fire, .overlap
  );

  qmrr_file u_qmrr (
    .clk, .rst_n,
    .issue(meas_issue), .cancel(meas_cancel),
    .res_valid(meas_res_valid), .res(meas_res),
    .valid(qmrr_valid), .value(qmrr_value), .sat(qmrr_sat)
  );

  exec_flags u_xflags (
    .clk, .rst_n, .res_valid(meas_res_valid), .res(meas_res), .flags(xflags)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      timing_late <= 1'b0;
      seq_overlap <= 1'b0;
    end else begin
      if (late || late_fire) timing_late <= 1'b1;
      if (overlap)           seq_overlap <= 1'b1;
    end
  end
  assign op_conflict = core_conflict || seq_overlap;
endmodule
