// FREP sequencer: sits between an integer control core and its FPU.
//
// Instructions offloaded by the core (inp_*) are binned by the decoder:
//   * FREPs go to the nest controller, which records them as loops;
//   * FP-only instructions are written into the ring buffer, from which they
//     are issued, and re-issued as long as they belong to an active loop;
//   * instructions that read or write the integer register file bypass the
//     sequencer and go straight to the FPU (oup_*). To keep program order
//     they pass only while the sequencer is idle: ring buffer drained and no
//     loop nest configured.
// The output mux takes the ring buffer's instruction whenever the sequencer is
// not idle. With a nest configured, the ring buffer delivers one instruction
// per cycle whenever it holds one and the FPU is ready, including across loop
// boundaries, so a whole matmul tile written as two nested frep.o runs with no
// loop-handling instructions. Latency: an FP-only instruction is issued at
// the earliest one cycle after it is accepted; a bypassing instruction passes
// combinationally.
//
// Handshakes are valid/ready on both sides. op_a carries the integer operand
// (rs1 value) with the instruction; for an FREP it is the iteration count
// minus one. The split into decoder, ring buffer, nest controller and N loop
// controllers follows the paper; the idle condition for the bypass, the
// ring-buffer depth and N = 4 are this design's choices.
module frep_sequencer
  import zonl_pkg::*;
#(
  parameter int unsigned N     = 4,
  parameter int unsigned Depth = 32,
  localparam int unsigned IdxW = $clog2(N + 1)
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  // from the integer core
  input  logic        inp_valid_i,
  output logic        inp_ready_o,
  input  instr_t      inp_instr_i,
  input  logic [31:0] inp_op_a_i,
  // to the FPU
  output logic        oup_valid_o,
  input  logic        oup_ready_i,
  output instr_t      oup_instr_o,
  output logic [31:0] oup_op_a_o,
  // status
  output logic        busy_o,
  output logic        seq_next_o,
  output logic        rewind_o,
  output logic        nest_ends_o,
  output logic        frep_stall_o,
  output logic [IdxW-1:0] loop_idx_o
);

  localparam int unsigned PtrW = $clog2(Depth) + 1;

  inst_cat_e       cat;
  frep_cfg_t       frep_cfg;
  logic            frep_ready, w_ready, r_valid, seq_next, nest_busy, idle;
  logic [PtrW-1:0] rb_wptr, rb_raddr, rb_tail;
  instr_t          r_instr;
  logic            inst_path_sel;   // 1: ring buffer drives the output

  frep_decoder i_decoder (
    .instr_i (inp_instr_i),
    .op_a_i  (inp_op_a_i),
    .cat_o   (cat),
    .cfg_o   (frep_cfg)
  );

  frep_ring_buffer #(.Depth(Depth)) i_rb (
    .clk_i,
    .rst_ni,
    .w_valid_i  (inp_valid_i && cat == CatLoop),
    .w_ready_o  (w_ready),
    .w_instr_i  (inp_instr_i),
    .rb_wptr_o  (rb_wptr),
    .rb_raddr_i (rb_raddr),
    .rb_tail_i  (rb_tail),
    .r_valid_o  (r_valid),
    .r_ready_i  (oup_ready_i && inst_path_sel),
    .r_instr_o  (r_instr),
    .seq_next_o (seq_next)
  );

  frep_nest_ctrl #(.N(N), .Depth(Depth)) i_nest_ctrl (
    .clk_i,
    .rst_ni,
    .frep_valid_i (inp_valid_i && cat == CatFrep),
    .frep_ready_o (frep_ready),
    .frep_cfg_i   (frep_cfg),
    .rb_wptr_i    (rb_wptr),
    .seq_next_i   (seq_next),
    .rb_raddr_o   (rb_raddr),
    .rb_tail_o    (rb_tail),
    .busy_o       (nest_busy),
    .loop_cnt_o   (),
    .loop_idx_o   (loop_idx_o),
    .rewind_o     (rewind_o),
    .nest_ends_o  (nest_ends_o)
  );

  assign idle          = !r_valid && !nest_busy;
  assign inst_path_sel = !idle;

  // frep buffer direct: input demux
  always_comb begin
    unique case (cat)
      CatFrep:  inp_ready_o = frep_ready;
      CatLoop:  inp_ready_o = w_ready;
      default:  inp_ready_o = idle && oup_ready_i;
    endcase
  end

  // output mux
  assign oup_valid_o = inst_path_sel ? r_valid : (inp_valid_i && cat == CatDirect);
  assign oup_instr_o = inst_path_sel ? r_instr : inp_instr_i;
  assign oup_op_a_o  = inst_path_sel ? '0 : inp_op_a_i;

  assign busy_o       = !idle;
  assign seq_next_o   = seq_next;
  assign frep_stall_o = inp_valid_i && cat == CatFrep && !frep_ready;

endmodule
