// FREP nest controller with its N loop controllers.
//
// Builds a loop nest dynamically from incoming FREPs and steers the ring
// buffer's read pointer so that the nest issues at one instruction per cycle,
// with no cycle lost on entering or leaving loops, even when several loops
// start or end on the same instruction.
//
// * Configuration: an accepted FREP (frep_valid & frep_ready) stores its
//   frep_cfg together with the ring buffer's write pointer rb_wptr (the loop
//   base, where its first body instruction will be written) in slot loop_cnt,
//   and loop_cnt increments. A FREP is held off ("stall non-nested") while N
//   loops are configured, or while one is configured and the FREP lies past
//   the body of the innermost configured loop, since it then cannot nest.
// * Issue: on each seq_next (an instruction leaves the ring buffer at
//   rb_raddr) the starting loops detector extends the registered loop index to
//   the loops that start on this instruction; loop i's controller increments
//   if it contains the instruction and every loop inside it is in its last
//   iteration (inner loops in last iteration detector), so body
//   instructions of an inner loop are counted once by the outer loops. The
//   ending loops detector then finds the innermost non-ending loop (inel). If
//   it is at its last instruction the read pointer rewinds to its base,
//   otherwise it advances by one; if every loop ends (nest_ends) the nest is
//   cleared and later FREPs may start a new one.
// * Ring-buffer space: rb_tail is the oldest instruction that may still be
//   re-issued: the outermost loop's base while inside the nest, else rb_raddr.
// All state updates on the clock edge; all decisions are combinational within
// the issuing cycle.
//
// Follows the paper's description of the nest controller and loop controllers
// (names loop_cnt, loop_idx, incr, isl, inel, nest_ends, rewind). This
// design's own choices: loop_idx counts loops entered (0 = none) rather than
// holding a loop number, the detectors work on the instruction being issued,
// and a FREP that arrives in the cycle the nest ends waits one cycle.
module frep_nest_ctrl
  import zonl_pkg::*;
#(
  parameter int unsigned N     = 4,
  parameter int unsigned Depth = 32,
  localparam int unsigned PtrW = $clog2(Depth) + 1,
  localparam int unsigned IdxW = $clog2(N + 1)
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  // FREP configuration from the decoder
  input  logic            frep_valid_i,
  output logic            frep_ready_o,
  input  frep_cfg_t       frep_cfg_i,
  // ring buffer
  input  logic [PtrW-1:0] rb_wptr_i,
  input  logic            seq_next_i,
  output logic [PtrW-1:0] rb_raddr_o,
  output logic [PtrW-1:0] rb_tail_o,
  // status
  output logic            busy_o,        // a loop nest is configured
  output logic [IdxW-1:0] loop_cnt_o,
  output logic [IdxW-1:0] loop_idx_o,
  output logic            rewind_o,
  output logic            nest_ends_o
);

  typedef struct packed {
    logic [PtrW-1:0] base_ptr;
    frep_cfg_t       cfg;
  } loop_cfg_t;

  loop_cfg_t       cfg_q [N];
  logic [IdxW-1:0] loop_cnt_q, loop_idx_q;
  logic [PtrW-1:0] raddr_q;

  logic [PtrW-1:0] base_ptr [N];
  logic [N-1:0]    last_inst, last_iter, incr, clr;
  logic [IdxW-1:0] isl, inel_cnt;
  logic            nest_ends, rewind, frep_fire, stall_non_nested;
  logic [N-1:0]    last_iter_inner_loops;
  logic [PtrW-1:0] inner_fill;
  // index into the N loop slots: the counts above are one bit wider
  localparam int unsigned SelW = (N > 1) ? $clog2(N) : 1;
  logic [SelW-1:0] inner_idx, inel_idx;

  for (genvar i = 0; i < N; i++) begin : gen_loop
    assign base_ptr[i] = cfg_q[i].base_ptr;
    frep_loop_ctrl i_loop_ctrl (
      .clk_i,
      .rst_ni,
      .clr_i       (clr[i]),
      .incr_i      (incr[i]),
      .cfg_i       (cfg_q[i].cfg),
      .last_inst_o (last_inst[i]),
      .last_iter_o (last_iter[i]),
      .inst_cnt_o  (),
      .iter_cnt_o  ()
    );
  end

  starting_loops_detector #(.N(N), .PtrW(PtrW)) i_sld (
    .idx_i      (loop_idx_q),
    .loop_cnt_i (loop_cnt_q),
    .base_ptr_i (base_ptr),
    .rb_raddr_i (raddr_q),
    .isl_o      (isl)
  );

  ending_loops_detector #(.N(N)) i_eld (
    .depth_i     (isl),
    .last_inst_i (last_inst),
    .last_iter_i (last_iter),
    .inel_cnt_o  (inel_cnt),
    .nest_ends_o (nest_ends)
  );

  // inner loops in last iteration detector + increment vector
  always_comb begin
    for (int i = N - 1; i >= 0; i--) begin
      if (i == N - 1) last_iter_inner_loops[i] = 1'b1;
      else last_iter_inner_loops[i] = last_iter_inner_loops[i+1] &
                                      (!(IdxW'(i + 1) < isl) || last_iter[i+1]);
    end
    for (int unsigned i = 0; i < N; i++) begin
      incr[i] = seq_next_i && (IdxW'(i) < isl) && last_iter_inner_loops[i];
    end
  end

  assign inel_idx = SelW'(inel_cnt - 1'b1);
  assign rewind   = seq_next_i && (inel_cnt != '0) && last_inst[inel_idx];

  // stall non-nested
  assign inner_idx  = SelW'(loop_cnt_q - 1'b1);
  assign inner_fill = rb_wptr_i - cfg_q[inner_idx].base_ptr;
  assign stall_non_nested = (loop_cnt_q == IdxW'(N)) ||
      ((loop_cnt_q != '0) && (inner_fill > PtrW'(cfg_q[inner_idx].cfg.num_inst))) ||
      (seq_next_i && nest_ends);
  assign frep_ready_o = !stall_non_nested;
  assign frep_fire    = frep_valid_i && frep_ready_o;

  always_comb begin
    for (int unsigned i = 0; i < N; i++) clr[i] = frep_fire && (IdxW'(i) == loop_cnt_q);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      loop_cnt_q <= '0;
      loop_idx_q <= '0;
      raddr_q    <= '0;
      for (int unsigned i = 0; i < N; i++) cfg_q[i] <= '0;
    end else begin
      if (seq_next_i) begin
        if (rewind) begin
          raddr_q    <= cfg_q[inel_idx].base_ptr;
          loop_idx_q <= inel_cnt - 1'b1;
        end else begin
          raddr_q    <= raddr_q + 1'b1;
          loop_idx_q <= inel_cnt;
        end
        if (nest_ends) loop_cnt_q <= '0;
      end
      if (frep_fire) begin
        cfg_q[loop_cnt_q[SelW-1:0]] <= '{base_ptr: rb_wptr_i, cfg: frep_cfg_i};
        loop_cnt_q <= loop_cnt_q + 1'b1;
      end
    end
  end

  assign rb_raddr_o  = raddr_q;
  assign rb_tail_o   = (loop_idx_q != '0) ? cfg_q[0].base_ptr : raddr_q;
  assign busy_o      = (loop_cnt_q != '0);
  assign loop_cnt_o  = loop_cnt_q;
  assign loop_idx_o  = loop_idx_q;
  assign rewind_o    = rewind;
  assign nest_ends_o = seq_next_i && nest_ends;

  // A loop body must fit in the ring buffer.
  a_body_fits: assert property (@(posedge clk_i) disable iff (!rst_ni)
    frep_fire |-> (frep_cfg_i.num_inst < 12'(Depth)));

endmodule
