// FREP loop controller (one per nesting level).
//
// Two cascaded counters: inst_cnt counts issued instructions of the loop body
// up to the bound cfg.num_inst (body length - 1); when it wraps ("trip") the
// iteration counter iter_cnt advances up to cfg.num_iter (iterations - 1).
// last_inst and last_iter flag that the counters sit on their bounds, so the
// instruction about to be issued is the loop's last one, in its last
// iteration. Both counters advance on incr, the nest controller's per-loop
// increment, and wrap to zero at the end of the loop, ready for the loop's
// next execution. clr zeroes both (used when a new FREP configures the loop).
// Counters update on the clock edge after incr; the flags are combinational
// from the registered counters.
//
// The structure (inst_cnt, iter_cnt, bounds, trip, last flags) is the one of
// the paper's loop controller; reset and clear behaviour are this design's.
module frep_loop_ctrl
  import zonl_pkg::*;
(
  input  logic      clk_i,
  input  logic      rst_ni,
  input  logic      clr_i,
  input  logic      incr_i,
  input  frep_cfg_t cfg_i,
  output logic      last_inst_o,
  output logic      last_iter_o,
  output logic [11:0] inst_cnt_o,
  output logic [31:0] iter_cnt_o
);

  logic [11:0] inst_cnt_q;
  logic [31:0] iter_cnt_q;
  logic        trip;

  assign last_inst_o = (inst_cnt_q == cfg_i.num_inst);
  assign last_iter_o = (iter_cnt_q == cfg_i.num_iter);
  assign trip        = incr_i & last_inst_o;
  assign inst_cnt_o  = inst_cnt_q;
  assign iter_cnt_o  = iter_cnt_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      inst_cnt_q <= '0;
      iter_cnt_q <= '0;
    end else if (clr_i) begin
      inst_cnt_q <= '0;
      iter_cnt_q <= '0;
    end else if (incr_i) begin
      inst_cnt_q <= last_inst_o ? '0 : inst_cnt_q + 1'b1;
      if (trip) iter_cnt_q <= last_iter_o ? '0 : iter_cnt_q + 1'b1;
    end
  end

endmodule
