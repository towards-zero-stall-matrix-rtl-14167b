// Starting loops detector of the FREP nest controller.
//
// Loops are numbered from the outermost (0) inwards; loop j+1 is nested in
// loop j. idx_i is the number of loops the read pointer has already entered
// (0: outside every loop). Several loops can start on the same instruction,
// so in one cycle this block finds how many of the not yet entered, configured
// loops start at the instruction at rb_raddr: a loop j starts there if
// base_ptr[j] == rb_raddr. The started set is contiguous from loop 0, so the
// result isl_o (loops containing the instruction, i.e. innermost starting loop
// + 1) is the count of trailing ones of "entered or starting here", computed
// as a trailing-zero count of its complement. Combinational.
//
// The paper gives the block's purpose, its single-cycle operation and that it
// is built around a zero counter; the depth encoding (0 = no loop) is this
// design's.
module starting_loops_detector #(
  parameter int unsigned N    = 4,
  parameter int unsigned PtrW = 6,
  localparam int unsigned IdxW = $clog2(N + 1)
) (
  input  logic [IdxW-1:0] idx_i,
  input  logic [IdxW-1:0] loop_cnt_i,
  input  logic [PtrW-1:0] base_ptr_i [N],
  input  logic [PtrW-1:0] rb_raddr_i,
  output logic [IdxW-1:0] isl_o
);

  logic [N:0] started;

  always_comb begin
    for (int unsigned j = 0; j < N; j++) begin
      started[j] = (IdxW'(j) < idx_i) ||
                   ((IdxW'(j) < loop_cnt_i) && (base_ptr_i[j] == rb_raddr_i));
    end
    started[N] = 1'b0;
    // trailing-zero count of ~started
    isl_o = IdxW'(N);
    for (int j = N; j >= 0; j--) begin
      if (!started[j]) isl_o = IdxW'(j);
    end
  end

endmodule
