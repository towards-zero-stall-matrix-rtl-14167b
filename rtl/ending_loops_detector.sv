// Ending loops detector of the FREP nest controller.
//
// depth_i loops (0 .. depth_i-1, outermost first) contain the instruction
// being issued. Loop j ends on it when it is at its last instruction in its
// last iteration (last_inst & last_iter). Several nested loops can end on the
// same instruction; in one cycle this block finds the outermost loop of the
// contiguous run of ending loops that starts at the innermost one. The result
// is expressed as the number of loops that stay open (inel_cnt_o, i.e. the
// innermost non-ending loop + 1): a leading-zero style scan from loop
// depth_i-1 downwards for the first loop that does not end. nest_ends_o flags
// that every open loop, including the outermost, ends here. Combinational.
//
// The paper gives the block's purpose, its single-cycle operation and that it
// is built around a zero counter; the encoding of the result is this
// design's.
module ending_loops_detector #(
  parameter int unsigned N = 4,
  localparam int unsigned IdxW = $clog2(N + 1)
) (
  input  logic [IdxW-1:0] depth_i,
  input  logic [N-1:0]    last_inst_i,
  input  logic [N-1:0]    last_iter_i,
  output logic [IdxW-1:0] inel_cnt_o,
  output logic            nest_ends_o
);

  logic [N-1:0] open;   // loop contains the instruction and does not end

  always_comb begin
    for (int unsigned j = 0; j < N; j++) begin
      open[j] = (IdxW'(j) < depth_i) && !(last_inst_i[j] && last_iter_i[j]);
    end
    // position of the highest open loop, plus one
    inel_cnt_o = '0;
    for (int unsigned j = 0; j < N; j++) begin
      if (open[j]) inel_cnt_o = IdxW'(j + 1);
    end
    nest_ends_o = (depth_i != '0) && (inel_cnt_o == '0);
  end

endmodule
