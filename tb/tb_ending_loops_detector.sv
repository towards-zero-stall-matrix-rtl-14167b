// Self-checking testbench of the ending loops detector. For random nest
// depths and last-instruction / last-iteration flags, the expected number of
// loops that stay open is found by walking outwards from the innermost loop
// while loops end, as a multi-cycle implementation would.
//
// Detecting several ending loops in one cycle is what the paper asks of this
// block; the reference model is a plain loop written for this testbench.
module tb_ending_loops_detector;
  localparam int N = 4, IdxW = $clog2(N + 1);
  logic [IdxW-1:0] depth, inel_cnt;
  logic [N-1:0] last_inst, last_iter;
  logic nest_ends;
  int checks = 0, failures = 0, multi = 0, whole = 0;

  ending_loops_detector #(.N(N)) dut (.depth_i(depth), .last_inst_i(last_inst),
    .last_iter_i(last_iter), .inel_cnt_o(inel_cnt), .nest_ends_o(nest_ends));

  initial begin
    for (int t = 0; t < 5000; t++) begin
      int e;
      depth = IdxW'($urandom_range(N));
      last_inst = N'($urandom());
      last_iter = N'($urandom());
      if (t % 3 == 0) begin last_inst = '1; last_iter = N'($urandom()) | N'($urandom()); end
      #1;
      e = int'(depth);
      while (e > 0 && last_inst[e-1] && last_iter[e-1]) e--;
      if (int'(depth) - e > 1) multi++;
      if (e == 0 && depth != 0) whole++;
      checks += 2;
      if (int'(inel_cnt) != e) failures++;
      if (nest_ends !== (e == 0 && depth != 0)) failures++;
    end
    checks++;
    if (multi == 0 || whole == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
