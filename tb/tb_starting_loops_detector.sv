// Self-checking testbench of the starting loops detector. Random loop nests
// (base pointers ordered as in a real nest, with loops sharing a base),
// random entered-loop counts and read addresses; the expected innermost
// starting loop is found by walking inwards from the entered loops one at a
// time, as a multi-cycle implementation would.
//
// Detecting several starting loops in one cycle is what the paper asks of
// this block; the reference model is a plain loop written for this testbench.
module tb_starting_loops_detector;
  localparam int N = 4, PtrW = 6, IdxW = $clog2(N + 1);
  logic [IdxW-1:0] idx, loop_cnt, isl;
  logic [PtrW-1:0] base [N];
  logic [PtrW-1:0] raddr;
  int checks = 0, failures = 0, multi = 0;

  starting_loops_detector #(.N(N), .PtrW(PtrW)) dut (
    .idx_i(idx), .loop_cnt_i(loop_cnt), .base_ptr_i(base), .rb_raddr_i(raddr), .isl_o(isl));

  initial begin
    for (int t = 0; t < 5000; t++) begin
      int p, e;
      loop_cnt = IdxW'($urandom_range(N));
      p = $urandom_range(20);
      for (int j = 0; j < N; j++) begin
        base[j] = PtrW'(p);
        p += ($urandom_range(1) == 0) ? 0 : $urandom_range(1, 3);
      end
      idx = IdxW'($urandom_range(int'(loop_cnt)));
      raddr = ($urandom_range(2) == 0) ? PtrW'($urandom()) : base[idx < IdxW'(N) ? idx : 0];
      #1;
      e = int'(idx);
      while (e < int'(loop_cnt) && base[e] == raddr) e++;
      if (e - int'(idx) > 1) multi++;
      checks++;
      if (int'(isl) != e) begin
        failures++;
        if (failures < 5) $display("FAIL idx=%0d cnt=%0d isl=%0d exp=%0d", idx, loop_cnt, isl, e);
      end
    end
    checks++;
    if (multi == 0) failures++;
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
