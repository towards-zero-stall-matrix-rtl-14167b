// Self-checking testbench of one FREP loop controller: random bounds, random
// increment patterns; the flags and counters are compared with a reference
// counter pair kept in the testbench, including wrap-around at loop end and
// the clear input.
//
// The counters and flags follow the paper's loop controller; the reference
// model is written for this testbench.
module tb_frep_loop_ctrl;
  import zonl_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clr, incr, last_inst, last_iter;
  frep_cfg_t cfg;
  logic [11:0] inst_cnt;
  logic [31:0] iter_cnt;
  int checks = 0, failures = 0, trips = 0, ends = 0;

  frep_loop_ctrl dut (.clk_i(clk), .rst_ni(rst_n), .clr_i(clr), .incr_i(incr), .cfg_i(cfg),
    .last_inst_o(last_inst), .last_iter_o(last_iter), .inst_cnt_o(inst_cnt), .iter_cnt_o(iter_cnt));

  initial begin
    int mi, mt;
    clr = 0; incr = 0; cfg = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      @(negedge clk);
      cfg.num_inst = 12'($urandom_range(5));
      cfg.num_iter = 32'($urandom_range(4));
      clr = 1; incr = 0;
      @(negedge clk);
      clr = 0;
      mi = 0; mt = 0;
      for (int c = 0; c < 60; c++) begin
        incr = ($urandom_range(2) != 0);
        #1;
        checks += 4;
        if (last_inst !== (mi == int'(cfg.num_inst))) failures++;
        if (last_iter !== (mt == int'(cfg.num_iter))) failures++;
        if (inst_cnt !== 12'(mi)) failures++;
        if (iter_cnt !== 32'(mt)) failures++;
        @(negedge clk);
        if (incr) begin
          if (mi == int'(cfg.num_inst)) begin
            mi = 0; trips++;
            if (mt == int'(cfg.num_iter)) begin mt = 0; ends++; end else mt++;
          end else mi++;
        end
      end
    end
    checks++;
    if (trips == 0 || ends == 0) failures++;
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
