// Self-checking testbench of the FREP nest controller. The testbench models
// the ring buffer (an array written at rb_wptr, read at rb_raddr, with space
// limited by rb_tail) and issues whenever it is not empty and a random FPU
// ready allows. Random loop nests of 1-3 levels (plus directed nests whose
// loops start and end on the same instruction) are written in program order,
// FREPs through the configuration port; the issued order must equal the
// reference expansion of the nest. Counts rewinds, nest ends and stalled
// FREPs, and checks one issue per cycle once a nest is fully written.
//
// Rewinding to the innermost non-ending loop and counting inner-loop
// instructions once follow the paper; the rules for stalling FREPs that
// cannot be nested are this design's.
module tb_frep_nest_ctrl;
  import zonl_pkg::*;
  import zonl_tb_pkg::*;
  localparam int N = 4, Depth = 16, PtrW = $clog2(Depth) + 1, IdxW = $clog2(N + 1);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic frep_valid, frep_ready, seq_next, busy, rewind, nest_ends;
  frep_cfg_t frep_cfg;
  logic [PtrW-1:0] wptr, raddr, tail;
  logic [IdxW-1:0] loop_cnt, loop_idx;
  int rb [2*Depth];

  frep_nest_ctrl #(.N(N), .Depth(Depth)) dut (
    .clk_i(clk), .rst_ni(rst_n), .frep_valid_i(frep_valid), .frep_ready_o(frep_ready),
    .frep_cfg_i(frep_cfg), .rb_wptr_i(wptr), .seq_next_i(seq_next), .rb_raddr_o(raddr),
    .rb_tail_o(tail), .busy_o(busy), .loop_cnt_o(loop_cnt), .loop_idx_o(loop_idx),
    .rewind_o(rewind), .nest_ends_o(nest_ends));

  int checks = 0, failures = 0, n_rewind = 0, n_end = 0, n_stall = 0, rate_cycles = 0;
  int prog[$], seq[$], fed, got;
  nest_t nests[$];
  logic rdy, random_ready, all_fed;

  // program item currently offered
  logic is_frep, w_ok;
  int   item;
  assign item    = (fed < prog.size()) ? prog[fed] : 0;
  assign is_frep = (fed < prog.size()) && (item < 0);
  assign w_ok    = (wptr - tail) < PtrW'(Depth);
  assign frep_valid = rst_n && is_frep;
  assign seq_next   = rst_n && (raddr != wptr) && rdy;
  assign all_fed    = (fed >= prog.size());

  always_comb begin
    int k;
    k = -1 - item;
    frep_cfg = '0;
    if (is_frep) begin
      frep_cfg.num_inst = 12'(body_len(nests[0], k) - 1);
      frep_cfg.num_iter = 32'(nests[0].iters[k] - 1);
    end
  end

  always @(negedge clk) rdy <= random_ready ? ($urandom_range(2) != 0) : 1'b1;

  always @(posedge clk) begin
    if (rst_n) begin
      if (seq_next) begin
        checks++;
        if (got >= seq.size() || rb[raddr] != seq[got]) begin
          failures++;
          if (failures < 6) $display("MISMATCH #%0d got %0d", got, rb[raddr]);
        end
        got <= got + 1;
      end
      if (all_fed && !random_ready && got > 0 && got < seq.size()) begin
        rate_cycles++;
        checks++;
        if (!seq_next) failures++;
      end
      if (rewind) n_rewind++;
      if (nest_ends) n_end++;
      if (is_frep && !frep_ready) n_stall++;
      if (is_frep && frep_ready) fed <= fed + 1;
      else if (!is_frep && fed < prog.size() && w_ok) begin
        rb[wptr] <= item;
        fed <= fed + 1;
      end
      if (!is_frep && fed < prog.size() && w_ok) wptr <= wptr + 1'b1;
    end
  end

  initial begin
    nest_t n;
    wptr = '0; fed = 0; got = 0; random_ready = 0;
    for (int t = 0; t < 80; t++) begin
      @(negedge clk);
      rst_n = 0;
      wptr = '0; fed = 0; got = 0;
      if (t == 0) begin
        n.n_levels = 3; n.pre = '{0, 0, 0}; n.post = '{0, 0, 0}; n.iters = '{2, 3, 2}; n.body = 2;
      end else if (t == 1) begin
        n.n_levels = 2; n.pre = '{4, 0, 0}; n.post = '{4, 0, 0}; n.iters = '{3, 3, 1}; n.body = 4;
      end else n = random_nest(Depth);
      nests.delete();
      nests.push_back(n);
      static_program(n, prog);
      expected(n, seq);
      random_ready = (t % 2 == 1);
      @(negedge clk);
      rst_n = 1;
      for (int c = 0; c < 3000 && got < seq.size(); c++) @(posedge clk);
      @(negedge clk);
      checks += 2;
      if (got != seq.size()) begin failures++; $display("nest %0d: %0d of %0d issued", t, got, seq.size()); end
      if (busy) begin failures++; $display("nest %0d: still busy", t); end
    end
    checks += 3;
    if (n_rewind == 0) failures++;
    if (n_end == 0) failures++;
    if (rate_cycles == 0) failures++;
    $display("rewinds=%0d nest_ends=%0d frep_stalls=%0d rate_cycles=%0d", n_rewind, n_end, n_stall, rate_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
