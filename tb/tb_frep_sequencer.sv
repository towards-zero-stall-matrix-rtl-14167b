// Self-checking testbench of the FREP sequencer.
//
// Offloads a series of programs, each made of an integer-RF instruction
// (fmv.x.d, bypass path), an ordinary FP instruction, one frep.o loop nest
// (directed cases with loops starting and ending on the same instruction,
// then random nests of 1-3 levels) and, every other time, a second nest right
// behind the first. The expected FPU-side order is computed by plain nested
// loops (zonl_tb_pkg) and compared instruction by instruction. Phases with a
// random FPU ready check ordering under back-pressure; phases with an always
// ready FPU check the rate: once a nest is fully written into the ring buffer,
// the sequencer must issue an instruction every cycle until the nest ends.
//
// The nest semantics and the rate of one instruction per cycle come from the
// paper. The ordering rule checked for bypassed instructions (they wait until
// the sequencer has drained) is this design's.
module tb_frep_sequencer;
  import zonl_pkg::*;
  import zonl_tb_pkg::*;

  localparam int Depth = 32;
  localparam int N     = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        inp_valid, inp_ready, oup_valid, oup_ready;
  instr_t      inp_instr, oup_instr;
  logic [31:0] inp_op_a, oup_op_a;
  logic        busy, seq_next, rewind, nest_ends, frep_stall;
  logic [$clog2(N+1)-1:0] loop_idx;

  frep_sequencer #(.N(N), .Depth(Depth)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .inp_valid_i(inp_valid), .inp_ready_o(inp_ready), .inp_instr_i(inp_instr),
    .inp_op_a_i(inp_op_a),
    .oup_valid_o(oup_valid), .oup_ready_i(oup_ready), .oup_instr_o(oup_instr),
    .oup_op_a_o(oup_op_a),
    .busy_o(busy), .seq_next_o(seq_next), .rewind_o(rewind), .nest_ends_o(nest_ends),
    .frep_stall_o(frep_stall), .loop_idx_o(loop_idx)
  );

  int checks = 0, failures = 0;
  int n_rewind = 0, n_nest_end = 0, n_frep_stall = 0, n_bypass = 0, n_multi_end = 0;
  int rate_checks = 0;

  typedef struct { instr_t instr; logic [31:0] op_a; } item_t;
  item_t  in_q[$];
  instr_t exp_q[$];
  logic   ready_random;
  logic   rate_window;

  function automatic instr_t id_instr(int id);
    logic [9:0] v = 10'(id);
    return enc_fmadd_d(v[4:0], 5'd0, 5'd1, v[9:5]);
  endfunction

  // append one nest to the input and expected queues
  task automatic add_nest(nest_t n, int base);
    int prog[$], seq[$];
    static_program(n, prog);
    expected(n, seq);
    foreach (prog[i]) begin
      item_t it;
      if (prog[i] < 0) begin
        int k = -1 - prog[i];
        it.instr = enc_frep_o(5'd5, 12'(body_len(n, k) - 1));
        it.op_a  = 32'(n.iters[k] - 1);
      end else begin
        it.instr = id_instr(base + prog[i]);
        it.op_a  = 32'hdead_beef;
      end
      in_q.push_back(it);
    end
    foreach (seq[i]) exp_q.push_back(id_instr(base + seq[i]));
  endtask

  task automatic add_plain(int tag);
    item_t it;
    it.instr = enc_fmv_x_d(5'(tag), 5'(tag + 1));
    it.op_a  = 32'(tag);
    in_q.push_back(it);
    exp_q.push_back(it.instr);
    it.instr = enc_fmul_d(5'(tag), 5'd2, 5'd3);
    in_q.push_back(it);
    exp_q.push_back(it.instr);
  endtask

  // driver
  int last_nest_item;   // index in in_q of the last instruction of the rate-checked nest
  int fed;
  always_ff @(posedge clk) begin
    if (rst_n && inp_valid && inp_ready) fed <= fed + 1;
  end
  assign inp_valid = rst_n && (fed < in_q.size());
  assign inp_instr = (fed < in_q.size()) ? in_q[fed].instr : '0;
  assign inp_op_a  = (fed < in_q.size()) ? in_q[fed].op_a  : '0;

  // monitor
  int got;
  always_ff @(posedge clk) begin
    if (rst_n) begin
      if (oup_valid && oup_ready) begin
        checks++;
        if (got >= exp_q.size() || oup_instr !== exp_q[got]) begin
          failures++;
          if (failures < 10) $display("MISMATCH #%0d: got %h exp %h", got, oup_instr,
                                      (got < exp_q.size()) ? exp_q[got] : 32'h0);
        end
        got <= got + 1;
        if (oup_instr[6:0] == OpcOpFp && oup_instr[31:27] == 5'b11100) begin
          n_bypass++;
          checks++;
          if (oup_op_a !== 32'(oup_instr[11:7])) failures++;
        end
      end
      if (rewind) n_rewind++;
      if (nest_ends) n_nest_end++;
      if (frep_stall) n_frep_stall++;
      // rate: inside the window every cycle must issue
      if (rate_window) begin
        rate_checks++;
        checks++;
        if (!(oup_valid && oup_ready)) begin
          failures++;
          $display("RATE: bubble at output #%0d", got);
        end
      end
    end
  end
  int rate_end;   // expected-queue index just past the rate-checked nest
  assign rate_window = !ready_random && (fed > last_nest_item) && (got >= 2) && (last_nest_item >= 0)
                       && (got < rate_end);

  always_ff @(posedge clk) oup_ready <= ready_random ? ($urandom_range(3) != 0) : 1'b1;

  // run one program to completion
  task automatic run_until_drained();
    int timeout = 0;
    while ((got < exp_q.size() || fed < in_q.size()) && timeout < 20000) begin
      @(posedge clk);
      timeout++;
    end
    repeat (3) @(posedge clk);
  endtask

  task automatic new_program();
    @(negedge clk);
    rst_n = 0;
    in_q.delete();
    exp_q.delete();
    fed = 0;
    got = 0;
    last_nest_item = -1;
    @(negedge clk);
  endtask

  initial begin
    nest_t n;
    fed = 0;
    got = 0;
    last_nest_item = -1;
    ready_random = 0;
    repeat (3) @(posedge clk);

    // directed: matmul-like 2-level nest (fmul x4, inner fmadd x4, fmadd x4)
    for (int t = 0; t < 60; t++) begin
      new_program();
      ready_random = (t % 2 == 1);
      if (t == 0) begin
        n.n_levels = 2; n.pre = '{4, 0, 0}; n.post = '{4, 0, 0};
        n.iters = '{3, 5, 1}; n.body = 4;
      end else if (t == 1) begin     // three loops start and end on the same instruction
        n.n_levels = 3; n.pre = '{0, 0, 0}; n.post = '{0, 0, 0};
        n.iters = '{2, 3, 2}; n.body = 3;
      end else if (t == 2) begin     // single-instruction innermost body, shared end
        n.n_levels = 3; n.pre = '{1, 0, 2}; n.post = '{0, 0, 0};
        n.iters = '{3, 2, 4}; n.body = 1;
      end else if (t == 3) begin     // unroll-8 matmul tile: 24-instruction outer body
        n.n_levels = 2; n.pre = '{8, 0, 0}; n.post = '{8, 0, 0};
        n.iters = '{4, 6, 1}; n.body = 8;
      end else begin
        n = random_nest(Depth);
      end
      add_plain(t % 30);
      add_nest(n, 0);
      last_nest_item = in_q.size() - 1;
      rate_end = exp_q.size();
      if (t % 2 == 0) begin
        nest_t n2 = random_nest(Depth);
        add_nest(n2, 512);          // second nest: its FREP waits for the first
      end
      add_plain((t + 7) % 30);
      rst_n = 1;
      run_until_drained();
      checks++;
      if (got != exp_q.size()) begin
        failures++;
        $display("program %0d: issued %0d of %0d", t, got, exp_q.size());
      end
      if (n.n_levels > 1 && n.post[n.n_levels-1] == 0 && n.post[n.n_levels-2] == 0) n_multi_end++;
    end

    // every mechanism must have happened
    checks += 5;
    if (n_rewind == 0)     begin failures++; $display("no rewind seen"); end
    if (n_nest_end == 0)   begin failures++; $display("no nest end seen"); end
    if (n_frep_stall == 0) begin failures++; $display("no non-nested FREP stall seen"); end
    if (n_bypass == 0)     begin failures++; $display("no bypass seen"); end
    if (rate_checks == 0)  begin failures++; $display("rate never checked"); end
    $display("rewinds=%0d nest_ends=%0d frep_stalls=%0d bypass=%0d multi_end_nests=%0d rate_cycles=%0d",
             n_rewind, n_nest_end, n_frep_stall, n_bypass, n_multi_end, rate_checks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
