// Self-checking testbench of the FREP ring buffer. The testbench plays the
// nest controller: it moves the read address and the tail. Checks that
// issued words equal the written ones, that the buffer reports empty exactly
// when the read address reaches the write pointer, that it refuses a write
// exactly when Depth entries are held (tail held back, as inside a loop nest),
// and that a rewound read address re-reads the same entries.
//
// Issuing whenever the buffer is not empty follows the paper; the tail-based
// free-space rule is this design's.
module tb_frep_ring_buffer;
  import zonl_pkg::*;
  localparam int Depth = 8;
  localparam int PtrW = $clog2(Depth) + 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic w_valid, w_ready, r_valid, r_ready, seq_next;
  instr_t w_instr, r_instr;
  logic [PtrW-1:0] wptr, raddr, tail;
  int checks = 0, failures = 0;
  instr_t model [int];

  frep_ring_buffer #(.Depth(Depth)) dut (
    .clk_i(clk), .rst_ni(rst_n), .w_valid_i(w_valid), .w_ready_o(w_ready),
    .w_instr_i(w_instr), .rb_wptr_o(wptr), .rb_raddr_i(raddr), .rb_tail_i(tail),
    .r_valid_o(r_valid), .r_ready_i(r_ready), .r_instr_o(r_instr), .seq_next_o(seq_next));

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    int written = 0;
    w_valid = 0; r_ready = 0; raddr = 0; tail = 0; w_instr = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // phase 1: fill with tail held at 0: exactly Depth writes accepted
    for (int k = 0; k < Depth + 3; k++) begin
      @(negedge clk);
      w_valid = 1; w_instr = $urandom();
      chk(w_ready == (written < Depth), "full detection");
      if (w_ready) begin model[written] = w_instr; written++; end
      @(posedge clk);
    end
    @(negedge clk);
    w_valid = 0;
    chk(wptr == PtrW'(Depth), "wptr after fill");
    // phase 2: read all twice (rewind), tail still 0
    for (int pass = 0; pass < 2; pass++) begin
      for (int k = 0; k < Depth; k++) begin
        raddr = PtrW'(k);
        r_ready = 1;
        #1;
        chk(r_valid, "valid while entries remain");
        chk(seq_next, "seq_next on issue");
        chk(r_instr == model[k], "read data");
        @(negedge clk);
      end
    end
    raddr = PtrW'(Depth);
    #1;
    chk(!r_valid, "empty at write pointer");
    chk(!seq_next, "no issue when empty");
    // all entries read but the tail still holds them: no room for a write
    w_valid = 1;
    #1;
    chk(!w_ready, "full while the tail holds the loop body");
    w_valid = 0;
    // phase 3: streaming with tail following the read address, wrapping
    begin
      int rd_abs = Depth;
      tail = raddr;
      for (int k = 0; k < 6 * Depth; k++) begin
        @(negedge clk);
        w_valid = ($urandom_range(1) == 1);
        w_instr = $urandom();
        r_ready = ($urandom_range(1) == 1);
        #1;
        chk(r_valid == (rd_abs < written), "valid vs occupancy");
        if (r_valid && r_ready) chk(r_instr == model[rd_abs], "streamed read data");
        chk(w_ready == ((written - rd_abs) < Depth), "ready vs occupancy");
        begin
          logic wf, rf;
          wf = w_valid && w_ready;
          rf = r_valid && r_ready;
          @(posedge clk);
          if (wf) begin model[written] = w_instr; written++; end
          if (rf) rd_abs++;
        end
        #1;
        raddr = PtrW'(rd_abs);
        tail = raddr;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
