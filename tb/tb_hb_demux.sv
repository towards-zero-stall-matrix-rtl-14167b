// Self-checking testbench of the hyperbank demux: requests reach only the
// selected output, readiness follows the selected output, and the response of
// a granted request is taken, one cycle later, from the output it went to.
//
// Selecting the hyperbank with the address MSB follows the paper; the
// registered response select is this design's timing.
module tb_hb_demux;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, sel;
  logic [63:0] in_req, in_rsp;
  logic out_valid [2], out_ready [2];
  logic [63:0] out_req [2], out_rsp [2];
  int checks = 0, failures = 0;

  hb_demux #(.NumOut(2)) dut (.clk_i(clk), .rst_ni(rst_n), .in_valid_i(in_valid),
    .in_ready_o(in_ready), .sel_i(sel), .in_req_i(in_req), .in_rsp_o(in_rsp),
    .out_valid_o(out_valid), .out_ready_i(out_ready), .out_req_o(out_req), .out_rsp_i(out_rsp));

  initial begin
    logic pend, psel;
    pend = 0; psel = 0;
    in_valid = 0; sel = 0; in_req = 0; out_ready = '{0, 0}; out_rsp = '{0, 0};
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 2000; c++) begin
      @(negedge clk);
      out_rsp[0] = {$urandom(), $urandom()};
      out_rsp[1] = {$urandom(), $urandom()};
      in_valid = $urandom_range(1);
      sel = $urandom_range(1);
      in_req = {$urandom(), $urandom()};
      out_ready[0] = $urandom_range(1);
      out_ready[1] = $urandom_range(1);
      #1;
      checks += 4;
      if (out_valid[sel] !== in_valid) failures++;
      if (out_valid[!sel] !== 1'b0) failures++;
      if (in_ready !== out_ready[sel]) failures++;
      if (out_req[sel] !== in_req) failures++;
      // the response follows the select of the request granted last cycle,
      // not the select of the request now on the input
      if (pend) begin
        checks++;
        if (in_rsp !== out_rsp[psel]) failures++;
      end
      pend = in_valid && in_ready;
      psel = sel;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
