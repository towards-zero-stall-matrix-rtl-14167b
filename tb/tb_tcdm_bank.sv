// Self-checking testbench of a TCDM bank: random reads and byte-strobed
// writes against a reference array; read data must appear one cycle after
// the request.
//
// 256 words of 64 bits follow from the paper's 96 KiB in 48 banks; the one-
// cycle read latency is this design's.
module tb_tcdm_bank;
  import zonl_pkg::*;
  localparam int W = 64;
  logic clk = 0;
  always #5 clk = ~clk;
  logic valid, write;
  logic [$clog2(W)-1:0] row;
  data_t wdata, rdata, ref_mem [W], exp;
  strb_t strb;
  int checks = 0, failures = 0;

  tcdm_bank #(.Words(W)) dut (.clk_i(clk), .req_valid_i(valid), .row_i(row), .write_i(write),
    .wdata_i(wdata), .strb_i(strb), .rsp_data_o(rdata));

  initial begin
    logic pend;
    pend = 0;
    valid = 0; write = 0; row = 0; wdata = 0; strb = 0;
    for (int r = 0; r < W; r++) begin       // initialise
      @(negedge clk);
      valid = 1; write = 1; row = r[$clog2(W)-1:0]; wdata = {$urandom(), $urandom()}; strb = '1;
      ref_mem[r] = wdata;
    end
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      if (pend) begin
        checks++;
        if (rdata !== exp) begin failures++; $display("read %h expected %h", rdata, exp); end
      end
      valid = ($urandom_range(3) != 0);
      write = ($urandom_range(1) == 1);
      row = $urandom();
      wdata = {$urandom(), $urandom()};
      strb = $urandom();
      pend = valid && !write;
      exp = ref_mem[row];
      if (valid && write) for (int b = 0; b < 8; b++) if (strb[b]) ref_mem[row][8*b +: 8] = wdata[8*b +: 8];
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
