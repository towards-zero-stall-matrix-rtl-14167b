// One TCDM bank: single-ported 64-bit SRAM with byte strobes.
//
// A request (req_valid_i, decoded row, write flag, data, strobes) is always
// accepted; a bank serves one access per cycle. Writes update the selected
// bytes on the clock edge. Reads return the word on rsp_data_o in the cycle
// after the request (one-cycle latency, as an SRAM macro with registered
// output address). The array stands in for the SRAM macro of the real
// cluster; in the main configuration 48 of them hold 96 KiB, 256 words each.
// Word count and single port follow the paper; strobes and the latency are
// this design's choice.
module tcdm_bank
  import zonl_pkg::*;
#(
  parameter int unsigned Words = BankWords,
  localparam int unsigned RowW = $clog2(Words)
) (
  input  logic            clk_i,
  input  logic            req_valid_i,
  input  logic [RowW-1:0] row_i,
  input  logic            write_i,
  input  data_t           wdata_i,
  input  strb_t           strb_i,
  output data_t           rsp_data_o
);

  data_t mem_q [Words];

  always_ff @(posedge clk_i) begin
    if (req_valid_i) begin
      if (write_i) begin
        for (int unsigned b = 0; b < StrbWidth; b++) begin
          if (strb_i[b]) mem_q[row_i][8*b +: 8] <= wdata_i[8*b +: 8];
        end
      end else begin
        rsp_data_o <= mem_q[row_i];
      end
    end
  end

endmodule
