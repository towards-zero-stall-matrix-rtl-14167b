// Self-checking testbench of the FREP decoder: directed instructions of every
// category, then random FP instructions checked against a reference table
// written from the RISC-V D-extension encodings (which OP-FP instructions
// move data to or from the integer register file).
//
// The three categories follow the paper; which opcodes fall into each is this
// design's reading of the RISC-V encoding.
module tb_frep_decoder;
  import zonl_pkg::*;

  instr_t      instr;
  logic [31:0] op_a;
  inst_cat_e   cat;
  frep_cfg_t   cfg;
  int checks = 0, failures = 0;

  frep_decoder dut (.instr_i(instr), .op_a_i(op_a), .cat_o(cat), .cfg_o(cfg));

  task automatic expect_cat(instr_t i, inst_cat_e c, string what);
    instr = i;
    #1;
    checks++;
    if (cat !== c) begin
      failures++;
      $display("FAIL %s: %h -> %0d, expected %0d", what, i, cat, c);
    end
  endtask

  // reference: integer-RF OP-FP instructions by name
  function automatic inst_cat_e ref_cat(instr_t i);
    case (i[6:0])
      7'b0001011: return i[7] ? CatFrep : CatDirect;
      7'b1000011, 7'b1000111, 7'b1001011, 7'b1001111: return CatLoop;
      7'b1010011: begin
        // feq/flt/fle.d = 1010001, fcvt.w.d = 1100001, fcvt.d.w = 1101001,
        // fmv.x.d/fclass.d = 1110001, fmv.d.x = 1111001 (funct7, D format)
        if (i[31:27] inside {5'b10100, 5'b11000, 5'b11010, 5'b11100, 5'b11110}) return CatDirect;
        return CatLoop;
      end
      default: return CatDirect;
    endcase
  endfunction

  initial begin
    op_a = 32'd41;
    expect_cat(enc_frep_o(5'd7, 12'd3), CatFrep, "frep.o");
    checks += 2;
    if (cfg.num_inst !== 12'd3) begin failures++; $display("FAIL num_inst %0d", cfg.num_inst); end
    if (cfg.num_iter !== 32'd41) begin failures++; $display("FAIL num_iter %0d", cfg.num_iter); end
    expect_cat(32'h0000_000b | (32'd8 << 20), CatDirect, "frep.i");
    expect_cat(enc_fmadd_d(5'd1, 5'd0, 5'd1, 5'd1), CatLoop, "fmadd.d");
    expect_cat(enc_fmul_d(5'd1, 5'd0, 5'd1), CatLoop, "fmul.d");
    expect_cat(enc_fmv_x_d(5'd10, 5'd3), CatDirect, "fmv.x.d");
    expect_cat(32'h0085_3007, CatDirect, "fld");             // fld f0, 8(a0)
    expect_cat(32'h00b5_3427, CatDirect, "fsd");             // fsd f11, 8(a0)
    expect_cat(32'h02b5_7553, CatLoop, "fadd.d");            // fadd.d fa0, fa0, fa1
    expect_cat(32'ha2b5_2553, CatDirect, "feq.d");           // feq.d a0, fa0, fa1
    expect_cat(32'hd205_0553, CatDirect, "fcvt.d.w");        // fcvt.d.w fa0, a0
    expect_cat(32'hf205_0553, CatDirect, "fmv.d.x");         // fmv.d.x fa0, a0
    expect_cat(32'h2ab5_8553, CatLoop, "fsgnj.d");           // fsgnj.d
    expect_cat(32'h0000_0013, CatDirect, "addi");
    for (int k = 0; k < 2000; k++) begin
      instr_t r = $urandom();
      case (k % 4)
        0: r[6:0] = 7'b1010011;
        1: r[6:0] = 7'b0001011;
        2: r[6:0] = 7'b1000011 | (7'($urandom_range(3)) << 2);
        default: ;
      endcase
      expect_cat(r, ref_cat(r), "random");
      if (r[6:0] == 7'b0001011 && r[7]) begin
        op_a = $urandom();
        #1;
        checks++;
        if (cfg.num_inst !== r[31:20] || cfg.num_iter !== op_a) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
