// FREP sequencer instruction decoder.
//
// Partially decodes every instruction the integer core offloads to the FP
// subsystem and bins it into one of three categories, as the sequencer needs:
//   CatFrep   - an frep.o, fully decoded into a loop configuration (frep_cfg)
//   CatLoop   - an instruction that only touches the FP register file and may
//               therefore be stored in the ring buffer and re-issued by a loop
//   CatDirect - an instruction with an integer-register source or destination
//               (FP loads/stores, moves, conversions, compares, fclass); it
//               bypasses the sequencer.
// Purely combinational, no handshake of its own.
//
// The three categories and the bypass of integer-RF instructions follow the
// paper. The FREP encoding is the one of the original Snitch ISA extension,
// which the paper keeps without restating it: instr[31:20] holds the body
// length minus one, rs1 (instr[19:15]) names the integer register holding the
// iteration count minus one, instr[7] distinguishes frep.o (1) from frep.i.
// The register value arrives as op_a. Register staggering (instr[14:8]) and
// frep.i are not part of the loop-nest scheme the paper describes; this design
// ignores the stagger fields and forwards an frep.i on the direct path.
module frep_decoder
  import zonl_pkg::*;
(
  input  instr_t    instr_i,
  input  logic [31:0] op_a_i,     // value of integer register rs1
  output inst_cat_e cat_o,
  output frep_cfg_t cfg_o
);

  logic [6:0] opcode;
  logic [4:0] funct5;
  assign opcode = instr_i[6:0];
  assign funct5 = instr_i[31:27];

  always_comb begin
    unique case (opcode)
      OpcCustom0: cat_o = instr_i[7] ? CatFrep : CatDirect;
      OpcLoadFp, OpcStoreFp: cat_o = CatDirect;
      OpcMadd, OpcMsub, OpcNmsub, OpcNmadd: cat_o = CatLoop;
      OpcOpFp: begin
        unique case (funct5)
          5'b10100,             // feq / flt / fle -> integer rd
          5'b11000,             // fcvt.{w,l}[u].d -> integer rd
          5'b11010,             // fcvt.d.{w,l}[u] <- integer rs1
          5'b11100,             // fmv.x.d / fclass.d -> integer rd
          5'b11110: cat_o = CatDirect;  // fmv.d.x <- integer rs1
          default:  cat_o = CatLoop;
        endcase
      end
      default: cat_o = CatDirect;
    endcase
  end

  assign cfg_o.num_inst = instr_i[31:20];
  assign cfg_o.num_iter = op_a_i;

endmodule
