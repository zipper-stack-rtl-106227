// zs_decode: recognises the Zipper Stack instructions in a RISC-V instruction word.
//
// ZIP follows a call's spill of ra: it chains ra to Top and puts the old Top into
// ra[63:40]. UNZIP precedes the return: it checks ra against Top and restores Top from
// ra[63:40]. ZSAVE and ZRESTORE serve setjmp and longjmp: ZSAVE writes Top and a tag
// authenticating it to rd, for the jump buffer; ZRESTORE checks such a word and restores
// Top from it. ZIP and UNZIP, and the saving and authenticated restoring of Top for
// setjmp/longjmp, are the described prototype's; every encoding here is this design's
// choice. All four are R-type in the custom-0 major opcode (0001011) with funct7 = 0:
//
//   funct3 000  ZIP       rd = rs1 = x1 (ra), rs2 = x0
//   funct3 001  UNZIP     rd = rs1 = x1 (ra), rs2 = x0
//   funct3 010  ZSAVE     rd = jump-buffer word, rs1 = context (e.g. sp), rs2 = x0
//   funct3 011  ZRESTORE  rd = x0, rs1 = jump-buffer word, rs2 = context
//
// Any other word decodes to ZS_NONE. Purely combinational.
module zs_decode
  import zs_pkg::*;
(
  input  logic [31:0] instr,
  output zs_op_e      op
);

  localparam logic [4:0] REG_ZERO = 5'd0;
  localparam logic [4:0] REG_RA   = 5'd1;

  logic [4:0] rd, rs1, rs2;
  logic       base_ok;
  assign rd      = instr[11:7];
  assign rs1     = instr[19:15];
  assign rs2     = instr[24:20];
  assign base_ok = instr[6:0] == OPC_CUSTOM0 && instr[31:25] == 7'b0;

  always_comb begin
    op = ZS_NONE;
    if (base_ok) begin
      unique case (instr[14:12])
        F3_ZIP:     if (rd == REG_RA && rs1 == REG_RA && rs2 == REG_ZERO) op = ZS_ZIP;
        F3_UNZIP:   if (rd == REG_RA && rs1 == REG_RA && rs2 == REG_ZERO) op = ZS_UNZIP;
        F3_SAVE:    if (rs2 == REG_ZERO) op = ZS_SAVE;
        F3_RESTORE: if (rd == REG_ZERO) op = ZS_RESTORE;
        default:    op = ZS_NONE;
      endcase
    end
  end

endmodule
