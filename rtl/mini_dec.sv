// mini_dec: Mini-Decoder in the little core's MA stage.
//
// Purely combinational. It separates MEEK-ISA instructions from ordinary
// RISC-V ones and tells the MA-stage multiplexer what kind of run-time
// access an instruction makes (load, store, CSR read or none), which in
// check mode decides whether the access is served by the load-store log.
// It also flags l.jal, whose target redirects the PC like a jump.
//
// Paper: a Mini-D at MA distinguishes RISC-V from MEEK-ISA. Own choice: the
// encoding (custom-0 major opcode, funct3 selects the MEEK instruction).
// Bits 31:25 (funct7) are not needed to tell the instructions apart and are
// deliberately left unused.
module mini_dec
  import meek_pkg::*;
(
  input  logic [31:0] instr_i,
  output logic        meek_o,
  output meek_op_e    op_o,
  output rt_kind_e    kind_o,
  output logic        jal_o,
  output logic [4:0]  rd_o,
  output logic [4:0]  rs1_o,
  output logic [4:0]  rs2_o
);
  logic [6:0] opc;
  logic [2:0] f3;
  assign opc   = instr_i[6:0];
  assign f3    = instr_i[14:12];
  assign rd_o  = instr_i[11:7];
  assign rs1_o = instr_i[19:15];
  assign rs2_o = instr_i[24:20];

  always_comb begin
    meek_o = (opc == OPC_MEEK) && (f3 != 3'd7);
    op_o   = meek_o ? meek_op_e'(f3) : MK_NONE;
    kind_o = meek_o ? RT_NONE : classify(opc, f3);
    jal_o  = meek_o && (op_o == MK_L_JAL);
  end
endmodule
