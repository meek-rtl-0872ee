// tb_mini_dec: self-checking test of the Mini-Decoder.
// Builds instructions of every major opcode class and every MEEK funct3,
// with random other fields, and checks the MEEK flag, the MEEK operation,
// the memory-access class and the register fields against a table written
// in the testbench.
// Expected decodes use the instruction encodings chosen for this design.
module tb_mini_dec;
  import meek_pkg::*;
  logic [31:0] instr;
  logic meek, jal;
  meek_op_e op;
  rt_kind_e kind;
  logic [4:0] rd, rs1, rs2;
  int checks = 0, failures = 0;

  mini_dec dut (.instr_i(instr), .meek_o(meek), .op_o(op), .kind_o(kind), .jal_o(jal),
    .rd_o(rd), .rs1_o(rs1), .rs2_o(rs2));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s instr=%h", what, instr); end
  endtask

  initial begin
    logic [6:0] opcs [9] = '{7'b0000011, 7'b0000111, 7'b0100011, 7'b0100111, 7'b0101111,
                             7'b1110011, 7'b0001011, 7'b0110011, 7'b1101111};
    for (int it = 0; it < 3000; it++) begin
      int o;
      bit exp_meek;
      rt_kind_e exp_kind;
      logic [2:0] f3;
      o = $urandom_range(0, 8);
      f3 = 3'($urandom);
      instr = {7'($urandom), 5'($urandom), 5'($urandom), f3, 5'($urandom), opcs[o]};
      #1;
      exp_meek = (o == 6) && (f3 != 3'd7);
      case (o)
        0, 1, 4: exp_kind = RT_LOAD;
        2, 3:    exp_kind = RT_STORE;
        5:       exp_kind = (f3 != 0) ? RT_CSR : RT_NONE;
        default: exp_kind = RT_NONE;
      endcase
      chk(meek == exp_meek, "meek flag");
      chk(kind == exp_kind, "access kind");
      if (exp_meek) chk(op == meek_op_e'(f3), "meek op");
      else          chk(op == MK_NONE, "no meek op");
      chk(jal == (exp_meek && f3 == 3'd5), "l.jal flag");
      chk(rd == instr[11:7] && rs1 == instr[19:15] && rs2 == instr[24:20], "register fields");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
