// tb_deu: self-checking test of the Data Extraction Unit.
// A random commit stream (ALU ops, loads, stores, CSR reads, b.check,
// traps) is offered to the unit with random back-pressure from the
// DC-Buffers. The testbench keeps an architectural register file that
// changes between commit groups and serves it through the PRF read ports.
// Checked:
//   * each load/store/CSR lane produces one run-time packet with the LSQ top
//     entry or the CSR value, in its own lane, only when the group commits;
//   * a deliberately wrong LSQ parity bit raises parity_err_o, correct
//     parity never does;
//   * after every RCP the status stream is one header (final flag for
//     b.check off, pc of the last instruction of the group) followed by
//     x1..x31 in order with the register file contents at the RCP;
//   * commit is held while the registers are extracted;
//   * all packets together carry consecutive sequence numbers in program
//     order.
// Small time-out and log size are used so that every RCP cause occurs.
// Expected packets are computed from the generated commit stream, not from the DUT.
module tb_deu;
  import meek_pkg::*;
  localparam int CW = 4, NL = 4, TOUT = 40, LSLE = 24;
  logic clk = 0, rst_n = 0;
  commit_t [CW-1:0] commit;
  logic cvalid = 0, cready, trap = 0;
  lsq_t [CW-1:0] lsq;
  logic [11:0] csr_raddr;
  logic [XLEN-1:0] csr_rdata;
  logic deu_en;
  logic [DEU_PORTS-1:0] rd_en;
  logic [DEU_PORTS-1:0][AREG_W-1:0] areg;
  logic [DEU_PORTS-1:0][XLEN-1:0] rdata;
  logic [CW-1:0] rt_push, rt_ready, st_push, st_ready;
  seq_pkt_t [CW-1:0] rt_pkt, st_pkt;
  logic perr, rcp, chk_en;
  logic [NL-1:0] hook;
  logic [XLEN-1:0] rf [32];
  logic [XLEN-1:0] snap [32];
  int checks = 0, failures = 0;
  int exp_seq = 0;
  int next_reg = 0;          // 0: header expected, 1..31 register, 32 idle
  bit exp_final = 0;
  logic [XLEN-1:0] exp_pc;
  bit bad_parity = 0;
  int n_rcp = 0, n_hold = 0, n_perr = 0, n_csr = 0, n_ld = 0, n_st = 0, n_final = 0, n_trap_rcp = 0;

  deu #(.CW(CW), .NL(NL), .TOUT(TOUT), .LSL_ENTRIES(LSLE)) dut (
    .clk, .rst_n, .commit_i(commit), .commit_valid_i(cvalid), .commit_ready_o(cready), .trap_i(trap),
    .lsq_i(lsq), .csr_raddr_o(csr_raddr), .csr_rdata_i(csr_rdata),
    .deu_en_o(deu_en), .deu_rd_en_o(rd_en), .deu_areg_o(areg), .deu_rdata_i(rdata),
    .rt_push_o(rt_push), .rt_pkt_o(rt_pkt), .rt_ready_i(rt_ready),
    .st_push_o(st_push), .st_pkt_o(st_pkt), .st_ready_i(st_ready),
    .parity_err_o(perr), .rcp_o(rcp), .check_en_o(chk_en), .hook_mask_o(hook));

  for (genvar p = 0; p < DEU_PORTS; p++) begin : g_rd
    assign rdata[p] = rf[areg[p]];
  end
  assign csr_rdata = {52'hC5C, csr_raddr};

  always #5 clk = ~clk;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  function automatic commit_t instr(input int kind);
    commit_t c;
    c = '0;
    c.valid = 1'b1;
    c.pc = {$urandom, $urandom} & ~64'h3;
    c.npc = c.pc + 4;
    case (kind)
      0: c.opcode = 7'b0110011;
      1: c.opcode = OPC_LOAD;
      2: c.opcode = OPC_STORE;
      3: begin c.opcode = OPC_SYSTEM; c.funct3 = 3'($urandom_range(1, 3)); c.imm12 = 12'($urandom); end
      default: c.opcode = 7'b0010011;
    endcase
    return c;
  endfunction

  function automatic rt_kind_e kind_of(input commit_t c);
    if (!c.valid) return RT_NONE;
    if (c.opcode == OPC_LOAD) return RT_LOAD;
    if (c.opcode == OPC_STORE) return RT_STORE;
    if (c.opcode == OPC_SYSTEM && c.funct3 != 0) return RT_CSR;
    return RT_NONE;
  endfunction

  // Driver: new group each time the previous one committed.
  task automatic new_group(input int phase);
    int r;
    commit = '0;
    trap = 1'b0;
    bad_parity = 1'b0;
    r = $urandom_range(0, 99);
    if (phase == 1 && r < 4) begin
      // b.check alone: enable or disable
      commit[0] = instr(0);
      commit[0].opcode = OPC_MEEK;
      commit[0].funct3 = 3'(MK_B_CHECK);
      commit[0].src1 = 64'($urandom_range(0, 1));
    end else begin
      for (int l = 0; l < CW; l++) begin
        if ($urandom_range(0, 4) != 0 || l == 0) commit[l] = instr($urandom_range(0, 4));
        // the core commits at most one CSR instruction per cycle
        if (l > 0 && kind_of(commit[l]) == RT_CSR) for (int k = 0; k < l; k++)
          if (kind_of(commit[k]) == RT_CSR) commit[l].opcode = OPC_LOAD;
        lsq[l].addr = {$urandom, $urandom};
        lsq[l].data = {$urandom, $urandom};
        lsq[l].parity = byte_parity(lsq[l].data);
      end
      if ($urandom_range(0, 60) == 0) begin
        for (int l = 0; l < CW; l++) if (kind_of(commit[l]) == RT_LOAD || kind_of(commit[l]) == RT_STORE) begin
          if (!bad_parity) begin r = $urandom_range(0, 7); lsq[l].parity[r] = ~lsq[l].parity[r]; end
          bad_parity = 1'b1;
        end
      end
      trap = ($urandom_range(0, 80) == 0);
    end
  endtask

  initial begin
    for (int r = 0; r < 32; r++) rf[r] = (r == 0) ? '0 : {$urandom, $urandom};
    commit = '0; lsq = '0; rt_ready = '1; st_ready = '1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // turn checking on
    @(negedge clk);
    commit = '0;
    commit[0] = instr(0);
    commit[0].opcode = OPC_MEEK;
    commit[0].funct3 = 3'(MK_B_CHECK);
    commit[0].src1 = 64'd1;
    cvalid = 1'b1;
    for (int cyc = 0; cyc < 6000; cyc++) begin
      logic [CW-1:0] exp_rt;
      int seq_here;
      #1;
      // ----- checks on the settled outputs of this cycle -----
      if (cvalid && !cready) n_hold++;
      chk(!(deu_en && cready), "commit held during extraction");
      chk(!(st_push != 0 && st_ready != '1), "status beat waits for every status FIFO");
      seq_here = exp_seq;
      exp_rt = '0;
      for (int l = 0; l < CW; l++) if (cvalid && cready && chk_en && kind_of(commit[l]) != RT_NONE) exp_rt[l] = 1'b1;
      chk(rt_push == exp_rt, $sformatf("run-time lanes %b vs %b", rt_push, exp_rt));
      for (int l = 0; l < CW; l++) if (rt_push[l] && exp_rt[l]) begin
        chk(rt_pkt[l].seq == SEQ_W'(seq_here), "run-time sequence number");
        seq_here++;
        case (kind_of(commit[l]))
          RT_LOAD, RT_STORE: begin
            chk(rt_pkt[l].pkt.kind == (kind_of(commit[l]) == RT_LOAD ? PK_LOAD : PK_STORE), "load/store kind");
            chk(rt_pkt[l].pkt.addr == lsq[l].addr && rt_pkt[l].pkt.data == lsq[l].data, "LSQ top forwarded");
            if (kind_of(commit[l]) == RT_LOAD) n_ld++; else n_st++;
          end
          default: begin
            chk(rt_pkt[l].pkt.kind == PK_CSR && rt_pkt[l].pkt.data == {52'hC5C, commit[l].imm12}, "CSR value forwarded");
            n_csr++;
          end
        endcase
      end
      if (cvalid && cready) begin
        chk(perr == (bad_parity && chk_en), "parity re-check");
        if (perr) n_perr++;
      end else chk(!perr, "no parity error without commit");
      // status stream
      if (st_push != 0) begin
        if (st_push[CW-1]) begin
          chk(next_reg == 0, "header only at the start of an extraction");
          chk(st_pkt[CW-1].seq == SEQ_W'(seq_here), "header sequence number");
          chk(st_pkt[CW-1].pkt.kind == PK_HDR && st_pkt[CW-1].pkt.idx[0] == exp_final, "header kind and final flag");
          chk(st_pkt[CW-1].pkt.addr == exp_pc, "header carries the resume pc");
          seq_here++;
          next_reg = 1;
        end
        for (int p = 0; p < DEU_PORTS; p++) if (st_push[p]) begin
          chk(next_reg >= 1 && next_reg <= 31, "register inside an extraction");
          chk(st_pkt[p].pkt.kind == PK_REG && st_pkt[p].pkt.idx == 5'(next_reg), $sformatf("register x%0d in order", next_reg));
          chk(st_pkt[p].pkt.data == snap[next_reg], "register value at the RCP");
          chk(st_pkt[p].seq == SEQ_W'(seq_here), "register sequence number");
          seq_here++;
          next_reg++;
        end
      end
      if (next_reg == 32) next_reg = 33;
      exp_seq = seq_here;
      // RCP decided in this cycle: snapshot the state the little cores must see
      if (rcp) begin
        chk(next_reg == 33 || next_reg == 32 || n_rcp == 0, "RCP only after the previous extraction");
        n_rcp++;
        if (trap) n_trap_rcp++;
        next_reg = 0;
        exp_final = (commit[0].opcode == OPC_MEEK && commit[0].src1[0] == 1'b0);
        if (exp_final) n_final++;
        exp_pc = '0;
        for (int l = 0; l < CW; l++) if (commit[l].valid) exp_pc = commit[l].npc;
        for (int r = 0; r < 32; r++) snap[r] = rf[r];
      end
      // ----- advance -----
      @(negedge clk);
      if (cvalid && cready) begin
        // architectural state changes as the group retires
        for (int k = 0; k < 3; k++) rf[$urandom_range(1, 31)] = {$urandom, $urandom};
        new_group(1);
      end
      rt_ready = ($urandom_range(0, 7) == 0) ? 4'($urandom) : '1;
      st_ready = ($urandom_range(0, 5) == 0) ? 4'($urandom) : '1;
    end
    chk(n_rcp > 10, "RCPs taken");
    chk(n_trap_rcp > 0, "RCP on trap");
    chk(n_final > 0, "final RCP on b.check off");
    chk(n_hold > 0, "commit held");
    chk(n_perr > 0, "parity error detected");
    chk(n_csr > 0 && n_ld > 0 && n_st > 0, "all run-time kinds forwarded");
    $display("rcp=%0d trap_rcp=%0d final=%0d hold=%0d perr=%0d ld=%0d st=%0d csr=%0d",
             n_rcp, n_trap_rcp, n_final, n_hold, n_perr, n_ld, n_st, n_csr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
