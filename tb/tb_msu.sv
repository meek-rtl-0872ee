// tb_msu: self-checking test of the Mode Switch Unit.
// The testbench models the little core around the unit: a 32-entry GPR
// file behind the ID-stage multiplexers, a small data memory behind the
// D-cache port (random ready), the status way of the load-store log (a
// queue), retirement of re-executed instructions, and the thread ID.
// Each round runs the checker's sequence:
//   l.mode -> l.record -> l.apply -> l.rslt -> l.jal -> re-execution until
//   the End RCP -> register compare -> restore -> redirect + done toggle.
// Checked: check mode only for the recording thread; l.record stores
// x1..x31 at base+8*i; l.apply loads the Start RCP into the GPRs; l.jal
// redirects to its operand; l.rslt reports SRCP presence and error state;
// retirement is held exactly when the End RCP length is reached; a register
// that differs raises ercp_mismatch_o and err_irq_o, as does a log
// mismatch; the saved registers come back and the pc returns after the
// l.record; done_tgl_o flips once per segment.
// The instruction sequence follows the checker-thread program; the core model is this test's own.
module tb_msu;
  import meek_pkg::*;
  logic clk = 0, rst_n = 0;
  logic op_valid = 0, op_done;
  meek_op_e op = MK_NONE;
  logic [XLEN-1:0] rs1 = 0, rs2 = 0, pc = 0, rslt;
  logic [15:0] tid = 0;
  logic cmode, replaying, own, gwen, mreq, mwe, mready = 1, redirect, retire = 0, hold;
  logic [AREG_W-1:0] gwaddr, graddr;
  logic [XLEN-1:0] gwdata, grdata, maddr, mwdata, mrdata, rpc;
  logic st_valid, st_pop, lsl_err = 0, irq, done_tgl, mism;
  pkt_t st_pkt;
  logic [XLEN-1:0] gpr [32];
  logic [XLEN-1:0] mem [64];
  pkt_t sq [64];
  int sh = 0, st = 0;
  int checks = 0, failures = 0;
  int n_irq = 0, n_mism = 0, n_rounds = 0, n_hold = 0;

  msu #(.CORE_ID(2)) dut (.clk, .rst_n, .op_valid_i(op_valid), .op_i(op), .op_rs1_i(rs1), .op_rs2_i(rs2),
    .op_pc_i(pc), .op_done_o(op_done), .rslt_o(rslt), .cur_tid_i(tid), .check_mode_o(cmode),
    .replaying_o(replaying), .gpr_own_o(own), .gpr_wen_o(gwen), .gpr_waddr_o(gwaddr), .gpr_wdata_o(gwdata),
    .gpr_raddr_o(graddr), .gpr_rdata_i(grdata), .mem_req_o(mreq), .mem_we_o(mwe), .mem_addr_o(maddr),
    .mem_wdata_o(mwdata), .mem_ready_i(mready), .mem_rdata_i(mrdata), .redirect_o(redirect),
    .redirect_pc_o(rpc), .retire_i(retire), .retire_hold_o(hold), .st_valid_i(st_valid), .st_pkt_i(st_pkt),
    .st_pop_o(st_pop), .lsl_err_i(lsl_err), .err_irq_o(irq), .done_tgl_o(done_tgl), .ercp_mismatch_o(mism));

  assign grdata = gpr[graddr];
  assign mrdata = mem[maddr[8:3]];
  assign st_valid = (sh != st);
  assign st_pkt = sq[sh % 64];

  always #5 clk = ~clk;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  // GPR file, memory and status-way pops at the clock edge.
  always @(posedge clk) begin
    if (gwen && gwaddr != 0) gpr[gwaddr] <= gwdata;
    if (mreq && mwe && mready) mem[maddr[8:3]] <= mwdata;
    if (st_pop) sh <= sh + 1;
    if (irq) n_irq++;
    if (mism) n_mism++;
    if (hold) n_hold++;
  end
  always @(negedge clk) mready = ($urandom_range(0, 3) != 0);

  task automatic push(input pkt_t p);
    sq[st % 64] = p;
    st++;
  endtask
  task automatic rcp(input logic [XLEN-1:0] pc_v, input int len, input logic [XLEN-1:0] regs [32]);
    pkt_t p;
    p = '0; p.kind = PK_HDR; p.addr = pc_v; p.data = XLEN'(len);
    push(p);
    for (int r = 1; r < 32; r++) begin
      p = '0; p.kind = PK_REG; p.idx = 5'(r); p.data = regs[r];
      push(p);
    end
  endtask

  // Issue one MEEK instruction and wait for it to finish.
  task automatic issue(input meek_op_e o, input logic [XLEN-1:0] a, input logic [XLEN-1:0] b);
    int n;
    n = 0;
    @(negedge clk);
    op = o; rs1 = a; rs2 = b; op_valid = 1;
    #1;
    while (!op_done) begin
      @(negedge clk);
      #1;
      n++;
      if (n > 500) begin chk(0, "instruction finishes"); break; end
    end
    @(negedge clk);
    op_valid = 0;
  endtask

  logic [XLEN-1:0] saved [32];
  logic [XLEN-1:0] srcp [32];
  logic [XLEN-1:0] ercp [32];
  logic [XLEN-1:0] base;

  initial begin
    for (int r = 0; r < 32; r++) gpr[r] = (r == 0) ? '0 : {$urandom, $urandom};
    for (int i = 0; i < 64; i++) mem[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    tid = 16'd7;
    issue(MK_L_MODE, 64'd1, 64'd1);   // another core: no effect
    chk(!cmode, "l.mode for another core ignored");
    issue(MK_L_MODE, 64'd2, 64'd1);
    chk(!cmode, "no check mode before the checker thread is known");
    for (int round = 0; round < 30; round++) begin
      int len, fault, done0;
      fault = $urandom_range(0, 2);      // 0 none, 1 register mismatch, 2 log mismatch
      len = $urandom_range(0, 40);
      done0 = done_tgl;
      // the checker (thread 7) records its own registers
      for (int r = 1; r < 32; r++) gpr[r] = {$urandom, $urandom};
      for (int r = 0; r < 32; r++) saved[r] = gpr[r];
      base = 64'h100;
      pc = 64'h8000_0000 + 64'(round * 64);
      issue(MK_L_RECORD, base, 0);
      for (int r = 1; r < 32; r++) chk(mem[(base[8:3] + 6'(r)) % 64] == saved[r], $sformatf("l.record stored x%0d", r));
      chk(cmode, "check mode for the checker thread");
      tid = 16'd9; #1;
      chk(!cmode, "no check mode for another thread");
      tid = 16'd7; #1;
      // Start RCP arrives, l.apply loads it
      for (int r = 1; r < 32; r++) srcp[r] = {$urandom, $urandom};
      rcp(64'h4000 + 64'(round * 4), 0, srcp);
      issue(MK_L_APPLY, 0, 0);
      for (int r = 1; r < 32; r++) chk(gpr[r] == srcp[r], $sformatf("l.apply loaded x%0d", r));
      @(negedge clk);
      op = MK_L_RSLT; op_valid = 1;
      #1;
      chk(op_done && rslt[1:0] == 2'b01, "l.rslt: no SRCP waiting, no error");
      @(negedge clk);
      op_valid = 0;
      // l.jal to the segment start
      @(negedge clk);
      op = MK_L_JAL; rs1 = 64'h4000 + 64'(round * 4); op_valid = 1;
      #1;
      chk(op_done && redirect && rpc == rs1, "l.jal redirects");
      @(negedge clk);
      op_valid = 0;
      // re-execution: retire len instructions, End RCP arrives at some point
      for (int r = 1; r < 32; r++) ercp[r] = (r % 5 == 0) ? {$urandom, $urandom} : srcp[r];
      begin
        int retired, rcp_at;
        retired = 0;
        rcp_at = $urandom_range(0, len);
        while (1) begin
          @(negedge clk);
          if (retired == rcp_at && st == sh) begin
            logic [XLEN-1:0] e [32];
            for (int r = 0; r < 32; r++) e[r] = ercp[r];
            if (fault == 1) begin int k; k = $urandom_range(1, 31); e[k] = ~e[k]; end
            rcp(64'h0, len, e);
          end
          for (int r = 1; r < 32; r++) if (r % 5 == 0) gpr[r] = ercp[r];
          retire = ($urandom_range(0, 1) == 1);
          lsl_err = (fault == 2 && retired == len / 2 && retire);
          #1;
          if (hold) begin
            chk(retired == len, $sformatf("retirement held at the End RCP (%0d of %0d)", retired, len));
            retire = 0;
            lsl_err = 0;
            break;
          end
          chk(!(lsl_err && !irq), "log mismatch raises the interrupt at once");
          if (retire) retired++;
          chk(retired <= len, "no retirement past the End RCP");
          if (retired > len) break;
        end
      end
      // compare and restore
      begin
        int n, irq_end;
        n = 0; irq_end = 0;
        while (!redirect) begin
          @(negedge clk); #1;
          n++;
          if (n > 400) break;
        end
        chk(redirect && rpc == pc + 4, "return after l.record");
        chk(irq == (fault != 0), $sformatf("error interrupt at the end (fault %0d)", fault));
        @(negedge clk);
        for (int r = 1; r < 32; r++) chk(gpr[r] == saved[r], $sformatf("x%0d restored", r));
        chk(done_tgl != done0, "segment completion toggled");
        chk(!replaying, "re-execution over");
      end
      n_rounds++;
    end
    chk(n_mism > 0, "register mismatch seen");
    chk(n_irq > 0 && n_hold > 0, "interrupt and hold seen");
    $display("rounds=%0d irq_cycles=%0d mismatches=%0d hold_cycles=%0d", n_rounds, n_irq, n_mism, n_hold);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
