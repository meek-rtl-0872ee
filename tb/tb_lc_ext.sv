// tb_lc_ext: self-checking test of the MEEK additions to a little core.
// The testbench is the rest of the little core: a five-stage pipeline model
// that presents one instruction at a time in MA (held while ma_stall_o),
// the GPR file behind the ID-stage multiplexers, an L1 D-cache with random
// ready, and the fabric side, which streams a Start RCP, the run-time log
// of a segment and its End RCP into the log two packets per cycle.
// Each round runs a checker program:
//   application loads/stores (must use the cache), l.mode, l.record,
//   l.apply, l.rslt, l.jal, the re-executed segment (loads, stores and ALU
//   ops; loads must be served by the log with no cache access), then the
//   End RCP compare and restore.
// Faults are injected on some rounds: a store whose data differs from the
// log, or a register value that differs at the End RCP. Checked: cache or
// log used as the mode requires, load data, register contents after
// l.apply and after the restore, retirement held at the segment end,
// error outputs exactly for the faulty rounds, pc returned after l.record,
// completion toggled.
// The pipeline and cache models are this test's own simplified stand-ins for the little core.
module tb_lc_ext;
  import meek_pkg::*;
  logic clk = 0, rst_n = 0;
  logic ma_valid = 0, ma_stall;
  logic [31:0] instr = 0;
  logic [XLEN-1:0] ma_pc = 0, ma_rs1 = 0, ma_rs2 = 0, ma_addr = 0, ma_wdata = 0, ma_rdata;
  logic retire, hold, redirect;
  logic [XLEN-1:0] rpc;
  logic pwen = 0;
  logic [15:0] tid = 16'd4;
  logic [AREG_W-1:0] pwaddr = 0, gwaddr, graddr;
  logic [XLEN-1:0] pwdata = 0, gwdata, grdata;
  logic own, gwen;
  logic dreq, dwe, dready = 1;
  logic [XLEN-1:0] daddr, dwdata, drdata;
  logic [1:0] fv = 0;
  pkt_t [1:0] fp;
  logic fready, cmode, irq, done_tgl, lerr, mism, replaying;
  logic [8:0] rtc;
  logic [6:0] stc;
  logic [XLEN-1:0] gpr [32];
  logic [XLEN-1:0] mem [256];
  pkt_t fq [512];
  int fh = 0, ft = 0;
  int checks = 0, failures = 0;
  int n_irq = 0, n_lerr = 0, n_mism = 0, n_log_ld = 0, n_app = 0;

  lc_ext #(.CORE_ID(1)) dut (.clk, .rst_n,
    .ma_valid_i(ma_valid), .ma_instr_i(instr), .ma_pc_i(ma_pc), .ma_rs1_i(ma_rs1), .ma_rs2_i(ma_rs2),
    .ma_addr_i(ma_addr), .ma_wdata_i(ma_wdata), .ma_csr_rdata_i(64'hC5),
    .ma_stall_o(ma_stall), .ma_rdata_o(ma_rdata),
    .retire_i(retire), .retire_hold_o(hold), .redirect_o(redirect), .redirect_pc_o(rpc), .cur_tid_i(tid),
    .pipe_gpr_wen_i(pwen), .pipe_gpr_waddr_i(pwaddr), .pipe_gpr_wdata_i(pwdata),
    .gpr_own_o(own), .gpr_wen_o(gwen), .gpr_waddr_o(gwaddr), .gpr_wdata_o(gwdata),
    .gpr_raddr_o(graddr), .gpr_rdata_i(grdata),
    .dc_req_o(dreq), .dc_we_o(dwe), .dc_addr_o(daddr), .dc_wdata_o(dwdata), .dc_ready_i(dready), .dc_rdata_i(drdata),
    .f2_vld_i(fv), .f2_pkt_i(fp), .f2_ready_o(fready),
    .check_mode_o(cmode), .err_irq_o(irq), .done_tgl_o(done_tgl), .lsl_err_o(lerr), .ercp_mismatch_o(mism),
    .replaying_o(replaying), .lsl_rt_count_o(rtc), .lsl_st_count_o(stc));

  assign grdata = gpr[graddr];
  assign drdata = mem[daddr[10:3]];
  assign retire = ma_valid && !ma_stall;

  always #5 clk = ~clk;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  always @(posedge clk) begin
    if (gwen && gwaddr != 0) gpr[gwaddr] <= gwdata;
    if (dreq && dwe && dready) mem[daddr[10:3]] <= dwdata;
    if (irq) n_irq++;
    if (lerr) n_lerr++;
    if (mism) n_mism++;
  end
  always @(negedge clk) dready = ($urandom_range(0, 3) != 0);

  // Fabric side: two packets per cycle while the log has room.
  always @(negedge clk) begin
    if (fready && ft != fh && $urandom_range(0, 3) != 0) begin
      fv[0] = 1'b1; fp[0] = fq[fh % 512];
      fv[1] = (ft - fh > 1); fp[1] = fq[(fh + 1) % 512];
    end else fv = '0;
  end
  always @(posedge clk) if (rst_n) fh <= fh + int'(fv[0]) + int'(fv[1]);

  task automatic fpush(input pkt_t p);
    fq[ft % 512] = p;
    ft++;
  endtask
  task automatic send_rcp(input logic [XLEN-1:0] pc_v, input int len, input logic [XLEN-1:0] regs [32]);
    pkt_t p;
    p = '0; p.kind = PK_HDR; p.addr = pc_v; p.data = XLEN'(len);
    fpush(p);
    for (int r = 1; r < 32; r++) begin
      p = '0; p.kind = PK_REG; p.idx = 5'(r); p.data = regs[r];
      fpush(p);
    end
  endtask

  function automatic logic [31:0] enc(input logic [6:0] opc, input int f3, input int rd);
    return {7'b0, 5'd0, 5'd0, 3'(f3), 5'(rd), opc};
  endfunction

  // Run one instruction through MA; returns the read data of its last cycle.
  task automatic exec(input logic [31:0] i, input logic [XLEN-1:0] a, input logic [XLEN-1:0] b,
                      input logic [XLEN-1:0] addr, input logic [XLEN-1:0] wd, output logic [XLEN-1:0] rd,
                      output bit used_cache);
    int n;
    n = 0;
    used_cache = 0;
    @(negedge clk);
    instr = i; ma_rs1 = a; ma_rs2 = b; ma_addr = addr; ma_wdata = wd; ma_valid = 1;
    #1;
    while (ma_stall || hold) begin
      if (dreq && !own) used_cache = 1;
      if (hold) break;
      @(negedge clk); #1;
      n++;
      if (n > 1000) begin chk(0, "instruction leaves MA"); break; end
    end
    if (dreq && !own) used_cache = 1;
    rd = ma_rdata;
    // a load writes its destination as it retires
    if (i[6:0] == OPC_LOAD && cmode) begin pwen = 1; pwaddr = i[11:7]; pwdata = ma_rdata; end
    @(negedge clk);
    ma_valid = 0;
    pwen = 0;
  endtask

  logic [XLEN-1:0] saved [32], srcp [32], ercp [32];
  initial begin
    logic [XLEN-1:0] rd;
    bit uc;
    for (int r = 0; r < 32; r++) gpr[r] = (r == 0) ? '0 : {$urandom, $urandom};
    for (int i = 0; i < 256; i++) mem[i] = {$urandom, $urandom};
    fp = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 12; round++) begin
      int len, fault, done0, bad_at;
      logic [XLEN-1:0] seg_pc;
      fault = round % 3;                      // 0 clean, 1 store mismatch, 2 register mismatch
      len = $urandom_range(4, 30);
      bad_at = $urandom_range(0, len - 1);
      done0 = done_tgl;
      seg_pc = 64'h2000 + 64'(round * 256);
      // another thread runs in application mode: its loads use the cache
      tid = 16'd4;
      for (int k = 0; k < 4; k++) begin
        logic [XLEN-1:0] a;
        a = 64'(8 * $urandom_range(64, 255));
        exec(enc(OPC_LOAD, 3, 5), 0, 0, a, 0, rd, uc);
        chk(uc && rd == mem[a[10:3]], "application load from the cache");
        n_app++;
      end
      tid = 16'd3;                          // the checker thread
      ma_pc = 64'h9000 + 64'(round * 16);
      exec(enc(OPC_MEEK, MK_L_MODE, 0), 64'd1, 64'd1, 0, 0, rd, uc);
      for (int r = 1; r < 32; r++) saved[r] = gpr[r];
      exec(enc(OPC_MEEK, MK_L_RECORD, 0), 64'h0, 0, 0, 0, rd, uc);
      chk(cmode, "check mode after l.record");
      for (int r = 1; r < 32; r++) chk(mem[r] == saved[r], "registers recorded to memory");
      // the fabric sends the segment
      for (int r = 1; r < 32; r++) srcp[r] = {$urandom, $urandom};
      send_rcp(seg_pc, 0, srcp);
      for (int r = 1; r < 32; r++) ercp[r] = srcp[r];
      begin
        logic [XLEN-1:0] ld_addr [64], ld_data [64];
        bit is_ld [64];
        pkt_t p;
        for (int k = 0; k < len; k++) begin
          is_ld[k] = (fault == 1 && k == bad_at) ? 1'b0 : 1'($urandom_range(0, 1));
          ld_addr[k] = {$urandom, $urandom};
          ld_data[k] = {$urandom, $urandom};
          p = '0; p.kind = is_ld[k] ? PK_LOAD : PK_STORE; p.addr = ld_addr[k]; p.data = ld_data[k];
          fpush(p);
          if (is_ld[k]) ercp[5 + k % 4] = ld_data[k];
        end
        begin
          logic [XLEN-1:0] e [32];
          for (int r = 0; r < 32; r++) e[r] = ercp[r];
          if (fault == 2) e[17] = ~e[17];
          send_rcp(0, len, e);
        end
        exec(enc(OPC_MEEK, MK_L_APPLY, 0), 0, 0, 0, 0, rd, uc);
        for (int r = 1; r < 32; r++) chk(gpr[r] == srcp[r], "Start RCP applied");
        exec(enc(OPC_MEEK, MK_L_RSLT, 0), 0, 0, 0, 0, rd, uc);
        chk(rd[0] == 1'b1, "l.rslt: no error before the segment");
        exec(enc(OPC_MEEK, MK_L_JAL, 0), seg_pc, 0, 0, 0, rd, uc);
        // re-execute the segment
        for (int k = 0; k < len; k++) begin
          if (is_ld[k]) begin
            exec(enc(OPC_LOAD, 3, 5 + k % 4), 0, 0, ld_addr[k], 0, rd, uc);
            chk(!uc && rd == ld_data[k], "check-mode load served by the log");
            n_log_ld++;
          end else begin
            exec(enc(OPC_STORE, 3, 0), 0, 0, ld_addr[k],
                 (fault == 1 && k == bad_at) ? ~ld_data[k] : ld_data[k], rd, uc);
            chk(!uc, "check-mode store kept off the cache");
          end
        end
        // the next instruction must be held at the End RCP
        @(negedge clk);
        #1;
        begin
          int n;
          n = 0;
          while (!redirect && n < 500) begin @(negedge clk); #1; n++; end
          chk(redirect && rpc == ma_pc + 4, "return after l.record");
          chk(irq == (fault != 0), $sformatf("error reported for fault %0d", fault));
        end
        @(negedge clk);
        for (int r = 1; r < 32; r++) chk(gpr[r] == saved[r], "registers restored");
        chk(done_tgl != done0, "completion toggled");
      end
    end
    chk(n_lerr > 0 && n_mism > 0, "both fault kinds detected");
    $display("app_loads=%0d log_loads=%0d lsl_err=%0d ercp_mismatch=%0d irq=%0d", n_app, n_log_ld, n_lerr, n_mism, n_irq);
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
