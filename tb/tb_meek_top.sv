// tb_meek_top: end-to-end test of the whole MEEK fabric at full size.
// The top is instantiated with its default parameters (four commit lanes,
// four little cores, 5000-instruction time-out, 4 KB load-store log).
// Clocks: big core 250 MHz, little cores 100 MHz (unrelated periods).
//
// Big-core model: commits a random instruction trace (ALU, loads, stores,
// CSR reads, an occasional trap) up to four per cycle with register
// renaming over 128 physical registers (free list, commit map), so the DEU
// must read the right physical registers through the PRF controllers. The
// trace starts with b.hook for every little core and b.check on, has a long
// ALU-only stretch (time-out RCP) and ends with b.check off. LSQ parity is
// corrupted a few times. The core's own PRF reads are checked for
// preemption.
//
// Little-core model: each core runs the checker program
//   l.mode(me, check); loop { l.record; wait for l.rslt "SRCP waiting";
//   l.apply; l.jal(0); re-execute the segment from the committed trace;
//   End RCP compare and restore; read l.rslt }
// with a GPR file, a D-cache model and a pipeline that writes back at
// retirement. Some segments are re-executed with a fault (a store with
// wrong data, or a wrong register value); exactly those must be reported.
//
// Every mechanism is counted and the test fails if any never happened:
// commit held, fabric stall, multicast, two-packet cycles, RCP by time-out,
// log-full, trap and b.check off, parity error, PRF preemption, check mode
// entry, retirement hold, segments passed, log mismatch and register
// mismatch detected.
// The big-core and little-core models are this test's own behavioural stand-ins; they run the checker sequence of MEEK instructions described for the checker thread.
module tb_meek_top;
  import meek_pkg::*;
  localparam int CW = COMMIT_W, NL = NUM_LITTLE, NTR = 32768;
  localparam logic [XLEN-1:0] PC0 = 64'h1000;

  logic clk_big = 0, clk_little = 0, rst_big_n = 0, rst_little_n = 0;
  always #2 clk_big = ~clk_big;
  always #5 clk_little = ~clk_little;

  commit_t [CW-1:0] commit;
  logic cvalid = 0, cready, trap = 0;
  lsq_t [CW-1:0] lsq;
  logic [11:0] csr_raddr;
  logic [XLEN-1:0] csr_rdata;
  logic [DEU_PORTS-1:0][PREG_W-1:0] core_raddr, prf_raddr;
  logic [DEU_PORTS-1:0][XLEN-1:0] core_rdata, prf_rdata;
  logic [DEU_PORTS-1:0] preempt;
  logic perr, rcp, chk_en, f2_stall;
  logic [NL-1:0] hook;
  logic [NL-1:0] ma_valid, ma_stall, retire, hold, redirect, pwen, own, gwen, dreq, dwe, dready;
  logic [NL-1:0][31:0] ma_instr;
  logic [NL-1:0][XLEN-1:0] ma_pc, ma_rs1, ma_rs2, ma_addr, ma_wdata, ma_csr, ma_rdata, rpc, pwdata, gwdata, grdata;
  logic [NL-1:0][XLEN-1:0] daddr, dwdata, drdata;
  logic [NL-1:0][15:0] tid;
  logic [NL-1:0][AREG_W-1:0] pwaddr, gwaddr, graddr;
  logic [NL-1:0] cmode, irq, lerr, mism, replaying;
  logic [NL-1:0][8:0] rtc;
  logic [NL-1:0][6:0] stc;
  logic owner_v;
  logic [1:0] owner;

  meek_top dut (
    .clk_big, .rst_big_n, .clk_little, .rst_little_n,
    .commit_i(commit), .commit_valid_i(cvalid), .commit_ready_o(cready), .trap_i(trap),
    .lsq_i(lsq), .csr_raddr_o(csr_raddr), .csr_rdata_i(csr_rdata),
    .core_prf_raddr_i(core_raddr), .core_prf_rdata_o(core_rdata), .core_prf_preempt_o(preempt),
    .prf_raddr_o(prf_raddr), .prf_rdata_i(prf_rdata),
    .parity_err_o(perr), .rcp_o(rcp), .check_en_o(chk_en), .hook_mask_o(hook), .f2_stall_o(f2_stall), .f2_owner_valid_o(owner_v), .f2_owner_o(owner),
    .ma_valid_i(ma_valid), .ma_instr_i(ma_instr), .ma_pc_i(ma_pc), .ma_rs1_i(ma_rs1), .ma_rs2_i(ma_rs2),
    .ma_addr_i(ma_addr), .ma_wdata_i(ma_wdata), .ma_csr_rdata_i(ma_csr), .ma_stall_o(ma_stall), .ma_rdata_o(ma_rdata),
    .retire_i(retire), .retire_hold_o(hold), .redirect_o(redirect), .redirect_pc_o(rpc), .cur_tid_i(tid),
    .pipe_gpr_wen_i(pwen), .pipe_gpr_waddr_i(pwaddr), .pipe_gpr_wdata_i(pwdata),
    .gpr_own_o(own), .gpr_wen_o(gwen), .gpr_waddr_o(gwaddr), .gpr_wdata_o(gwdata),
    .gpr_raddr_o(graddr), .gpr_rdata_i(grdata),
    .dc_req_o(dreq), .dc_we_o(dwe), .dc_addr_o(daddr), .dc_wdata_o(dwdata), .dc_ready_i(dready), .dc_rdata_i(drdata),
    .check_mode_o(cmode), .err_irq_o(irq), .lsl_err_o(lerr), .ercp_mismatch_o(mism),
    .replaying_o(replaying), .lsl_rt_count_o(rtc), .lsl_st_count_o(stc));

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 30) $display("FAIL %s @%0t", what, $time); end
  endtask

  // ---------------- committed trace ----------------
  int           tr_kind [NTR];   // 0 ALU, 1 load, 2 store, 3 CSR, 4 MEEK
  logic [4:0]   tr_rd   [NTR];
  logic [XLEN-1:0] tr_val [NTR], tr_addr [NTR];
  int n_tr = 0;                  // instructions committed so far
  int seg_end [int];             // segment start index -> end index
  int last_start = -1;
  int n_segs = 0, n_checked = 0, all_done = 0;

  // ---------------- big-core model ----------------
  logic [XLEN-1:0] prf [128];
  logic [PREG_W-1:0] cmap [32];
  logic [PREG_W-1:0] freel [128];
  int fl_h = 0, fl_t = 0;
  for (genvar p = 0; p < DEU_PORTS; p++) begin : g_prf
    assign prf_rdata[p] = prf[prf_raddr[p]];
  end
  assign csr_rdata = {40'hC5_0000_0000, 12'h0, csr_raddr};

  int n_hold = 0, n_f2stall = 0, n_multi = 0, n_dual = 0, n_perr = 0, n_preempt = 0;
  int n_tout = 0, n_full = 0, n_trap = 0, n_final = 0, n_on = 0;
  int seg_i = 0, seg_e = 0;      // instructions and log entries of the open segment
  logic fired = 0, rcp_s = 0, trap_s = 0;
  commit_t [CW-1:0] commit_s;

  always @(posedge clk_big) begin
    fired    <= cvalid && cready;
    rcp_s    <= rcp;
    trap_s   <= trap;
    commit_s <= commit;
    if (cvalid && !cready) n_hold++;
    if (f2_stall) n_f2stall++;
    if (perr) n_perr++;
    if (owner_v) chk(hook[owner], "open segment owned by a hooked core");
    for (int s = 0; s < 2; s++) begin
      int m;
      m = 0;
      for (int c = 0; c < NL; c++) m += int'(dut.u_f2.lc_vld_o[c][s]);
      if (m > 1) n_multi++;
    end
    if (|dut.u_f2.lc_vld_o[0][1] || |dut.u_f2.lc_vld_o[1][1] || |dut.u_f2.lc_vld_o[2][1] || |dut.u_f2.lc_vld_o[3][1]) n_dual++;
  end

  function automatic commit_t mk_instr(input int kind, input int idx);
    commit_t c;
    c = '0;
    c.valid = 1'b1;
    c.pc = PC0 + XLEN'(4 * idx);
    c.npc = c.pc + 4;
    case (kind)
      0: c.opcode = 7'b0110011;
      1: c.opcode = OPC_LOAD;
      2: c.opcode = OPC_STORE;
      3: begin c.opcode = OPC_SYSTEM; c.funct3 = 3'd2; c.imm12 = 12'($urandom_range(0, 4095)); end
      default: c.opcode = OPC_MEEK;
    endcase
    return c;
  endfunction

  // Build one commit group starting at trace index n_tr (not yet committed).
  int pending;
  task automatic build_group(input int mode);
    int idx;
    commit = '0;
    trap = 1'b0;
    idx = n_tr;
    pending = 0;
    for (int l = 0; l < CW; l++) begin
      int k;
      if (l > 0 && $urandom_range(0, 5) == 0) break;
      case (mode)
        1: k = 0;                                    // ALU-only stretch
        default: begin
          k = $urandom_range(0, 9);
          k = (k < 4) ? 0 : (k < 7) ? 1 : (k < 9) ? 2 : 3;
        end
      endcase
      if (k == 3) for (int j = 0; j < l; j++) if (tr_kind[idx + j] == 3) k = 0;   // one CSR per group
      commit[l] = mk_instr(k, idx + l);
      tr_kind[idx + l] = k;
      tr_rd[idx + l] = (k == 2) ? 5'd0 : 5'($urandom_range(1, 31));
      tr_addr[idx + l] = {$urandom, $urandom} & ~64'h7;
      tr_val[idx + l] = {$urandom, $urandom};
      if (k == 3) begin tr_val[idx + l] = {40'hC5_0000_0000, 12'h0, commit[l].imm12}; tr_addr[idx + l] = XLEN'(commit[l].imm12); end
      commit[l].wen = (tr_rd[idx + l] != 0);
      commit[l].ldst = tr_rd[idx + l];
      lsq[l].addr = tr_addr[idx + l];
      lsq[l].data = tr_val[idx + l];
      lsq[l].parity = byte_parity(tr_val[idx + l]);
      if ((k == 1 || k == 2) && $urandom_range(0, 3000) == 0) lsq[l].parity[0] = ~lsq[l].parity[0];
      pending++;
    end
    trap = (mode == 0) && ($urandom_range(0, 1500) == 0);
  endtask

  // A single MEEK instruction group (b.hook, b.check).
  task automatic build_meek(input meek_op_e op, input logic [XLEN-1:0] a, input logic [XLEN-1:0] b);
    commit = '0;
    trap = 1'b0;
    commit[0] = mk_instr(4, n_tr);
    commit[0].funct3 = 3'(op);
    commit[0].src1 = a;
    commit[0].src2 = b;
    tr_kind[n_tr] = 4;
    tr_rd[n_tr] = 0;
    pending = 1;
  endtask

  // Allocate physical registers for the group (rename), just before offering it.
  task automatic rename();
    for (int l = 0; l < CW; l++) if (commit[l].valid && commit[l].wen) begin
      commit[l].pdst = freel[fl_h % 128];
      fl_h++;
    end
  endtask

  // Commit effects after the group fired.
  task automatic retire_group();
    for (int l = 0; l < CW; l++) if (commit_s[l].valid) begin
      int i;
      i = n_tr + l;
      if (commit_s[l].wen) begin
        prf[commit_s[l].pdst] = tr_val[i];
        freel[fl_t % 128] = cmap[commit_s[l].ldst];
        fl_t++;
        cmap[commit_s[l].ldst] = commit_s[l].pdst;
      end
      seg_i++;
      if (tr_kind[i] inside {1, 2, 3}) seg_e++;
    end
    n_tr += pending;
  endtask

  task automatic offer();
    rename();
    cvalid = 1'b1;
    forever begin
      @(negedge clk_big);
      if (fired) break;
    end
    cvalid = 1'b0;
    retire_group();
    if (rcp_s) begin
      if (commit_s[0].opcode == OPC_MEEK && commit_s[0].funct3 == 3'(MK_B_CHECK)) begin
        if (commit_s[0].src1[0]) n_on++; else n_final++;
      end else if (trap_s) n_trap++;
      else if (seg_i + CW > TIMEOUT) n_tout++;
      else n_full++;
      if (last_start >= 0) begin seg_end[last_start] = n_tr; n_segs++; end
      last_start = (commit_s[0].opcode == OPC_MEEK && commit_s[0].src1[0] == 1'b0) ? -1 : n_tr;
      seg_i = 0;
      seg_e = 0;
    end
  endtask

  initial begin : big_core
    for (int a = 0; a < 32; a++) begin cmap[a] = PREG_W'(a); prf[a] = (a == 0) ? '0 : {$urandom, $urandom}; end
    for (int p = 32; p < 128; p++) begin prf[p] = '0; freel[fl_t % 128] = PREG_W'(p); fl_t++; end
    commit = '0; lsq = '0;
    core_raddr = '0;
    repeat (3) @(posedge clk_little);
    rst_big_n = 1; rst_little_n = 1;
    repeat (5) @(negedge clk_big);
    for (int c = 0; c < NL; c++) begin build_meek(MK_B_HOOK, 0, XLEN'(c)); offer(); end
    chk(hook == '1, "all little cores hooked");
    // let the little cores set up their checker threads
    repeat (400) @(negedge clk_big);
    build_meek(MK_B_CHECK, 1, 0); offer();
    chk(chk_en, "checking enabled");
    while (n_tr < 9000) begin build_group(0); offer(); end
    while (n_tr < 15200) begin build_group(1); offer(); end           // time-out stretch
    while (n_tr < 20000) begin build_group(0); offer(); end
    build_meek(MK_B_CHECK, 0, 0); offer();
    chk(!chk_en, "checking disabled");
    all_done = 1;
  end

  // the core's own PRF reads
  always @(negedge clk_big) begin
    for (int p = 0; p < DEU_PORTS; p++) core_raddr[p] = PREG_W'($urandom);
    #1;
    for (int p = 0; p < DEU_PORTS; p++) begin
      if (preempt[p]) n_preempt++;
      else chk(core_rdata[p] == prf[core_raddr[p]], "core PRF read passes through");
    end
  end

  // ---------------- little cores ----------------
  int n_mode = 0, n_lhold = 0, n_pass = 0, n_lerr_seen = 0, n_mism_seen = 0, n_fault_segs = 0;
  for (genvar c = 0; c < NL; c++) begin : g_lc
    logic [XLEN-1:0] gpr [32];
    logic [XLEN-1:0] mem [64];
    logic mv = 0, wen = 0, cm_q = 0;
    logic [31:0] ins = 0;
    logic [XLEN-1:0] pc = 0, a1 = 0, addr = 0, wd = 0, wdat = 0;
    logic [4:0] wa = 0;
    bit lerr_q = 0, mism_q = 0;

    assign ma_valid[c] = mv;
    assign ma_instr[c] = ins;
    assign ma_pc[c] = pc;
    assign ma_rs1[c] = a1;
    assign ma_rs2[c] = 64'd1;
    assign ma_addr[c] = addr;
    assign ma_wdata[c] = wd;
    assign ma_csr[c] = '0;
    assign tid[c] = 16'd1;
    assign retire[c] = mv && !ma_stall[c];
    assign pwen[c] = wen;
    assign pwaddr[c] = wa;
    assign pwdata[c] = wdat;
    assign grdata[c] = gpr[graddr[c]];
    assign drdata[c] = mem[daddr[c][8:3]];

    always @(posedge clk_little) begin
      if (gwen[c] && gwaddr[c] != 0) gpr[gwaddr[c]] <= gwdata[c];
      if (dreq[c] && dwe[c] && dready[c]) mem[daddr[c][8:3]] <= dwdata[c];
      if (hold[c]) n_lhold++;
      if (cmode[c] && !cm_q) n_mode++;
      cm_q <= cmode[c];
      if (lerr[c]) lerr_q <= 1;
      if (mism[c]) mism_q <= 1;
    end
    always @(negedge clk_little) dready[c] = ($urandom_range(0, 4) != 0);

    // One instruction through MA; write-back (if any) as it retires.
    task automatic exec(input logic [31:0] i, input logic [XLEN-1:0] r1, input logic [XLEN-1:0] ad,
                        input logic [XLEN-1:0] wdv, input bit wb, input logic [XLEN-1:0] wbv,
                        input bit wb_from_mem, output logic [XLEN-1:0] rdata);
      int n;
      n = 0;
      @(negedge clk_little);
      ins = i; a1 = r1; addr = ad; wd = wdv; mv = 1;
      #1;
      while (ma_stall[c]) begin
        @(negedge clk_little); #1;
        n++;
        if (n > 20000) begin chk(0, "little core instruction completes"); break; end
      end
      rdata = ma_rdata[c];
      if (wb) begin wen = 1; wa = i[11:7]; wdat = wb_from_mem ? ma_rdata[c] : wbv; end
      @(negedge clk_little);
      mv = 0; wen = 0;
    endtask

    function automatic logic [31:0] enc(input logic [6:0] opc, input int f3, input int rd);
      return {7'b0, 5'd0, 5'd0, 3'(f3), 5'(rd), opc};
    endfunction

    initial begin : lc_program
      logic [XLEN-1:0] r;
      for (int k = 0; k < 32; k++) gpr[k] = '0;
      for (int k = 0; k < 64; k++) mem[k] = '0;
      wait (rst_little_n);
      repeat (3) @(negedge clk_little);
      pc = 64'h8000_0000 + 64'(c * 256);
      exec(enc(OPC_MEEK, MK_L_MODE, 0), XLEN'(c), 0, 0, 0, 0, 0, r);
      forever begin
        int start, stop, fault, bad, nst;
        logic [XLEN-1:0] saved [32];
        for (int k = 1; k < 32; k++) gpr[k] = {$urandom, $urandom};   // the checker's own state
        for (int k = 0; k < 32; k++) saved[k] = gpr[k];
        exec(enc(OPC_MEEK, MK_L_RECORD, 0), 64'h0, 0, 0, 0, 0, 0, r);
        chk(cmode[c], "checker thread in check mode");
        // wait for a Start RCP
        r = 0;
        while (!r[1]) begin
          exec(enc(OPC_MEEK, MK_L_RSLT, 0), 0, 0, 0, 0, 0, 0, r);
          if (!r[1]) repeat (20) @(negedge clk_little);
        end
        exec(enc(OPC_MEEK, MK_L_APPLY, 0), 0, 0, 0, 0, 0, 0, r);
        // l.jal(0): jump to the SRCP's pc
        @(negedge clk_little);
        ins = enc(OPC_MEEK, MK_L_JAL, 0); a1 = 0; mv = 1;
        #1;
        start = int'((rpc[c] - PC0) / 4);
        chk(redirect[c] && rpc[c] >= PC0, "l.jal to the segment start");
        @(negedge clk_little);
        mv = 0;
        while (!seg_end.exists(start)) @(negedge clk_little);
        stop = seg_end[start];
        nst = 0;
        for (int i = start; i < stop; i++) if (tr_kind[i] == 2) nst++;
        fault = $urandom_range(0, 5);
        fault = (fault == 0 && nst > 0) ? 1 : (fault == 1 && stop > start) ? 2 : 0;
        bad = -1;
        if (fault == 1) begin
          for (int i = start; i < stop; i++) if (tr_kind[i] == 2 && bad < 0 && $urandom_range(0, 1)) bad = i;
          if (bad < 0) for (int i = start; i < stop; i++) if (tr_kind[i] == 2) bad = i;
        end
        if (fault == 2) begin
          // last writer of some register: its final value will differ
          for (int i = stop - 1; i >= start && bad < 0; i--) if (tr_kind[i] == 0 && tr_rd[i] != 0) begin
            bit later;
            later = 0;
            for (int j = i + 1; j < stop; j++) if (tr_rd[j] == tr_rd[i]) later = 1;
            if (!later) bad = i;
          end
          if (bad < 0) fault = 0;
        end
        if (fault != 0) n_fault_segs++;
        lerr_q = 0; mism_q = 0;
        for (int i = start; i < stop; i++) begin
          logic [XLEN-1:0] v;
          v = tr_val[i];
          if (fault == 2 && i == bad) v = ~v;
          case (tr_kind[i])
            1: begin
              exec(enc(OPC_LOAD, 3, tr_rd[i]), 0, tr_addr[i], 0, 1, 0, 1, r);
              chk(r == tr_val[i], "load replayed from the log");
            end
            2: exec(enc(OPC_STORE, 3, 0), 0, tr_addr[i], (fault == 1 && i == bad) ? ~tr_val[i] : tr_val[i], 0, 0, 0, r);
            3: exec(enc(OPC_SYSTEM, 2, tr_rd[i]), 0, tr_addr[i], 0, 1, 0, 1, r);   // CSR number on the address
            default: exec(enc(7'b0110011, 0, tr_rd[i]), 0, 0, 0, tr_rd[i] != 0, v, 0, r);
          endcase
        end
        // End RCP: compare, restore, return
        begin
          int n;
          n = 0;
          @(negedge clk_little); #1;
          while (!redirect[c]) begin @(negedge clk_little); #1; n++; if (n > 5000) break; end
          chk(redirect[c] && rpc[c] == pc + 4, "return to the checker after the segment");
          chk(irq[c] == (fault != 0), $sformatf("core %0d segment %0d..%0d fault %0d reported correctly", c, start, stop, fault));
          @(negedge clk_little);
          for (int k = 1; k < 32; k++) chk(gpr[k] == saved[k], "checker registers restored");
          if (fault == 1) chk(lerr_q, "store mismatch found by the log compare");
          if (fault == 2) chk(mism_q, "register mismatch found at the End RCP");
          if (lerr_q) n_lerr_seen++;
          if (mism_q) n_mism_seen++;
          if (fault == 0 && irq[c] == 0) n_pass++;
          exec(enc(OPC_MEEK, MK_L_RSLT, 0), 0, 0, 0, 0, 0, 0, r);
          chk(r[0] == (fault == 0), "l.rslt reports the result");
        end
        n_checked++;
      end
    end
  end

  initial begin
    wait (all_done);
    while (n_checked < n_segs) @(negedge clk_little);
    repeat (50) @(negedge clk_little);
    chk(n_checked == n_segs, "every segment checked");
    chk(n_hold > 0, "commit held by the DEU");
    chk(n_f2stall > 0, "fabric waited for a free little core");
    chk(n_multi > 0, "status data multicast");
    chk(n_dual > 0, "two packets in one cycle");
    chk(n_tout > 0, "RCP by time-out");
    chk(n_full > 0, "RCP by log capacity");
    chk(n_trap > 0, "RCP by trap");
    chk(n_final > 0 && n_on > 0, "first and final RCP by b.check");
    chk(n_perr > 0, "LSQ parity error detected");
    chk(n_preempt > 0, "PRF read ports preempted");
    chk(n_mode >= NL, "little cores entered check mode");
    chk(n_lhold > 0, "retirement held at the End RCP");
    chk(n_pass > 0, "segments passed");
    chk(n_lerr_seen > 0, "log mismatch detected");
    chk(n_mism_seen > 0, "register mismatch detected");
    $display("instr=%0d segments=%0d checked=%0d passed=%0d faulty=%0d", n_tr, n_segs, n_checked, n_pass, n_fault_segs);
    $display("rcp: timeout=%0d logfull=%0d trap=%0d on=%0d final=%0d", n_tout, n_full, n_trap, n_on, n_final);
    $display("commit_hold=%0d f2_stall=%0d multicast=%0d dual=%0d parity=%0d preempt=%0d mode=%0d lc_hold=%0d lsl_err=%0d mismatch=%0d",
             n_hold, n_f2stall, n_multi, n_dual, n_perr, n_preempt, n_mode, n_lhold, n_lerr_seen, n_mism_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  // second watchdog: no instruction committed and no segment checked for a
  // long stretch means the system is stuck
  initial begin
    int last, idle;
    last = -1; idle = 0;
    forever begin
      @(posedge clk_little);
      if (n_tr + n_checked != last) begin last = n_tr + n_checked; idle = 0; end
      else idle++;
      if (idle == 60000) begin
        failures++;
        $display("no progress: checked %0d of %0d segments, %0d instructions", n_checked, n_segs, n_tr);
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end
  initial begin
    repeat (3000000) @(posedge clk_little);
    failures++;
    $display("watchdog: checked %0d of %0d segments", n_checked, n_segs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
