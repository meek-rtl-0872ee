// tb_commit_detector: self-checking test of the commit detector.
// Drives commit groups and compares the run-time classification, the RCP
// decisions (enable, LSL-full, time-out, trap, disable), the segment length
// and the hook mask with a small reference model kept in the testbench.
// Time-out and log size are scaled down (20 instructions, 12 entries).
// The reference model is written from the RCP rules (log full, timeout, trap, b.check) independently of the RTL.
module tb_commit_detector;
  import meek_pkg::*;
  localparam int CW = 4, NL = 4, TOUT = 20, LSLE = 12;
  logic clk = 0, rst_n = 0;
  commit_t [CW-1:0] commit;
  logic fire = 0, trap = 0;
  rt_kind_e [CW-1:0] kind;
  logic rcp, rcp_final, en;
  logic [ICNT_W-1:0] icount;
  logic [NL-1:0] hook;
  int checks = 0, failures = 0;
  int m_icnt = 0, m_ecnt = 0;
  bit m_en = 0;
  int n_tout = 0, n_full = 0, n_trap = 0;

  commit_detector #(.CW(CW), .NL(NL), .TOUT(TOUT), .LSL_ENTRIES(LSLE)) dut (
    .clk, .rst_n, .commit_i(commit), .commit_fire_i(fire), .trap_i(trap),
    .rt_kind_o(kind), .rcp_o(rcp), .rcp_final_o(rcp_final), .seg_icount_o(icount),
    .check_en_o(en), .hook_mask_o(hook));

  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  function automatic commit_t mk(input logic [6:0] opc, input logic [2:0] f3, input logic [63:0] s1 = 0, input logic [63:0] s2 = 0);
    commit_t c = '0;
    c.valid = 1; c.opcode = opc; c.funct3 = f3; c.src1 = s1; c.src2 = s2;
    return c;
  endfunction

  // Present one group for one cycle and check against the model.
  task automatic group(input commit_t g [CW], input bit tr, input string tag);
    int n = 0, e = 0, exp_icnt;
    bit on = 0, off = 0, exp_rcp;
    for (int l = 0; l < CW; l++) begin
      commit[l] = g[l];
      if (g[l].valid) begin
        rt_kind_e k;
        n++;
        k = m_en ? classify(g[l].opcode, g[l].funct3) : RT_NONE;
        if (k != RT_NONE) e++;
        if (g[l].opcode == OPC_MEEK && g[l].funct3 == 3'd1) begin
          if (g[l].src1[0]) on = !m_en; else off = m_en;
        end
      end
    end
    trap = tr; fire = 1;
    #1;
    for (int l = 0; l < CW; l++)
      chk(kind[l] == ((m_en && g[l].valid) ? classify(g[l].opcode, g[l].funct3) : RT_NONE), {tag, " kind"});
    exp_rcp = on || off || (m_en && ((m_ecnt + e + CW > LSLE) || (m_icnt + n + CW > TOUT) || tr));
    chk(rcp == exp_rcp, $sformatf("%s rcp exp %0d got %0d", tag, exp_rcp, rcp));
    chk(rcp_final == off, {tag, " final"});
    exp_icnt = on ? 0 : (off ? m_icnt : m_icnt + n);
    if (exp_rcp) chk(icount == ICNT_W'(exp_icnt), $sformatf("%s icount exp %0d got %0d", tag, exp_icnt, icount));
    if (exp_rcp && m_en && (m_icnt + n + CW > TOUT)) n_tout++;
    if (exp_rcp && m_en && (m_ecnt + e + CW > LSLE)) n_full++;
    if (exp_rcp && m_en && tr) n_trap++;
    @(posedge clk); #1;
    fire = 0; trap = 0;
    if (exp_rcp) begin m_icnt = 0; m_ecnt = 0; end
    else if (m_en) begin m_icnt += n; m_ecnt += e; end
    if (on) m_en = 1;
    if (off) m_en = 0;
    chk(en == m_en, {tag, " en"});
  endtask

  commit_t g [CW];
  commit_t nop;
  initial begin
    nop = '0;
    commit = '0;
    repeat (2) @(posedge clk);
    rst_n = 1; #1;
    // Disabled: a load makes no run-time data.
    g = '{mk(OPC_LOAD, 3), nop, nop, nop};
    group(g, 0, "disabled");
    // Hooks.
    g = '{mk(OPC_MEEK, 0, 0, 2), nop, nop, nop}; group(g, 0, "hook2");
    chk(hook == 4'b0100, "hook mask 2");
    g = '{mk(OPC_MEEK, 0, 1, 1), nop, nop, nop}; group(g, 0, "hook other big");
    chk(hook == 4'b0100, "hook of another big core ignored");
    g = '{mk(OPC_MEEK, 0, 0, 9), nop, nop, nop}; group(g, 0, "unhook");
    chk(hook == 4'b0000, "hook cleared");
    g = '{mk(OPC_MEEK, 0, 0, 1), nop, nop, nop}; group(g, 0, "hook1");
    g = '{mk(OPC_MEEK, 0, 0, 3), nop, nop, nop}; group(g, 0, "hook3");
    chk(hook == 4'b1010, "hook mask 1,3");
    // Enable.
    g = '{mk(OPC_MEEK, 1, 1), nop, nop, nop}; group(g, 0, "enable");
    // Time-out: groups of ALU instructions.
    for (int i = 0; i < 6; i++) begin
      g = '{mk(7'b0110011, 0), mk(7'b0110011, 0), mk(7'b0010011, 0), mk(7'b0110011, 0)};
      group(g, 0, $sformatf("alu%0d", i));
    end
    // Classification and LSL-full.
    for (int i = 0; i < 4; i++) begin
      g = '{mk(OPC_LOAD, 3), mk(OPC_STORE, 3), mk(OPC_SYSTEM, 2), mk(OPC_SYSTEM, 0)};
      group(g, 0, $sformatf("mem%0d", i));
    end
    // Trap.
    g = '{mk(OPC_LOAD, 2), nop, nop, nop}; group(g, 1, "trap");
    // Random groups.
    for (int i = 0; i < 200; i++) begin
      for (int l = 0; l < CW; l++) begin
        logic [6:0] opcs [5] = '{OPC_LOAD, OPC_STORE, OPC_SYSTEM, 7'b0110011, OPC_AMO};
        g[l] = ($urandom_range(0, 4) == 0) ? nop : mk(opcs[$urandom_range(0, 4)], 3'($urandom_range(0, 7)));
      end
      group(g, $urandom_range(0, 30) == 0, $sformatf("rnd%0d", i));
    end
    // Disable: final RCP.
    g = '{mk(OPC_MEEK, 1, 0), nop, nop, nop}; group(g, 0, "disable");
    chk(n_tout > 0 && n_full > 0 && n_trap > 0, "all RCP causes seen");
    $display("RCP causes: timeout=%0d full=%0d trap=%0d", n_tout, n_full, n_trap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
