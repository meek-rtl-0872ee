// commit_detector: the Commit Detector (CD) of the Data Extraction Unit.
//
// Every cycle the ROB shows up to COMMIT_W committing instructions. The CD
// looks only at their opcode and function code (as in the paper) and
//   * classifies each lane's run-time data: load, store, CSR read or none;
//   * executes b.check (enable/disable checking) and b.hook (associate a
//     little core with this big core);
//   * counts the instructions and the log entries of the open segment and
//     decides when a Register Checkpoint (RCP) ends it: when the little
//     core's load-store log would overflow, when the segment reaches the
//     instruction time-out, when a trap into kernel mode commits, or when
//     checking is switched on (first RCP) or off (final RCP).
// The decision is combinational on the commit group (rcp_o is valid in the
// cycle commit_fire_i is high); the counters update at the clock edge.
//
// Paper: the RCP conditions, the time-out of 5000 instructions and the
// roles of b.hook/b.check. This design's choices: the RCP is placed at the
// end of a commit group; the log-full test counts entries sent against the
// log size less one commit group of headroom; the time-out fires early
// enough that no segment exceeds TIMEOUT; b.hook with a core index out of
// range clears all hooks; b.hook/b.check are expected to commit alone.
module commit_detector
  import meek_pkg::*;
#(
  parameter int CW          = COMMIT_W,
  parameter int NL          = NUM_LITTLE,
  parameter int TOUT        = TIMEOUT,
  parameter int LSL_ENTRIES = LSL_BYTES / LSL_ENTRY_B,
  parameter int BIG_ID      = 0
) (
  input  logic               clk,
  input  logic               rst_n,
  input  commit_t [CW-1:0]   commit_i,
  input  logic               commit_fire_i,
  input  logic               trap_i,
  output rt_kind_e [CW-1:0]  rt_kind_o,
  output logic               rcp_o,
  output logic               rcp_final_o,
  output logic [ICNT_W-1:0]  seg_icount_o,
  output logic               check_en_o,
  output logic [NL-1:0]      hook_mask_o
);
  logic [ICNT_W-1:0] icnt_q, icnt_next;
  logic [15:0]       ecnt_q, ecnt_next;
  logic              en_q;
  logic [NL-1:0]     hook_q;
  logic [$clog2(CW+1)-1:0] n_inst, n_rt;
  logic              chk_on, chk_off, do_hook;
  logic [XLEN-1:0]   hook_big, hook_little;

  always_comb begin
    n_inst = '0;
    n_rt   = '0;
    chk_on = 1'b0;
    chk_off = 1'b0;
    do_hook = 1'b0;
    hook_big = '0;
    hook_little = '0;
    for (int l = 0; l < CW; l++) begin
      rt_kind_o[l] = RT_NONE;
      if (commit_i[l].valid) begin
        n_inst = n_inst + 1'b1;
        if (en_q) rt_kind_o[l] = classify(commit_i[l].opcode, commit_i[l].funct3);
        if (rt_kind_o[l] != RT_NONE) n_rt = n_rt + 1'b1;
        if (commit_i[l].opcode == OPC_MEEK) begin
          if (commit_i[l].funct3 == MK_B_CHECK) begin
            if (commit_i[l].src1[0]) chk_on  = !en_q;
            else                     chk_off = en_q;
          end
          if (commit_i[l].funct3 == MK_B_HOOK) begin
            do_hook     = 1'b1;
            hook_big    = commit_i[l].src1;
            hook_little = commit_i[l].src2;
          end
        end
      end
    end
    icnt_next = icnt_q + ICNT_W'(n_inst);
    ecnt_next = ecnt_q + 16'(n_rt);
  end

  // RCP decision for this commit group.
  logic full_hit, tout_hit;
  assign full_hit = en_q && (32'(ecnt_next) + CW > LSL_ENTRIES);
  assign tout_hit = en_q && (32'(icnt_next) + CW > TOUT);
  assign rcp_o       = commit_fire_i && (chk_on || chk_off || (en_q && (full_hit || tout_hit || trap_i)));
  assign rcp_final_o = commit_fire_i && chk_off;
  assign seg_icount_o = chk_on ? '0 : (chk_off ? icnt_q : icnt_next);
  assign check_en_o  = en_q;
  assign hook_mask_o = hook_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      icnt_q <= '0;
      ecnt_q <= '0;
      en_q   <= 1'b0;
      hook_q <= '0;
    end else if (commit_fire_i) begin
      if (rcp_o) begin
        icnt_q <= '0;
        ecnt_q <= '0;
      end else if (en_q) begin
        icnt_q <= icnt_next;
        ecnt_q <= ecnt_next;
      end
      if (chk_on)  en_q <= 1'b1;
      if (chk_off) en_q <= 1'b0;
      if (do_hook && hook_big == XLEN'(BIG_ID)) begin
        if (hook_little < XLEN'(NL)) hook_q[hook_little[$clog2(NL > 1 ? NL : 2)-1:0]] <= 1'b1;
        else                         hook_q <= '0;
      end
    end
  end
endmodule
