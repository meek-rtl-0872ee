// msu: Mode Switch Unit, the control engine added to a little core.
//
// Operational mode. A mode bit is set by l.mode (when its rs1 names this
// core; rs2[0] = 1 selects check mode, the other rs2 bits are ignored). Check mode is active only while the
// running thread is the checker thread: the MSU compares the current thread
// ID with the checker's, which it learns when the checker executes its
// first MEEK instruction, l.record. In check mode the core's loads, stores
// and CSR reads are served by the load-store log instead of the cache.
//
// MEEK instructions (one at a time from the MA stage; op_done_o ends one):
//   l.record rs1  save x1..x31 to memory at rs1 + 8*i (one store per cycle
//                 through the D-cache port) and remember pc+4 as the point
//                 to return to after a check;
//   l.apply       take the Start RCP from the log's status way: a header
//                 (PC, length) and 31 register values, written into the GPRs
//                 one per cycle through the ID-stage write multiplexer;
//   l.jal rs1     jump to rs1, or with rs1 = 0 to the PC carried by the
//                 last applied Start RCP header (the segment start), and
//                 start counting re-executed instructions;
//   l.rslt rd     rd = {.., SRCP waiting in the log, no mismatch so far};
//   l.mode        as above. b.hook/b.check do nothing on a little core.
// End of a segment. While re-executing, the MSU looks at the status way;
// once the End RCP header is there its length is known, and when the count
// of retired instructions reaches it, retirement is held (retire_hold_o),
// the header is taken and the 31 register values are compared with the
// GPRs, read one per cycle through the ID-stage read multiplexer. Then the
// saved registers are loaded back, the PC is redirected to the return
// point, done_tgl_o toggles to tell the fabric this core is free again, and
// on any mismatch (registers, or a log mismatch reported by the LSL during
// the segment) err_irq_o pulses.
//
// Paper: the mode and TID check, the role of each MEEK instruction, GPR
// recording/replacement through ID-stage multiplexers, verification at the
// End RCP. Own choices: the encodings above, how the checker TID is learnt,
// the l.rslt bit layout, l.jal with rs1 = 0 taking the SRCP's PC (standing
// in for the paper's NewSRCP()->pc), one GPR access per cycle, the
// completion toggle, and holding retirement at the End RCP so the checker
// cannot run past it.
module msu
  import meek_pkg::*;
#(
  parameter int CORE_ID = 0,
  parameter int TID_W   = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  // MEEK instruction from the MA stage
  input  logic               op_valid_i,
  input  meek_op_e           op_i,
  input  logic [XLEN-1:0]    op_rs1_i,
  input  logic [XLEN-1:0]    op_rs2_i,
  input  logic [XLEN-1:0]    op_pc_i,
  output logic               op_done_o,
  output logic [XLEN-1:0]    rslt_o,
  // thread and mode
  input  logic [TID_W-1:0]   cur_tid_i,
  output logic               check_mode_o,
  output logic               replaying_o,
  // GPR access through the ID-stage multiplexers
  output logic               gpr_own_o,
  output logic               gpr_wen_o,
  output logic [AREG_W-1:0]  gpr_waddr_o,
  output logic [XLEN-1:0]    gpr_wdata_o,
  output logic [AREG_W-1:0]  gpr_raddr_o,
  input  logic [XLEN-1:0]    gpr_rdata_i,
  // memory port for l.record and the restore (D-cache side)
  output logic               mem_req_o,
  output logic               mem_we_o,
  output logic [XLEN-1:0]    mem_addr_o,
  output logic [XLEN-1:0]    mem_wdata_o,
  input  logic               mem_ready_i,
  input  logic [XLEN-1:0]    mem_rdata_i,
  // PC control and retirement
  output logic               redirect_o,
  output logic [XLEN-1:0]    redirect_pc_o,
  input  logic               retire_i,
  output logic               retire_hold_o,
  // LSL status way and log errors
  input  logic               st_valid_i,
  input  pkt_t               st_pkt_i,
  output logic               st_pop_o,
  input  logic               lsl_err_i,
  // to the OS and the fabric
  output logic               err_irq_o,
  output logic               done_tgl_o,
  output logic               ercp_mismatch_o
);
  typedef enum logic [2:0] {S_IDLE, S_REC, S_APP_HDR, S_APP_REG, S_CHK_REG, S_RESTORE} state_e;
  state_e state_q;

  logic               mode_q, tid_v_q, replay_q, err_q, done_q;
  logic [TID_W-1:0]   tid_q;
  logic [XLEN-1:0]    ret_pc_q, base_q, srcp_pc_q;
  logic [AREG_W-1:0]  idx_q;
  logic [ICNT_W-1:0]  cnt_q;
  logic               ercp_known, at_end, hdr_head, reg_head, reg_bad;

  assign check_mode_o  = mode_q && tid_v_q && (cur_tid_i == tid_q);
  assign replaying_o   = replay_q;
  assign hdr_head      = st_valid_i && (st_pkt_i.kind == PK_HDR);
  assign reg_head      = st_valid_i && (st_pkt_i.kind == PK_REG);
  assign ercp_known    = replay_q && hdr_head;
  assign at_end        = ercp_known && (XLEN'(cnt_q) == st_pkt_i.data);
  assign retire_hold_o = at_end || (state_q == S_CHK_REG) || (state_q == S_RESTORE);
  assign done_tgl_o    = done_q;
  assign reg_bad       = (st_pkt_i.data != gpr_rdata_i);

  always_comb begin
    op_done_o     = 1'b0;
    rslt_o        = '0;
    gpr_own_o     = 1'b0;
    gpr_wen_o     = 1'b0;
    gpr_waddr_o   = idx_q;
    gpr_wdata_o   = '0;
    gpr_raddr_o   = idx_q;
    mem_req_o     = 1'b0;
    mem_we_o      = 1'b0;
    mem_addr_o    = base_q + {{(XLEN-AREG_W-3){1'b0}}, idx_q, 3'b000};
    mem_wdata_o   = gpr_rdata_i;
    redirect_o    = 1'b0;
    redirect_pc_o = op_rs1_i;
    st_pop_o      = 1'b0;
    err_irq_o     = check_mode_o && lsl_err_i;
    ercp_mismatch_o = 1'b0;
    case (state_q)
      S_IDLE: begin
        if (at_end) begin
          st_pop_o = 1'b1;                        // take the End RCP header
        end else if (op_valid_i) begin
          case (op_i)
            MK_L_RECORD, MK_L_APPLY: ;            // multi-cycle, finish later
            MK_L_JAL: begin
              op_done_o     = 1'b1;
              redirect_o    = 1'b1;
              redirect_pc_o = (op_rs1_i == '0) ? srcp_pc_q : op_rs1_i;
            end
            MK_L_RSLT: begin
              op_done_o = 1'b1;
              rslt_o    = {{(XLEN-2){1'b0}}, hdr_head && !replay_q, !err_q};
            end
            default: op_done_o = 1'b1;            // l.mode, b.* : one cycle
          endcase
        end
      end
      S_REC: begin
        gpr_own_o = 1'b1;
        mem_req_o = 1'b1;
        mem_we_o  = 1'b1;
        if (mem_ready_i && idx_q == 5'd31) op_done_o = 1'b1;
      end
      S_APP_HDR: begin
        if (hdr_head) st_pop_o = 1'b1;
        else if (st_valid_i) st_pop_o = 1'b1;     // drop a stray register word
      end
      S_APP_REG: begin
        gpr_own_o = 1'b1;
        if (reg_head) begin
          st_pop_o    = 1'b1;
          gpr_wen_o   = 1'b1;
          gpr_waddr_o = st_pkt_i.idx;
          gpr_wdata_o = st_pkt_i.data;
          if (idx_q == 5'd31) op_done_o = 1'b1;
        end
      end
      S_CHK_REG: begin
        gpr_own_o   = 1'b1;
        gpr_raddr_o = st_pkt_i.idx;
        if (reg_head) begin
          st_pop_o = 1'b1;
          ercp_mismatch_o = reg_bad;
        end
      end
      S_RESTORE: begin
        gpr_own_o = 1'b1;
        mem_req_o = 1'b1;
        if (mem_ready_i) begin
          gpr_wen_o   = 1'b1;
          gpr_wdata_o = mem_rdata_i;
          if (idx_q == 5'd31) begin
            redirect_o    = 1'b1;
            redirect_pc_o = ret_pc_q;
            err_irq_o     = err_q || (check_mode_o && lsl_err_i);
          end
        end
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q  <= S_IDLE;
      mode_q   <= 1'b0;
      tid_v_q  <= 1'b0;
      tid_q    <= '0;
      replay_q <= 1'b0;
      err_q    <= 1'b0;
      done_q   <= 1'b0;
      ret_pc_q <= '0;
      base_q   <= '0;
      srcp_pc_q <= '0;
      idx_q    <= '0;
      cnt_q    <= '0;
    end else begin
      if (check_mode_o && lsl_err_i) err_q <= 1'b1;
      if (replay_q && retire_i && !retire_hold_o) cnt_q <= cnt_q + 1'b1;
      case (state_q)
        S_IDLE: begin
          if (at_end) begin
            state_q <= S_CHK_REG;
            idx_q   <= 5'd1;
          end else if (op_valid_i) begin
            case (op_i)
              MK_L_MODE:
                if (op_rs1_i == XLEN'(CORE_ID)) mode_q <= op_rs2_i[0];
              MK_L_RECORD: begin
                ret_pc_q <= op_pc_i + 64'd4;
                base_q   <= op_rs1_i;
                tid_q    <= cur_tid_i;
                tid_v_q  <= 1'b1;
                idx_q    <= 5'd1;
                state_q  <= S_REC;
              end
              MK_L_APPLY: state_q <= S_APP_HDR;
              MK_L_JAL: begin
                replay_q <= 1'b1;
                cnt_q    <= '0;
              end
              default: ;
            endcase
          end
        end
        S_REC:
          if (mem_ready_i) begin
            idx_q <= idx_q + 1'b1;
            if (idx_q == 5'd31) state_q <= S_IDLE;
          end
        S_APP_HDR:
          if (hdr_head) begin
            err_q     <= 1'b0;                   // a new segment starts clean
            srcp_pc_q <= st_pkt_i.addr;
            idx_q   <= 5'd1;
            state_q <= S_APP_REG;
          end
        S_APP_REG:
          if (reg_head) begin
            idx_q <= idx_q + 1'b1;
            if (idx_q == 5'd31) state_q <= S_IDLE;
          end
        S_CHK_REG:
          if (reg_head) begin
            if (reg_bad) err_q <= 1'b1;
            idx_q <= idx_q + 1'b1;
            if (idx_q == 5'd31) begin
              idx_q   <= 5'd1;
              state_q <= S_RESTORE;
            end
          end
        S_RESTORE:
          if (mem_ready_i) begin
            idx_q <= idx_q + 1'b1;
            if (idx_q == 5'd31) begin
              replay_q <= 1'b0;
              done_q   <= ~done_q;
              state_q  <= S_IDLE;
            end
          end
        default: state_q <= S_IDLE;
      endcase
    end
  end
endmodule
