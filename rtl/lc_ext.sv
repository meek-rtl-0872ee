// lc_ext: the MEEK additions to one in-order little core.
//
// Wraps the Mode Switch Unit, the Load-Store Log and the Mini-Decoder, and
// holds the multiplexers the paper adds to a five-stage pipeline:
//   * MA stage: the Mini-D classifies the instruction in MA. A load, store
//     or CSR read goes to the L1 D-cache (application mode) or to the LSL
//     (check mode); a demultiplexer returns the read data (cache, log, CSR
//     file or l.rslt value) on ma_rdata_o. MEEK instructions go to the MSU.
//   * ID stage: the GPR write and read ports are switched to the MSU while
//     it records, applies, checks or restores registers (gpr_own_o tells
//     the pipeline to hold).
//   * The D-cache port is shared: the MSU's record/restore traffic has it
//     while the MSU owns the GPRs.
// The MA instruction completes in the cycle ma_stall_o is low. The cache
// port is a same-cycle request/ready port (a hit returns data in the cycle
// dc_ready_i is high). Packets from the fabric enter the LSL two at a time.
//
// The Mini-D's register-field and l.jal outputs are left open here: the
// pipeline's own decoder already supplies the operands and the MSU drives
// the redirect, so only the classification is used.
//
// Paper: placement of the LSL and its multiplexer/demultiplexer at MA, the
// ID-stage multiplexer pair, the Mini-D at MA, the MSU. Own choices: the
// cache-port timing, that the address given is already translated (the
// paper combines the virtual index with the TLB's physical tag), and that
// for a CSR read the core puts the CSR number on ma_addr_i, so the log
// compares the CSR number where it compares the address of a load.
module lc_ext
  import meek_pkg::*;
#(
  parameter int CORE_ID = 0,
  parameter int LSLB    = LSL_BYTES
) (
  input  logic              clk,
  input  logic              rst_n,
  // MA stage
  input  logic              ma_valid_i,
  input  logic [31:0]       ma_instr_i,
  input  logic [XLEN-1:0]   ma_pc_i,
  input  logic [XLEN-1:0]   ma_rs1_i,
  input  logic [XLEN-1:0]   ma_rs2_i,
  input  logic [XLEN-1:0]   ma_addr_i,
  input  logic [XLEN-1:0]   ma_wdata_i,
  input  logic [XLEN-1:0]   ma_csr_rdata_i,
  output logic              ma_stall_o,
  output logic [XLEN-1:0]   ma_rdata_o,
  // write-back / retirement
  input  logic              retire_i,
  output logic              retire_hold_o,
  output logic              redirect_o,
  output logic [XLEN-1:0]   redirect_pc_o,
  input  logic [15:0]       cur_tid_i,
  // GPR ports (pipeline side in, register file side out)
  input  logic              pipe_gpr_wen_i,
  input  logic [AREG_W-1:0] pipe_gpr_waddr_i,
  input  logic [XLEN-1:0]   pipe_gpr_wdata_i,
  output logic              gpr_own_o,
  output logic              gpr_wen_o,
  output logic [AREG_W-1:0] gpr_waddr_o,
  output logic [XLEN-1:0]   gpr_wdata_o,
  output logic [AREG_W-1:0] gpr_raddr_o,
  input  logic [XLEN-1:0]   gpr_rdata_i,
  // L1 D-cache port
  output logic              dc_req_o,
  output logic              dc_we_o,
  output logic [XLEN-1:0]   dc_addr_o,
  output logic [XLEN-1:0]   dc_wdata_o,
  input  logic              dc_ready_i,
  input  logic [XLEN-1:0]   dc_rdata_i,
  // from the fabric (through the CDC)
  input  logic [1:0]        f2_vld_i,
  input  pkt_t [1:0]        f2_pkt_i,
  output logic              f2_ready_o,
  // status
  output logic              check_mode_o,
  output logic              err_irq_o,
  output logic              done_tgl_o,
  output logic              lsl_err_o,
  output logic              ercp_mismatch_o,
  output logic              replaying_o,      // re-executing a segment
  output logic [$clog2(LSLB / LSL_ENTRY_B):0] lsl_rt_count_o,  // log occupancy
  output logic [6:0]        lsl_st_count_o
);
  logic       is_meek;
  meek_op_e   op;
  rt_kind_e   kind;

  mini_dec u_mini_d (
    .instr_i(ma_instr_i), .meek_o(is_meek), .op_o(op), .kind_o(kind),
    .jal_o(), .rd_o(), .rs1_o(), .rs2_o()
  );

  // LSL
  logic            lsl_req, lsl_ready, lsl_err, st_valid, st_pop;
  logic [XLEN-1:0] lsl_rdata;
  pkt_t            st_pkt;

  // MSU
  logic            op_done, chk, m_own, m_wen, m_req, m_we;
  logic [AREG_W-1:0] m_waddr, m_raddr;
  logic [XLEN-1:0] m_wdata, m_addr, m_mwdata, rslt;

  assign lsl_req = ma_valid_i && chk && (kind != RT_NONE);

  lsl #(.LSLB(LSLB)) u_lsl (
    .clk, .rst_n,
    .in_vld_i(f2_vld_i), .in_pkt_i(f2_pkt_i), .in_ready_o(f2_ready_o),
    .req_valid_i(lsl_req), .req_kind_i(kind), .req_addr_i(ma_addr_i), .req_wdata_i(ma_wdata_i),
    .req_ready_o(lsl_ready), .rdata_o(lsl_rdata), .err_o(lsl_err),
    .st_valid_o(st_valid), .st_pkt_o(st_pkt), .st_pop_i(st_pop),
    .rt_count_o(lsl_rt_count_o), .st_count_o(lsl_st_count_o)
  );
  assign lsl_err_o = lsl_err;

  msu #(.CORE_ID(CORE_ID)) u_msu (
    .clk, .rst_n,
    .op_valid_i(ma_valid_i && is_meek), .op_i(op), .op_rs1_i(ma_rs1_i), .op_rs2_i(ma_rs2_i),
    .op_pc_i(ma_pc_i), .op_done_o(op_done), .rslt_o(rslt),
    .cur_tid_i, .check_mode_o(chk), .replaying_o,
    .gpr_own_o(m_own), .gpr_wen_o(m_wen), .gpr_waddr_o(m_waddr), .gpr_wdata_o(m_wdata),
    .gpr_raddr_o(m_raddr), .gpr_rdata_i,
    .mem_req_o(m_req), .mem_we_o(m_we), .mem_addr_o(m_addr), .mem_wdata_o(m_mwdata),
    .mem_ready_i(dc_ready_i), .mem_rdata_i(dc_rdata_i),
    .redirect_o, .redirect_pc_o, .retire_i, .retire_hold_o,
    .st_valid_i(st_valid), .st_pkt_i(st_pkt), .st_pop_o(st_pop), .lsl_err_i(lsl_err),
    .err_irq_o, .done_tgl_o, .ercp_mismatch_o
  );
  assign check_mode_o = chk;

  // ID-stage multiplexers.
  assign gpr_own_o   = m_own;
  assign gpr_wen_o   = m_own ? m_wen   : pipe_gpr_wen_i;
  assign gpr_waddr_o = m_own ? m_waddr : pipe_gpr_waddr_i;
  assign gpr_wdata_o = m_own ? m_wdata : pipe_gpr_wdata_i;
  assign gpr_raddr_o = m_raddr;

  // MA-stage multiplexer (address side) and demultiplexer (data side).
  logic app_mem;
  assign app_mem = ma_valid_i && !chk && (kind == RT_LOAD || kind == RT_STORE);
  always_comb begin
    if (m_own) begin
      dc_req_o   = m_req;
      dc_we_o    = m_we;
      dc_addr_o  = m_addr;
      dc_wdata_o = m_mwdata;
    end else begin
      dc_req_o   = app_mem;
      dc_we_o    = (kind == RT_STORE);
      dc_addr_o  = ma_addr_i;
      dc_wdata_o = ma_wdata_i;
    end
    ma_stall_o = 1'b0;
    ma_rdata_o = '0;
    if (ma_valid_i) begin
      if (is_meek) begin
        ma_stall_o = !op_done;
        ma_rdata_o = rslt;
      end else if (kind != RT_NONE && chk) begin
        ma_stall_o = !lsl_ready;
        ma_rdata_o = lsl_rdata;
      end else if (kind == RT_CSR) begin
        ma_rdata_o = ma_csr_rdata_i;
      end else if (kind != RT_NONE) begin
        ma_stall_o = m_own || !dc_ready_i;
        ma_rdata_o = dc_rdata_i;
      end
    end
  end
endmodule
