// meek_top: heterogeneous parallel error detection hardware (MEEK).
//
// One out-of-order big core is checked by NUM_LITTLE in-order little cores.
// This module holds everything the scheme adds to the two kinds of core:
//   big-core clock domain:  the Data Extraction Unit (deu) at the commit
//     stage, the PRF controllers (prf_ctrl) that let the DEU preempt the
//     register-file read ports, and the Forwarding Fabric (f2): one
//     DC-Buffer per commit lane and the re-ordering multicast NoC;
//   crossing:               one asynchronous FIFO (cdc_fifo) per little core,
//     each entry a pair of packets;
//   little-core domain:     per little core the MSU, the LSL, the Mini-D and
//     the pipeline multiplexers (lc_ext).
// The cores themselves are outside: the big core's ROB commit lanes, LSQ
// head entries, CSR read port and physical register file read ports, and
// each little core's MA stage, retirement, GPR ports and D-cache port, are
// ports of this module (arrays indexed by little core).
//
// Flow: the DEU turns committed loads/stores/CSR reads into run-time
// packets and each Register Checkpoint into a header plus 31 register
// packets; the fabric sends them in program order, two per cycle, to the
// little core re-executing the segment (status data to both the core
// ending a segment and the one starting the next); the little core's MSU
// loads the start checkpoint, the core re-executes with memory served by
// its LSL, and the MSU compares against the end checkpoint. Mismatches raise
// err_irq_o; a parity error on forwarded LSQ data raises parity_err_o.
//
// Timing: clk_big is the big core's clock, clk_little is shared by all
// little cores (the reference configuration runs them at half the big
// core's frequency). The two domains meet only in the cdc_fifo instances and
// in the done toggles, which are synchronised with two flops.
//
// Paper: the partition into DEU, F2 and little-core additions, the clock
// domains and CDC boxes, one little core per CDC, the parameters (4-wide
// commit, 4 little cores, 5000-instruction timeout, 4 KB log). Own choices:
// the FIFO depths, a single little-core clock, and the observation outputs
// (fabric owner, per-core replay flag and log occupancy) brought out for
// monitoring.
module meek_top
  import meek_pkg::*;
#(
  parameter int CW        = COMMIT_W,
  parameter int NL        = NUM_LITTLE,
  parameter int TOUT      = TIMEOUT,
  parameter int LSLB      = LSL_BYTES,
  parameter int BUF_DEPTH = 8,
  parameter int CDC_DEPTH = 8
) (
  // clocks and resets
  input  logic                           clk_big,
  input  logic                           rst_big_n,
  input  logic                           clk_little,
  input  logic                           rst_little_n,
  // big core: ROB commit
  input  commit_t [CW-1:0]               commit_i,
  input  logic                           commit_valid_i,
  output logic                           commit_ready_o,
  input  logic                           trap_i,
  // big core: LSQ head entries and CSR read port
  input  lsq_t [CW-1:0]                  lsq_i,
  output logic [11:0]                    csr_raddr_o,
  input  logic [XLEN-1:0]                csr_rdata_i,
  // big core: PRF read ports, core side and register-file side
  input  logic [DEU_PORTS-1:0][PREG_W-1:0] core_prf_raddr_i,
  output logic [DEU_PORTS-1:0][XLEN-1:0] core_prf_rdata_o,
  output logic [DEU_PORTS-1:0]           core_prf_preempt_o,
  output logic [DEU_PORTS-1:0][PREG_W-1:0] prf_raddr_o,
  input  logic [DEU_PORTS-1:0][XLEN-1:0] prf_rdata_i,
  // big-core side status
  output logic                           parity_err_o,
  output logic                           rcp_o,
  output logic                           check_en_o,
  output logic [NL-1:0]                  hook_mask_o,
  output logic                           f2_stall_o,
  output logic                           f2_owner_valid_o,
  output logic [$clog2(NL > 1 ? NL : 2)-1:0] f2_owner_o,
  // little cores: MA stage
  input  logic [NL-1:0]                  ma_valid_i,
  input  logic [NL-1:0][31:0]            ma_instr_i,
  input  logic [NL-1:0][XLEN-1:0]        ma_pc_i,
  input  logic [NL-1:0][XLEN-1:0]        ma_rs1_i,
  input  logic [NL-1:0][XLEN-1:0]        ma_rs2_i,
  input  logic [NL-1:0][XLEN-1:0]        ma_addr_i,
  input  logic [NL-1:0][XLEN-1:0]        ma_wdata_i,
  input  logic [NL-1:0][XLEN-1:0]        ma_csr_rdata_i,
  output logic [NL-1:0]                  ma_stall_o,
  output logic [NL-1:0][XLEN-1:0]        ma_rdata_o,
  // little cores: retirement, PC, thread
  input  logic [NL-1:0]                  retire_i,
  output logic [NL-1:0]                  retire_hold_o,
  output logic [NL-1:0]                  redirect_o,
  output logic [NL-1:0][XLEN-1:0]        redirect_pc_o,
  input  logic [NL-1:0][15:0]            cur_tid_i,
  // little cores: GPR ports
  input  logic [NL-1:0]                  pipe_gpr_wen_i,
  input  logic [NL-1:0][AREG_W-1:0]      pipe_gpr_waddr_i,
  input  logic [NL-1:0][XLEN-1:0]        pipe_gpr_wdata_i,
  output logic [NL-1:0]                  gpr_own_o,
  output logic [NL-1:0]                  gpr_wen_o,
  output logic [NL-1:0][AREG_W-1:0]      gpr_waddr_o,
  output logic [NL-1:0][XLEN-1:0]        gpr_wdata_o,
  output logic [NL-1:0][AREG_W-1:0]      gpr_raddr_o,
  input  logic [NL-1:0][XLEN-1:0]        gpr_rdata_i,
  // little cores: L1 D-cache ports
  output logic [NL-1:0]                  dc_req_o,
  output logic [NL-1:0]                  dc_we_o,
  output logic [NL-1:0][XLEN-1:0]        dc_addr_o,
  output logic [NL-1:0][XLEN-1:0]        dc_wdata_o,
  input  logic [NL-1:0]                  dc_ready_i,
  input  logic [NL-1:0][XLEN-1:0]        dc_rdata_i,
  // little cores: status
  output logic [NL-1:0]                  check_mode_o,
  output logic [NL-1:0]                  err_irq_o,
  output logic [NL-1:0]                  lsl_err_o,
  output logic [NL-1:0]                  ercp_mismatch_o,
  output logic [NL-1:0]                  replaying_o,
  output logic [NL-1:0][$clog2(LSLB / LSL_ENTRY_B):0] lsl_rt_count_o,
  output logic [NL-1:0][6:0]             lsl_st_count_o
);
  localparam int PAIR_W = 2 + 2 * $bits(pkt_t);

  // ---------------- big-core domain ----------------
  logic                            deu_en;
  logic [DEU_PORTS-1:0]            deu_rd_en;
  logic [DEU_PORTS-1:0][AREG_W-1:0] deu_areg;
  logic [DEU_PORTS-1:0][XLEN-1:0]  deu_rdata;
  logic [CW-1:0]                   rt_push, rt_ready, st_push, st_ready;
  seq_pkt_t [CW-1:0]               rt_pkt, st_pkt;
  logic [CW-1:0]                   cmt_we;
  logic [CW-1:0][AREG_W-1:0]       cmt_areg;
  logic [CW-1:0][PREG_W-1:0]       cmt_preg;

  deu #(.CW(CW), .NL(NL), .TOUT(TOUT), .LSL_ENTRIES(LSLB / LSL_ENTRY_B)) u_deu (
    .clk(clk_big), .rst_n(rst_big_n),
    .commit_i, .commit_valid_i, .commit_ready_o, .trap_i,
    .lsq_i, .csr_raddr_o, .csr_rdata_i,
    .deu_en_o(deu_en), .deu_rd_en_o(deu_rd_en), .deu_areg_o(deu_areg), .deu_rdata_i(deu_rdata),
    .rt_push_o(rt_push), .rt_pkt_o(rt_pkt), .rt_ready_i(rt_ready),
    .st_push_o(st_push), .st_pkt_o(st_pkt), .st_ready_i(st_ready),
    .parity_err_o, .rcp_o, .check_en_o, .hook_mask_o
  );

  always_comb begin
    for (int l = 0; l < CW; l++) begin
      cmt_we[l]   = commit_valid_i && commit_ready_o && commit_i[l].valid && commit_i[l].wen;
      cmt_areg[l] = commit_i[l].ldst;
      cmt_preg[l] = commit_i[l].pdst;
    end
  end

  prf_ctrl #(.CW(CW)) u_prf_ctrl (
    .clk(clk_big), .rst_n(rst_big_n),
    .cmt_we_i(cmt_we), .cmt_areg_i(cmt_areg), .cmt_preg_i(cmt_preg),
    .deu_en_i(deu_en), .deu_rd_en_i(deu_rd_en), .deu_areg_i(deu_areg), .deu_rdata_o(deu_rdata),
    .core_raddr_i(core_prf_raddr_i), .core_rdata_o(core_prf_rdata_o), .core_preempt_o(core_prf_preempt_o),
    .prf_raddr_o, .prf_rdata_i
  );

  logic [NL-1:0]      lc_ready, done_tgl;
  logic [NL-1:0][1:0] lc_vld;
  pkt_t [1:0]         lc_pkt;

  f2 #(.CW(CW), .NL(NL), .BUF_DEPTH(BUF_DEPTH)) u_f2 (
    .clk(clk_big), .rst_n(rst_big_n),
    .rt_push_i(rt_push), .rt_pkt_i(rt_pkt), .rt_ready_o(rt_ready),
    .st_push_i(st_push), .st_pkt_i(st_pkt), .st_ready_o(st_ready),
    .hook_mask_i(hook_mask_o), .lc_done_tgl_i(done_tgl), .lc_ready_i(lc_ready),
    .lc_vld_o(lc_vld), .lc_pkt_o(lc_pkt), .stall_o(f2_stall_o),
    .owner_valid_o(f2_owner_valid_o), .owner_o(f2_owner_o)
  );

  // ---------------- crossing and little-core domain ----------------
  for (genvar c = 0; c < NL; c++) begin : g_little
    logic [PAIR_W-1:0] wpair, rpair;
    logic              rvalid, f2_ready;
    logic [1:0]        in_vld;
    pkt_t [1:0]        in_pkt;

    assign wpair = {lc_vld[c], lc_pkt[1], lc_pkt[0]};

    cdc_fifo #(.WIDTH(PAIR_W), .DEPTH(CDC_DEPTH)) u_cdc (
      .wclk(clk_big), .wrst_n(rst_big_n),
      .wvalid(|lc_vld[c]), .wdata(wpair), .wready(lc_ready[c]),
      .rclk(clk_little), .rrst_n(rst_little_n),
      .rvalid(rvalid), .rdata(rpair), .rready(f2_ready)
    );

    assign in_vld = rvalid ? rpair[PAIR_W-1 -: 2] : 2'b00;
    assign in_pkt = rpair[PAIR_W-3:0];

    lc_ext #(.CORE_ID(c), .LSLB(LSLB)) u_ext (
      .clk(clk_little), .rst_n(rst_little_n),
      .ma_valid_i(ma_valid_i[c]), .ma_instr_i(ma_instr_i[c]), .ma_pc_i(ma_pc_i[c]),
      .ma_rs1_i(ma_rs1_i[c]), .ma_rs2_i(ma_rs2_i[c]), .ma_addr_i(ma_addr_i[c]),
      .ma_wdata_i(ma_wdata_i[c]), .ma_csr_rdata_i(ma_csr_rdata_i[c]),
      .ma_stall_o(ma_stall_o[c]), .ma_rdata_o(ma_rdata_o[c]),
      .retire_i(retire_i[c]), .retire_hold_o(retire_hold_o[c]),
      .redirect_o(redirect_o[c]), .redirect_pc_o(redirect_pc_o[c]), .cur_tid_i(cur_tid_i[c]),
      .pipe_gpr_wen_i(pipe_gpr_wen_i[c]), .pipe_gpr_waddr_i(pipe_gpr_waddr_i[c]), .pipe_gpr_wdata_i(pipe_gpr_wdata_i[c]),
      .gpr_own_o(gpr_own_o[c]), .gpr_wen_o(gpr_wen_o[c]), .gpr_waddr_o(gpr_waddr_o[c]),
      .gpr_wdata_o(gpr_wdata_o[c]), .gpr_raddr_o(gpr_raddr_o[c]), .gpr_rdata_i(gpr_rdata_i[c]),
      .dc_req_o(dc_req_o[c]), .dc_we_o(dc_we_o[c]), .dc_addr_o(dc_addr_o[c]), .dc_wdata_o(dc_wdata_o[c]),
      .dc_ready_i(dc_ready_i[c]), .dc_rdata_i(dc_rdata_i[c]),
      .f2_vld_i(in_vld), .f2_pkt_i(in_pkt), .f2_ready_o(f2_ready),
      .check_mode_o(check_mode_o[c]), .err_irq_o(err_irq_o[c]), .done_tgl_o(done_tgl[c]),
      .lsl_err_o(lsl_err_o[c]), .ercp_mismatch_o(ercp_mismatch_o[c]),
      .replaying_o(replaying_o[c]), .lsl_rt_count_o(lsl_rt_count_o[c]), .lsl_st_count_o(lsl_st_count_o[c])
    );
  end
endmodule
