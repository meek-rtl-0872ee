// deu: Data Extraction Unit, the read-only observation channel at commit.
//
// Combines the commit detector, the control circuits and the bypass paths.
// In every commit cycle each lane whose instruction is a load or a store
// forwards the entry at the top of the LSQ (address, data); a CSR read
// forwards the value of the CSR it names, read through a CSR read port.
// These run-time packets go, one per lane, into the run-time FIFO of that
// lane's DC-Buffer. When an RCP is reached the control circuits read x1..x31
// through the PRF controllers (three per cycle) and push a header plus
// register packets into the status FIFOs; the commit stage is held
// (commit_ready_o low) until the registers are out.
//
// The LSQ holds a copy of the cache's per-byte parity. The parity of each
// forwarded data word is recomputed and compared; a difference raises
// parity_err_o, since the LSQ is the one place where the data would
// otherwise be covered neither by the cache parity nor by duplication.
//
// Every packet gets a sequence number in program order (lanes in order,
// header before registers, registers in ascending order) so that the
// fabric can restore the order across the per-lane FIFOs.
//
// Handshake: the core commits a group when commit_valid_i && commit_ready_o.
// commit_ready_o requires no extraction in progress and room in every
// run-time FIFO. Status beats wait for room in all status FIFOs.
//
// Paper: what is extracted, from where, when, and the parity re-check.
// Own choices: per-byte even parity, one CSR commit per cycle, lane
// assignment of status words (ports on lanes 0..2, header on the last lane).
module deu
  import meek_pkg::*;
#(
  parameter int CW          = COMMIT_W,
  parameter int NL          = NUM_LITTLE,
  parameter int TOUT        = TIMEOUT,
  parameter int LSL_ENTRIES = LSL_BYTES / LSL_ENTRY_B
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // ROB commit
  input  commit_t [CW-1:0]              commit_i,
  input  logic                          commit_valid_i,
  output logic                          commit_ready_o,
  input  logic                          trap_i,
  // LSQ and CSR bypass
  input  lsq_t [CW-1:0]                 lsq_i,
  output logic [11:0]                   csr_raddr_o,
  input  logic [XLEN-1:0]               csr_rdata_i,
  // PRF controllers
  output logic                          deu_en_o,
  output logic [DEU_PORTS-1:0]          deu_rd_en_o,
  output logic [DEU_PORTS-1:0][AREG_W-1:0] deu_areg_o,
  input  logic [DEU_PORTS-1:0][XLEN-1:0] deu_rdata_i,
  // to the DC-Buffers
  output logic [CW-1:0]                 rt_push_o,
  output seq_pkt_t [CW-1:0]             rt_pkt_o,
  input  logic [CW-1:0]                 rt_ready_i,
  output logic [CW-1:0]                 st_push_o,
  output seq_pkt_t [CW-1:0]             st_pkt_o,
  input  logic [CW-1:0]                 st_ready_i,
  // status
  output logic                          parity_err_o,
  output logic                          rcp_o,
  output logic                          check_en_o,
  output logic [NL-1:0]                 hook_mask_o
);
  rt_kind_e [CW-1:0]   rt_kind;
  logic                rcp, rcp_final, fire, busy, beat, hdr, beat_ready;
  logic [ICNT_W-1:0]   seg_icount;
  logic [XLEN-1:0]     last_npc;
  pkt_t                hdr_pkt;
  logic [SEQ_W-1:0]    seq_q, seq_rt, seq_st;

  assign fire           = commit_valid_i && commit_ready_o;
  assign commit_ready_o = !busy && (&rt_ready_i);
  assign beat_ready     = &st_ready_i;
  assign rcp_o          = rcp;

  commit_detector #(.CW(CW), .NL(NL), .TOUT(TOUT), .LSL_ENTRIES(LSL_ENTRIES)) u_cd (
    .clk, .rst_n,
    .commit_i, .commit_fire_i(fire), .trap_i,
    .rt_kind_o(rt_kind), .rcp_o(rcp), .rcp_final_o(rcp_final),
    .seg_icount_o(seg_icount), .check_en_o, .hook_mask_o
  );

  always_comb begin
    last_npc = '0;
    for (int l = 0; l < CW; l++) if (commit_i[l].valid) last_npc = commit_i[l].npc;
  end

  deu_ctrl u_ctrl (
    .clk, .rst_n,
    .start_i(rcp), .hdr_pc_i(last_npc), .hdr_icount_i(seg_icount), .hdr_final_i(rcp_final),
    .beat_ready_i(beat_ready),
    .busy_o(busy), .beat_o(beat), .hdr_o(hdr), .hdr_pkt_o(hdr_pkt),
    .rd_en_o(deu_rd_en_o), .rd_areg_o(deu_areg_o)
  );
  assign deu_en_o = busy;

  // Run-time packets (bypass from the LSQ top and the CSR file).
  always_comb begin
    logic csr_taken;
    csr_taken    = 1'b0;
    csr_raddr_o  = '0;
    parity_err_o = 1'b0;
    seq_rt       = seq_q;
    for (int l = 0; l < CW; l++) begin
      rt_push_o[l] = 1'b0;
      rt_pkt_o[l]  = '0;
      if (fire && rt_kind[l] != RT_NONE) begin
        rt_push_o[l]    = 1'b1;
        rt_pkt_o[l].seq = seq_rt;
        seq_rt          = seq_rt + 1'b1;
        case (rt_kind[l])
          RT_LOAD, RT_STORE: begin
            rt_pkt_o[l].pkt.kind = (rt_kind[l] == RT_LOAD) ? PK_LOAD : PK_STORE;
            rt_pkt_o[l].pkt.addr = lsq_i[l].addr;
            rt_pkt_o[l].pkt.data = lsq_i[l].data;
            if (byte_parity(lsq_i[l].data) != lsq_i[l].parity) parity_err_o = 1'b1;
          end
          default: begin
            rt_pkt_o[l].pkt.kind = PK_CSR;
            rt_pkt_o[l].pkt.addr = XLEN'(commit_i[l].imm12);
            rt_pkt_o[l].pkt.data = csr_rdata_i;
            if (!csr_taken) csr_raddr_o = commit_i[l].imm12;
            csr_taken = 1'b1;
          end
        endcase
      end
    end
  end

  // Status packets (header + up to DEU_PORTS registers per beat).
  always_comb begin
    seq_st = seq_q;
    for (int l = 0; l < CW; l++) begin
      st_push_o[l] = 1'b0;
      st_pkt_o[l]  = '0;
    end
    if (beat && beat_ready) begin
      if (hdr) begin
        st_push_o[CW-1]    = 1'b1;
        st_pkt_o[CW-1].seq = seq_st;
        st_pkt_o[CW-1].pkt = hdr_pkt;
        seq_st = seq_st + 1'b1;
      end
      for (int p = 0; p < DEU_PORTS; p++) begin
        if (deu_rd_en_o[p]) begin
          st_push_o[p]          = 1'b1;
          st_pkt_o[p].seq       = seq_st;
          st_pkt_o[p].pkt.kind  = PK_REG;
          st_pkt_o[p].pkt.idx   = deu_areg_o[p];
          st_pkt_o[p].pkt.data  = deu_rdata_i[p];
          seq_st = seq_st + 1'b1;
        end
      end
    end
  end

  // Commit and extraction never overlap, so only one of the two advances
  // the sequence counter in a cycle.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) seq_q <= '0;
    else        seq_q <= busy ? seq_st : seq_rt;
  end
endmodule
