// hm_noc: re-ordering stage and Half-duplex Multicast NoC of the fabric.
//
// Input: the heads of the status and run-time FIFOs of all DC-Buffers
// (index 2*l is lane l's status FIFO, 2*l+1 its run-time FIFO). Every packet
// carries a program-order sequence number. The re-ordering stage keeps the
// number it expects next and, each cycle, looks for the head holding it and
// the head holding the one after, so up to two packets leave per cycle in
// exactly the order the big core committed them.
//
// Routing is one-way (big core to little cores) and 1-to-N. The unit keeps
// the "owner", the little core re-executing the open segment:
//   * loads, stores and CSR packets go to the owner only;
//   * an RCP header ends the owner's segment and opens the next one on a
//     new owner, the next hooked core in round-robin order that has
//     finished its previous segment. The header and the 31 register packets
//     after it are multicast to both: they are the old owner's End RCP and
//     the new owner's Start RCP, sent once. A final header (checking turned
//     off) only goes to the old owner.
// A little core reports each finished segment by toggling lc_done_tgl_i,
// which is synchronised here (two flops); the core is free again when its
// toggle equals the one this unit flipped when it gave it a segment.
// If no hooked core is free, the header waits (stall_o), the DC-Buffers fill
// and finally the big core's commit is held. With no core hooked at all,
// packets are discarded. A packet moves only when every destination port
// can take an entry (lc_ready_i); each port takes a pair of packets per
// cycle. A header always moves alone, as the first slot.
//
// Paper: two packets per cycle, order preserved, selective multicast of
// status data to the SRCP and ERCP cores, only to cores able to receive.
// Own choices: the round-robin owner policy, the completion toggle, and
// building the 1-to-N network as a single logical stage; the Manhattan-grid
// topology the paper names is not described there and is not modelled.
module hm_noc
  import meek_pkg::*;
#(
  parameter int CW = COMMIT_W,
  parameter int NL = NUM_LITTLE
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [2*CW-1:0]           head_valid_i,
  input  seq_pkt_t [2*CW-1:0]       head_i,
  output logic [2*CW-1:0]           pop_o,
  input  logic [NL-1:0]             hook_mask_i,
  input  logic [NL-1:0]             lc_done_tgl_i,
  input  logic [NL-1:0]             lc_ready_i,
  output logic [NL-1:0][1:0]        lc_vld_o,
  output pkt_t [1:0]                lc_pkt_o,     // same pair to every port
  output logic                      stall_o,
  output logic                      owner_valid_o,
  output logic [$clog2(NL > 1 ? NL : 2)-1:0] owner_o
);
  localparam int NH = 2 * CW;
  localparam int OW = $clog2(NL > 1 ? NL : 2);

  logic [SEQ_W-1:0] next_seq_q;
  logic [OW-1:0]    owner_q;
  logic             owner_v_q;
  logic [NL-1:0]    st_mask_q;
  logic [NL-1:0]    assigned_q;
  logic [NL-1:0]    done_s1, done_s2;

  // Find the heads holding the next two sequence numbers.
  logic          m0, m1;
  logic [$clog2(NH)-1:0] i0, i1;
  always_comb begin
    m0 = 1'b0; m1 = 1'b0; i0 = '0; i1 = '0;
    for (int h = 0; h < NH; h++) begin
      if (head_valid_i[h] && head_i[h].seq == next_seq_q)        begin m0 = 1'b1; i0 = h[$clog2(NH)-1:0]; end
      if (head_valid_i[h] && head_i[h].seq == next_seq_q + 1'b1) begin m1 = 1'b1; i1 = h[$clog2(NH)-1:0]; end
    end
  end

  pkt_t p0, p1;
  assign p0 = head_i[i0].pkt;
  assign p1 = head_i[i1].pkt;

  // Free cores and the new owner for a header.
  logic [NL-1:0] free;
  logic          new_found;
  logic [OW-1:0] new_owner;
  always_comb begin
    free = hook_mask_i & ~(assigned_q ^ done_s2);
    if (owner_v_q) free[owner_q] = 1'b0;
    new_found = 1'b0;
    new_owner = '0;
    for (int k = NL; k >= 1; k--) begin
      if (free[(int'(owner_q) + k) % NL]) begin
        new_found = 1'b1;
        new_owner = OW'((int'(owner_q) + k) % NL);
      end
    end
  end

  function automatic logic [NL-1:0] onehot(input logic [OW-1:0] i);
    onehot = '0;
    onehot[i] = 1'b1;
  endfunction

  logic [NL-1:0] mask0, mask1, old_mask, new_mask;
  logic          hdr0, final0, send0, send1, hdr_wait;
  always_comb begin
    old_mask = owner_v_q ? onehot(owner_q) : '0;
    hdr0     = (p0.kind == PK_HDR);
    final0   = p0.idx[0];
    new_mask = (!final0 && new_found) ? onehot(new_owner) : '0;
    hdr_wait = m0 && hdr0 && !final0 && (hook_mask_i != '0) && !new_found;
    case (p0.kind)
      PK_HDR:  mask0 = old_mask | new_mask;
      PK_REG:  mask0 = st_mask_q;
      default: mask0 = old_mask;
    endcase
    case (p1.kind)
      PK_REG:  mask1 = st_mask_q;
      default: mask1 = old_mask;
    endcase
    send0 = m0 && !hdr_wait && ((mask0 & ~lc_ready_i) == '0);
    send1 = send0 && !hdr0 && m1 && (p1.kind != PK_HDR) && ((mask1 & ~lc_ready_i) == '0);
    pop_o = '0;
    if (send0) pop_o[i0] = 1'b1;
    if (send1) pop_o[i1] = 1'b1;
    for (int c = 0; c < NL; c++) begin
      lc_vld_o[c][0] = send0 && mask0[c];
      lc_vld_o[c][1] = send1 && mask1[c];
    end
  end
  assign lc_pkt_o[0]   = p0;
  assign lc_pkt_o[1]   = p1;
  assign stall_o       = hdr_wait;
  assign owner_valid_o = owner_v_q;
  assign owner_o       = owner_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      next_seq_q <= '0;
      owner_q    <= '0;
      owner_v_q  <= 1'b0;
      st_mask_q  <= '0;
      assigned_q <= '0;
      done_s1    <= '0;
      done_s2    <= '0;
    end else begin
      done_s1 <= lc_done_tgl_i;
      done_s2 <= done_s1;
      next_seq_q <= next_seq_q + SEQ_W'(send0) + SEQ_W'(send1);
      if (send0 && hdr0) begin
        st_mask_q <= mask0;
        owner_v_q <= (new_mask != '0);
        if (new_mask != '0) begin
          owner_q <= new_owner;
          assigned_q[new_owner] <= ~assigned_q[new_owner];
        end
      end
    end
  end
endmodule
