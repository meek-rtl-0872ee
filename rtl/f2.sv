// f2: the Forwarding Fabric between the DEU and the little cores.
//
// One DC-Buffer per commit path of the big core, whose FIFO heads feed the
// re-ordering and multicast stage (hm_noc). The DEU pushes at most one
// run-time and one status packet per lane per cycle; the fabric delivers up
// to two packets per cycle, in program order, to the little-core ports
// (lc_vld_o per port, lc_pkt_o shared). All of it runs in the big core's
// clock domain; the clock-domain crossing sits after it.
//
// Paper: DC-Buffers on every commit path, re-ordering multiplexer, HM-NoC.
// Own choices: see dc_buffer and hm_noc.
module f2
  import meek_pkg::*;
#(
  parameter int CW        = COMMIT_W,
  parameter int NL        = NUM_LITTLE,
  parameter int BUF_DEPTH = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [CW-1:0]        rt_push_i,
  input  seq_pkt_t [CW-1:0]    rt_pkt_i,
  output logic [CW-1:0]        rt_ready_o,
  input  logic [CW-1:0]        st_push_i,
  input  seq_pkt_t [CW-1:0]    st_pkt_i,
  output logic [CW-1:0]        st_ready_o,
  input  logic [NL-1:0]        hook_mask_i,
  input  logic [NL-1:0]        lc_done_tgl_i,
  input  logic [NL-1:0]        lc_ready_i,
  output logic [NL-1:0][1:0]   lc_vld_o,
  output pkt_t [1:0]           lc_pkt_o,
  output logic                 stall_o,
  output logic                 owner_valid_o,   // a segment is open
  output logic [$clog2(NL > 1 ? NL : 2)-1:0] owner_o  // core re-executing it
);
  logic [2*CW-1:0]     hv, pop;
  seq_pkt_t [2*CW-1:0] heads;

  for (genvar l = 0; l < CW; l++) begin : g_lane
    dc_buffer #(.DEPTH(BUF_DEPTH)) u_dcb (
      .clk, .rst_n,
      .st_push_i(st_push_i[l]), .st_pkt_i(st_pkt_i[l]), .st_ready_o(st_ready_o[l]),
      .rt_push_i(rt_push_i[l]), .rt_pkt_i(rt_pkt_i[l]), .rt_ready_o(rt_ready_o[l]),
      .st_valid_o(hv[2*l]),   .st_head_o(heads[2*l]),   .st_pop_i(pop[2*l]),
      .rt_valid_o(hv[2*l+1]), .rt_head_o(heads[2*l+1]), .rt_pop_i(pop[2*l+1])
    );
  end

  hm_noc #(.CW(CW), .NL(NL)) u_noc (
    .clk, .rst_n,
    .head_valid_i(hv), .head_i(heads), .pop_o(pop),
    .hook_mask_i, .lc_done_tgl_i, .lc_ready_i,
    .lc_vld_o, .lc_pkt_o, .stall_o,
    .owner_valid_o, .owner_o
  );
endmodule
