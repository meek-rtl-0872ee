// lsl: Load-Store Log of a little core.
//
// Two FIFO "ways" fed from the fabric, two packets per cycle: the status
// way keeps RCP headers and register values, the run-time way keeps loads,
// stores and CSR reads (the packet kind selects the way, the data_type
// split of the paper's little-core figure). The little core reads both in
// order, which is why FIFOs suffice instead of an associative store.
//
// Replay access (check mode): the MA stage presents an access (kind,
// address, store data). When the run-time way is not empty (req_ready_o)
// the head entry is consumed in that cycle: a load or CSR read gets the
// logged data on rdata_o, and the LS-Comp comparator checks that the kind
// and address match the log and, for a store, that the data matches. A
// mismatch pulses err_o (to the interrupt line and the MSU). An empty log
// holds the access (req_ready_o low), which stalls the checker.
//
// Capacity: the run-time way holds LSL_BYTES / 16 entries (4 KB: 256
// entries of a 64-bit address and a 64-bit value); the status way holds
// ST_DEPTH words, enough for a start and an end checkpoint. in_ready_o
// means both ways can take two more packets.
//
// Paper: dual-way FIFOs, in-order access, comparison of addresses and data
// in the log, 4 KB. Own choices: the split of the ways, the entry format,
// the status-way size, and that the 4 KB count the run-time way only.
module lsl
  import meek_pkg::*;
#(
  parameter int LSLB     = LSL_BYTES,
  parameter int RT_DEPTH = LSLB / LSL_ENTRY_B,
  parameter int ST_DEPTH = 64
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [1:0]            in_vld_i,
  input  pkt_t [1:0]            in_pkt_i,
  output logic                  in_ready_o,
  input  logic                  req_valid_i,
  input  rt_kind_e              req_kind_i,
  input  logic [XLEN-1:0]       req_addr_i,
  input  logic [XLEN-1:0]       req_wdata_i,
  output logic                  req_ready_o,
  output logic [XLEN-1:0]       rdata_o,
  output logic                  err_o,
  output logic                  st_valid_o,
  output pkt_t                  st_pkt_o,
  input  logic                  st_pop_i,
  output logic [$clog2(RT_DEPTH):0] rt_count_o,
  output logic [$clog2(ST_DEPTH):0] st_count_o
);
  localparam int RA = $clog2(RT_DEPTH);
  localparam int SA = $clog2(ST_DEPTH);

  typedef struct packed {
    pkt_kind_e       kind;
    logic [XLEN-1:0] addr;
    logic [XLEN-1:0] data;
  } rt_ent_t;

  rt_ent_t rt_mem [RT_DEPTH];
  pkt_t    st_mem [ST_DEPTH];
  logic [RA:0] rt_wp, rt_rp;
  logic [SA:0] st_wp, st_rp;

  assign rt_count_o = rt_wp - rt_rp;
  assign st_count_o = st_wp - st_rp;
  assign in_ready_o = (rt_count_o <= (RA+1)'(RT_DEPTH - 2)) && (st_count_o <= (SA+1)'(ST_DEPTH - 2));

  // data_type demultiplexer: which way each incoming slot goes to.
  logic [1:0] to_st, to_rt;
  always_comb begin
    logic is_st;
    for (int s = 0; s < 2; s++) begin
      is_st    = (in_pkt_i[s].kind == PK_HDR) || (in_pkt_i[s].kind == PK_REG);
      to_st[s] = in_vld_i[s] && in_ready_o && is_st;
      to_rt[s] = in_vld_i[s] && in_ready_o && !is_st;
    end
  end

  // Replay side.
  rt_ent_t head;
  logic    take, mismatch;
  pkt_kind_e want;
  assign head        = rt_mem[rt_rp[RA-1:0]];
  assign req_ready_o = (rt_count_o != '0);
  assign take        = req_valid_i && req_ready_o;
  assign rdata_o     = head.data;
  always_comb begin
    case (req_kind_i)
      RT_LOAD:  want = PK_LOAD;
      RT_STORE: want = PK_STORE;
      default:  want = PK_CSR;
    endcase
    mismatch = (head.kind != want) || (head.addr != req_addr_i) ||
               ((req_kind_i == RT_STORE) && (head.data != req_wdata_i));
  end
  assign err_o = take && mismatch;

  assign st_valid_o = (st_count_o != '0);
  assign st_pkt_o   = st_mem[st_rp[SA-1:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rt_wp <= '0; rt_rp <= '0; st_wp <= '0; st_rp <= '0;
    end else begin
      rt_wp <= rt_wp + (RA+1)'(to_rt[0]) + (RA+1)'(to_rt[1]);
      st_wp <= st_wp + (SA+1)'(to_st[0]) + (SA+1)'(to_st[1]);
      if (take) rt_rp <= rt_rp + 1'b1;
      if (st_pop_i && st_valid_o) st_rp <= st_rp + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (to_rt[0]) rt_mem[rt_wp[RA-1:0]] <= '{kind: in_pkt_i[0].kind, addr: in_pkt_i[0].addr, data: in_pkt_i[0].data};
    if (to_rt[1]) rt_mem[rt_wp[RA-1:0] + RA'(to_rt[0])] <= '{kind: in_pkt_i[1].kind, addr: in_pkt_i[1].addr, data: in_pkt_i[1].data};
    if (to_st[0]) st_mem[st_wp[SA-1:0]] <= in_pkt_i[0];
    if (to_st[1]) st_mem[st_wp[SA-1:0] + SA'(to_st[0])] <= in_pkt_i[1];
  end
endmodule
