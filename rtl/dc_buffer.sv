// dc_buffer: Dual-Channel Buffer on one commit path of the big core.
//
// Two independent FIFOs, one for status data (RCP header and registers) and
// one for run-time data (loads, stores, CSR reads). Because the two kinds
// never share a FIFO, a commit path can always store its run-time packet in
// the commit cycle even while status data from an RCP is queued.
// Both heads are shown to the fabric's re-ordering stage, which pops them in
// program order using the sequence tag carried with every packet.
// First-word fall-through; a pop takes effect at the clock edge.
//
// Paper: one DC-Buffer per commit path with separate status and run-time
// FIFOs. Own choice: the depth (8 entries per FIFO, a power of two).
module dc_buffer
  import meek_pkg::*;
#(
  parameter int DEPTH = 8
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     st_push_i,
  input  seq_pkt_t st_pkt_i,
  output logic     st_ready_o,
  input  logic     rt_push_i,
  input  seq_pkt_t rt_pkt_i,
  output logic     rt_ready_o,
  output logic     st_valid_o,
  output seq_pkt_t st_head_o,
  input  logic     st_pop_i,
  output logic     rt_valid_o,
  output seq_pkt_t rt_head_o,
  input  logic     rt_pop_i
);
  sync_fifo #(.WIDTH($bits(seq_pkt_t)), .DEPTH(DEPTH)) u_status (
    .clk, .rst_n,
    .in_push(st_push_i), .in_data(st_pkt_i), .in_ready(st_ready_o),
    .out_valid(st_valid_o), .out_data(st_head_o), .out_pop(st_pop_i)
  );

  sync_fifo #(.WIDTH($bits(seq_pkt_t)), .DEPTH(DEPTH)) u_runtime (
    .clk, .rst_n,
    .in_push(rt_push_i), .in_data(rt_pkt_i), .in_ready(rt_ready_o),
    .out_valid(rt_valid_o), .out_data(rt_head_o), .out_pop(rt_pop_i)
  );

  // A producer must never push into a full channel.
  a_st_no_overflow: assert property (@(posedge clk) st_push_i |-> st_ready_o);
  a_rt_no_overflow: assert property (@(posedge clk) rt_push_i |-> rt_ready_o);
endmodule
