// sync_fifo: single-clock FIFO used by the DC-Buffers.
//
// Circular buffer with read and write pointers one bit wider than the
// address so that full and empty are told apart. The head is presented
// combinationally (first-word fall-through): out_valid says it is there,
// out_pop removes it. A push into a full FIFO is ignored and a pop of an
// empty one is ignored; the users gate both with in_ready / out_valid.
// A push is visible at the head one cycle later. DEPTH must be a power of
// two. The paper only says each DC-Buffer holds independent FIFOs; this
// organisation is this design's own.
module sync_fifo #(
  parameter int WIDTH = 8,
  parameter int DEPTH = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_push,
  input  logic [WIDTH-1:0] in_data,
  output logic             in_ready,
  output logic             out_valid,
  output logic [WIDTH-1:0] out_data,
  input  logic             out_pop
);
  localparam int AW = $clog2(DEPTH);
  logic [AW:0] count;
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0] wp, rp;
  logic do_push, do_pop;

  assign count     = wp - rp;
  assign in_ready  = (count != DEPTH[AW:0]);
  assign out_valid = (count != '0);
  assign out_data  = mem[rp[AW-1:0]];
  assign do_push   = in_push && in_ready;
  assign do_pop    = out_pop && out_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (do_push) wp <= wp + 1'b1;
      if (do_pop)  rp <= rp + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) mem[wp[AW-1:0]] <= in_data;
  end
endmodule
