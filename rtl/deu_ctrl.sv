// deu_ctrl: control circuits and address calculation of the DEU.
//
// When the commit detector reports an RCP, this unit takes over the PRF
// read ports and walks the architectural registers x1..x31, three per
// cycle. A base register starts at 0x01; the three ports read base,
// base+0x01 and base+0x02; after each accepted beat the base steps by 0x03.
// The beat whose base has reached 0x1D is the last one (base 0x1F reads
// only x31), so an RCP takes 11 beats. These constants are the ones printed
// in the paper's DEU figure; the start value, the direction of the end
// comparison and the masking of ports above x31 are this design's reading.
//
// The first beat also carries the RCP header (next PC, segment length,
// final flag), latched at start. A beat only advances when beat_ready_i
// says every status FIFO it writes has room. busy_o is high from the cycle
// after start until the last beat is accepted; the commit stage is held
// while it is high so no register read here can be overwritten.
module deu_ctrl
  import meek_pkg::*;
#(
  parameter int          PORTS    = DEU_PORTS,
  parameter logic [5:0]  STEP     = 6'h03,
  parameter logic [5:0]  END_BASE = 6'h1D
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start_i,
  input  logic [XLEN-1:0]             hdr_pc_i,
  input  logic [ICNT_W-1:0]           hdr_icount_i,
  input  logic                        hdr_final_i,
  input  logic                        beat_ready_i,
  output logic                        busy_o,
  output logic                        beat_o,      // a beat is presented
  output logic                        hdr_o,       // beat carries the header
  output pkt_t                        hdr_pkt_o,
  output logic [PORTS-1:0]            rd_en_o,
  output logic [PORTS-1:0][AREG_W-1:0] rd_areg_o
);
  logic [5:0] base_q;
  logic       active_q, first_q;
  pkt_t       hdr_q;
  logic       last_beat;

  assign last_beat = (base_q >= END_BASE);
  assign busy_o    = active_q;
  assign beat_o    = active_q;
  assign hdr_o     = active_q && first_q;
  assign hdr_pkt_o = hdr_q;

  always_comb begin
    logic [5:0] a;
    for (int p = 0; p < PORTS; p++) begin
      a = base_q + 6'(p);
      rd_en_o[p]   = active_q && (a < 6'(NUM_AREGS));
      rd_areg_o[p] = a[AREG_W-1:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active_q <= 1'b0;
      first_q  <= 1'b0;
      base_q   <= 6'h01;
      hdr_q    <= '0;
    end else if (!active_q) begin
      if (start_i) begin
        active_q   <= 1'b1;
        first_q    <= 1'b1;
        base_q     <= 6'h01;
        hdr_q.kind <= PK_HDR;
        hdr_q.idx  <= {4'b0, hdr_final_i};
        hdr_q.addr <= hdr_pc_i;
        hdr_q.data <= XLEN'(hdr_icount_i);
      end
    end else if (beat_ready_i) begin
      first_q <= 1'b0;
      base_q  <= base_q + STEP;
      if (last_beat) active_q <= 1'b0;
    end
  end
endmodule
