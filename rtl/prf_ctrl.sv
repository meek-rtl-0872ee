// prf_ctrl: PRF controllers shared by the big core and the DEU.
//
// Holds the Commit Map Table (CMT): for each architectural register the
// physical register that holds its committed value (5-bit index -> 7-bit
// index). Each committing instruction that writes a register updates its
// entry with its wb_addr; lanes are applied in order so a later lane wins.
//
// Each PRF read port has a multiplexer ("Ctrl. Switch") in front of it.
// Normally the core's own read address passes through. While deu_en_i is
// high the DEU has priority: a port the DEU enables reads the physical
// register that the CMT maps the DEU's architectural index to, the value
// returns on deu_rdata_o in the same cycle (the register file read is
// combinational), and core_preempt_o tells the core that port was taken.
// Architectural register x0 reads as zero. Reset maps xi to physical i.
// The register file itself stays in the core: its read data comes in on
// prf_rdata_i and goes back to the core unchanged on core_rdata_o (during
// a preemption the core ignores it), so those output bits are wires.
//
// Paper: CMT with 5-bit/7-bit fields, per-port read controllers, DEU
// priority. Own choices: reset map, combinational read, x0 handling.
module prf_ctrl
  import meek_pkg::*;
#(
  parameter int CW    = COMMIT_W,
  parameter int PORTS = DEU_PORTS
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [CW-1:0]                 cmt_we_i,
  input  logic [CW-1:0][AREG_W-1:0]     cmt_areg_i,
  input  logic [CW-1:0][PREG_W-1:0]     cmt_preg_i,
  input  logic                          deu_en_i,
  input  logic [PORTS-1:0]              deu_rd_en_i,
  input  logic [PORTS-1:0][AREG_W-1:0]  deu_areg_i,
  output logic [PORTS-1:0][XLEN-1:0]    deu_rdata_o,
  input  logic [PORTS-1:0][PREG_W-1:0]  core_raddr_i,
  output logic [PORTS-1:0][XLEN-1:0]    core_rdata_o,
  output logic [PORTS-1:0]              core_preempt_o,
  output logic [PORTS-1:0][PREG_W-1:0]  prf_raddr_o,
  input  logic [PORTS-1:0][XLEN-1:0]    prf_rdata_i
);
  logic [PREG_W-1:0] cmt_q [NUM_AREGS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int a = 0; a < NUM_AREGS; a++) cmt_q[a] <= PREG_W'(a);
    end else begin
      for (int l = 0; l < CW; l++)
        if (cmt_we_i[l] && cmt_areg_i[l] != '0) cmt_q[cmt_areg_i[l]] <= cmt_preg_i[l];
    end
  end

  always_comb begin
    logic take;
    for (int p = 0; p < PORTS; p++) begin
      take              = deu_en_i && deu_rd_en_i[p];
      core_preempt_o[p] = take;
      prf_raddr_o[p]    = take ? cmt_q[deu_areg_i[p]] : core_raddr_i[p];
      core_rdata_o[p]   = prf_rdata_i[p];
      deu_rdata_o[p]    = (take && deu_areg_i[p] != '0) ? prf_rdata_i[p] : '0;
    end
  end
endmodule
