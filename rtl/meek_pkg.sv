// meek_pkg: types and constants shared by the MEEK error-detection hardware.
//
// The widths follow the configuration evaluated in the paper: a 4-wide
// out-of-order big core with 32 architectural and 128 physical 64-bit
// integer registers (5-bit and 7-bit register addresses), four little
// checker cores, a 4 KB load-store log per little core and a 5000-instruction
// segment limit. The packet layout, the instruction encodings of the MEEK
// extension and the FIFO depths are this design's own choices; the paper
// does not give them.
//
// A packet is the unit the forwarding fabric moves: 128 bits of payload
// (an address/PC word and a data word) plus side-band kind and index bits.
// Two packets move per fabric cycle, which makes the 256-bit data path.
package meek_pkg;

  parameter int XLEN        = 64;
  parameter int COMMIT_W    = 4;     // commit lanes of the big core
  parameter int NUM_LITTLE  = 4;     // little (checker) cores
  parameter int AREG_W      = 5;     // architectural register address
  parameter int NUM_AREGS   = 32;
  parameter int NUM_PREGS   = 128;
  parameter int PREG_W      = $clog2(NUM_PREGS);  // physical register address
  parameter int TIMEOUT     = 5000;  // maximum instructions per segment
  parameter int ICNT_W      = 13;    // holds TIMEOUT
  parameter int LSL_BYTES   = 4096;
  parameter int LSL_ENTRY_B = 16;    // one run-time entry: address + data
  parameter int SEQ_W       = 8;     // program-order tag inside the fabric
  parameter int DEU_PORTS   = 3;     // PRF read ports the DEU takes over

  // RISC-V major opcodes the commit detector and the mini-decoder look at.
  localparam logic [6:0] OPC_LOAD    = 7'b0000011;
  localparam logic [6:0] OPC_LOADFP  = 7'b0000111;
  localparam logic [6:0] OPC_STORE   = 7'b0100011;
  localparam logic [6:0] OPC_STOREFP = 7'b0100111;
  localparam logic [6:0] OPC_AMO     = 7'b0101111;
  localparam logic [6:0] OPC_SYSTEM  = 7'b1110011;
  localparam logic [6:0] OPC_MEEK    = 7'b0001011;  // custom-0

  // MEEK-ISA, selected by funct3 under the custom-0 opcode.
  typedef enum logic [2:0] {
    MK_B_HOOK   = 3'd0,
    MK_B_CHECK  = 3'd1,
    MK_L_MODE   = 3'd2,
    MK_L_RECORD = 3'd3,
    MK_L_APPLY  = 3'd4,
    MK_L_JAL    = 3'd5,
    MK_L_RSLT   = 3'd6,
    MK_NONE     = 3'd7
  } meek_op_e;

  // Run-time data class of a committing instruction / little-core access.
  typedef enum logic [1:0] {
    RT_NONE  = 2'd0,
    RT_LOAD  = 2'd1,
    RT_STORE = 2'd2,
    RT_CSR   = 2'd3
  } rt_kind_e;

  typedef enum logic [2:0] {
    PK_LOAD  = 3'd0,   // addr = load address, data = loaded value
    PK_STORE = 3'd1,   // addr = store address, data = store value
    PK_CSR   = 3'd2,   // addr = CSR number,   data = value read
    PK_HDR   = 3'd3,   // RCP header: addr = next PC, data = segment length,
                       // idx[0] = final RCP (no segment follows)
    PK_REG   = 3'd4    // idx = architectural register, data = its value
  } pkt_kind_e;

  typedef struct packed {
    pkt_kind_e        kind;
    logic [4:0]       idx;
    logic [XLEN-1:0]  addr;
    logic [XLEN-1:0]  data;
  } pkt_t;

  typedef struct packed {
    logic [SEQ_W-1:0] seq;
    pkt_t             pkt;
  } seq_pkt_t;

  // One commit lane as the ROB presents it.
  typedef struct packed {
    logic              valid;
    logic [6:0]        opcode;
    logic [2:0]        funct3;
    logic [6:0]        funct7;
    logic [11:0]       imm12;   // CSR number for SYSTEM instructions
    logic              wen;     // writes an integer register
    logic [AREG_W-1:0] ldst;
    logic [PREG_W-1:0] pdst;    // wb_addr
    logic [XLEN-1:0]   pc;
    logic [XLEN-1:0]   npc;     // PC of the next instruction
    logic [XLEN-1:0]   src1;    // operand values, used by b.hook / b.check
    logic [XLEN-1:0]   src2;
  } commit_t;

  // LSQ head entry belonging to a committing memory instruction.
  typedef struct packed {
    logic              valid;
    logic [XLEN-1:0]   addr;
    logic [XLEN-1:0]   data;
    logic [XLEN/8-1:0] parity;  // even parity per byte, copied from the cache
  } lsq_t;

  function automatic rt_kind_e classify(input logic [6:0] opc, input logic [2:0] f3);
    case (opc)
      OPC_LOAD, OPC_LOADFP,
      OPC_AMO:                return RT_LOAD;   // an AMO replays its loaded value
      OPC_STORE, OPC_STOREFP: return RT_STORE;
      OPC_SYSTEM:             return (f3 != 3'b000) ? RT_CSR : RT_NONE;
      default:                return RT_NONE;
    endcase
  endfunction

  function automatic logic [XLEN/8-1:0] byte_parity(input logic [XLEN-1:0] d);
    logic [XLEN/8-1:0] p;
    for (int b = 0; b < XLEN/8; b++) p[b] = ^d[8*b +: 8];
    return p;
  endfunction

endpackage
