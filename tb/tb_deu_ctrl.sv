// tb_deu_ctrl: self-checking test of the DEU control circuits.
// Starts register extraction, sometimes with back-pressure on the status
// FIFOs, and checks that x1..x31 are each read exactly once in ascending
// order, three ports per beat, that the header (PC, length, final flag) is
// on the first beat only, and that an unstalled extraction takes 11 beats.
// The expected register order (x1..x31, three per beat) is written out independently.
module tb_deu_ctrl;
  import meek_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start = 0, ready = 1, fin = 0;
  logic [63:0] pc = 0;
  logic [ICNT_W-1:0] icnt = 0;
  logic busy, beat, hdr;
  pkt_t hpkt;
  logic [2:0] en;
  logic [2:0][4:0] areg;
  int checks = 0, failures = 0;

  deu_ctrl dut (.clk, .rst_n, .start_i(start), .hdr_pc_i(pc), .hdr_icount_i(icnt), .hdr_final_i(fin),
    .beat_ready_i(ready), .busy_o(busy), .beat_o(beat), .hdr_o(hdr), .hdr_pkt_o(hpkt),
    .rd_en_o(en), .rd_areg_o(areg));

  always #5 clk = ~clk;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  task automatic run(input bit stall, input logic [63:0] p, input int n, input bit f);
    int next_reg = 1, beats = 0, cycles = 0;
    bit seen_hdr = 0;
    @(negedge clk);
    pc = p; icnt = ICNT_W'(n); fin = f; start = 1;
    @(negedge clk);
    start = 0; pc = '1; icnt = '1; fin = 0;   // header must have been latched
    chk(busy, "busy after start");
    while (busy) begin
      ready = stall ? ($urandom_range(0, 2) != 0) : 1'b1;
      #1;
      cycles++;
      if (ready) begin
        chk(hdr == (beats == 0), "header only on the first beat");
        if (hdr) begin
          seen_hdr = 1;
          chk(hpkt.kind == PK_HDR && hpkt.addr == p && hpkt.data == 64'(n) && hpkt.idx[0] == f, "header fields");
        end
        for (int k = 0; k < 3; k++) begin
          if (en[k]) begin
            chk(int'(areg[k]) == next_reg, $sformatf("port %0d reads x%0d, expected x%0d", k, areg[k], next_reg));
            next_reg++;
          end
        end
        beats++;
      end
      @(negedge clk);
      if (cycles > 100) break;
    end
    chk(seen_hdr, "header seen");
    chk(next_reg == 32, $sformatf("all registers read (next=%0d)", next_reg));
    chk(beats == 11, $sformatf("11 beats (got %0d)", beats));
    if (!stall) chk(cycles == 11, $sformatf("11 cycles without stall (got %0d)", cycles));
    ready = 1;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(0, 64'h8000_1000, 123, 0);
    run(1, 64'h8000_2004, 4999, 1);
    for (int i = 0; i < 5; i++) run(1, {$urandom, $urandom}, $urandom_range(0, 5000), 1'($urandom));
    chk(!busy, "idle at end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
