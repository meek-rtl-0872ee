// tb_dc_buffer: self-checking test of the Dual-Channel Buffer.
// Random pushes and pops on both channels; each channel is compared with a
// queue model. Also checks that a status push and a run-time push can be
// taken in the same cycle and that the channels fill independently.
// Expected values come from two software queues.
module tb_dc_buffer;
  import meek_pkg::*;
  logic clk = 0, rst_n = 0;
  logic sp = 0, rp = 0, spop = 0, rpop = 0;
  seq_pkt_t sin, rin, sh, rh;
  logic sr, rr, sv, rv;
  seq_pkt_t sq[$], rq[$];
  int checks = 0, failures = 0, both = 0;

  dc_buffer #(.DEPTH(8)) dut (.clk, .rst_n,
    .st_push_i(sp), .st_pkt_i(sin), .st_ready_o(sr),
    .rt_push_i(rp), .rt_pkt_i(rin), .rt_ready_o(rr),
    .st_valid_o(sv), .st_head_o(sh), .st_pop_i(spop),
    .rt_valid_o(rv), .rt_head_o(rh), .rt_pop_i(rpop));

  always #5 clk = ~clk;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  initial begin
    sin = '0; rin = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // Fill the status channel only: the run-time channel stays ready.
    for (int i = 0; i < 8; i++) begin
      @(negedge clk); sp = 1; sin = {8'(i), pkt_t'({$urandom, $urandom, $urandom, $urandom, $urandom})};
      @(posedge clk); #1 sq.push_back(sin);
    end
    @(negedge clk); sp = 0; #1;
    chk(!sr, "status channel full after 8");
    chk(rr, "run-time channel independent");
    for (int it = 0; it < 2000; it++) begin
      @(negedge clk);
      sp = 1'($urandom) && sr; rp = 1'($urandom) && rr;
      sin = {8'($urandom), pkt_t'({$urandom, $urandom, $urandom, $urandom, $urandom})};
      rin = {8'($urandom), pkt_t'({$urandom, $urandom, $urandom, $urandom, $urandom})};
      spop = 1'($urandom); rpop = 1'($urandom);
      #1;
      chk(sv == (sq.size() != 0), "status valid");
      chk(rv == (rq.size() != 0), "run-time valid");
      chk(sr == (sq.size() < 8), "status ready");
      chk(rr == (rq.size() < 8), "run-time ready");
      if (sv && sq.size() != 0) chk(sh == sq[0], "status head");
      if (rv && rq.size() != 0) chk(rh == rq[0], "run-time head");
      if (sp && rp) both++;
      @(posedge clk); #1;
      if (spop && sq.size() != 0) void'(sq.pop_front());
      if (rpop && rq.size() != 0) void'(rq.pop_front());
      if (sp) sq.push_back(sin);
      if (rp) rq.push_back(rin);
    end
    chk(both > 0, "simultaneous pushes happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
