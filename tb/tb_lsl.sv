// tb_lsl: self-checking test of the Load-Store Log.
// Pushes random packet pairs (headers, registers, loads, stores, CSR reads)
// and replays accesses against the run-time way: correct replays must give
// the logged load data without error, and deliberately wrong addresses,
// store data or kinds must raise the LS-Comp error. The status way must
// return headers and registers in order. Also checks that an empty log
// holds an access and that a full log refuses a pair. Uses a 256-byte log
// (16 entries) so that the full condition is reached quickly.
// Expected data comes from a software copy of the log.
module tb_lsl;
  import meek_pkg::*;
  localparam int RT = 16, ST = 8;
  logic clk = 0, rst_n = 0;
  logic [1:0] vld = 0;
  pkt_t [1:0] pk;
  logic in_ready;
  logic rq = 0, ir;
  rt_kind_e rk = RT_LOAD;
  logic [63:0] ra = 0, rw = 0, rdata;
  logic rready, err, stv, stpop = 0;
  pkt_t stp;
  logic [4:0] rtc;
  logic [3:0] stc;
  pkt_t rtq[$], stq[$];
  int checks = 0, failures = 0, n_err = 0, n_empty_hold = 0, n_full = 0;

  lsl #(.LSLB(RT * 16), .ST_DEPTH(ST)) dut (.clk, .rst_n, .in_vld_i(vld), .in_pkt_i(pk), .in_ready_o(in_ready),
    .req_valid_i(rq), .req_kind_i(rk), .req_addr_i(ra), .req_wdata_i(rw),
    .req_ready_o(rready), .rdata_o(rdata), .err_o(err),
    .st_valid_o(stv), .st_pkt_o(stp), .st_pop_i(stpop), .rt_count_o(rtc), .st_count_o(stc));

  always #5 clk = ~clk;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  function automatic pkt_t rnd_pkt();
    pkt_t p;
    p.kind = pkt_kind_e'($urandom_range(0, 4));
    p.idx  = 5'($urandom);
    p.addr = {$urandom, $urandom};
    p.data = {$urandom, $urandom};
    return p;
  endfunction

  initial begin
    pk = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // empty log holds an access
    @(negedge clk); rq = 1; rk = RT_LOAD; #1;
    chk(!rready, "empty log not ready");
    if (!rready) n_empty_hold++;
    rq = 0;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      vld = 2'($urandom);
      pk[0] = rnd_pkt(); pk[1] = rnd_pkt();
      stpop = 1'($urandom);
      rq = ($urandom_range(0, 2) == 0);
      #1;
      chk(in_ready == ((rtq.size() <= RT - 2) && (stq.size() <= ST - 2)), $sformatf("in_ready %0d rt=%0d st=%0d rtc=%0d stc=%0d", in_ready, rtq.size(), stq.size(), rtc, stc));
      if (vld != 0 && !in_ready) n_full++;
      chk(stv == (stq.size() != 0), "status valid");
      if (stv && stq.size() != 0) chk(stp == stq[0], "status head in order");
      chk(rready == (rtq.size() != 0), "replay ready");
      if (rq && rtq.size() != 0) begin
        pkt_t h;
        int m;
        h = rtq[0];
        m = $urandom_range(0, 5);   // 0: wrong address, 1: wrong data/kind, else correct
        rk = (h.kind == PK_LOAD) ? RT_LOAD : (h.kind == PK_STORE) ? RT_STORE : RT_CSR;
        ra = h.addr; rw = h.data;
        if (m == 0) ra = ra ^ 64'h8;
        if (m == 1) begin
          if (h.kind == PK_STORE) rw = rw ^ 64'h1; else rk = RT_STORE;
        end
        #1;
        chk(err == (m <= 1), $sformatf("LS-Comp mismatch=%0d err=%0d", m <= 1, err));
        if (err) n_err++;
        if (m > 1 && h.kind != PK_STORE) chk(rdata == h.data, "load data from log");
      end
      ir = in_ready;
      @(posedge clk); #1;
      if (rq && rtq.size() != 0) void'(rtq.pop_front());
      if (stpop && stq.size() != 0) void'(stq.pop_front());
      if (ir) for (int s = 0; s < 2; s++) if (vld[s]) begin
        if (pk[s].kind == PK_HDR || pk[s].kind == PK_REG) stq.push_back(pk[s]);
        else rtq.push_back(pk[s]);
      end
      rq = 0; vld = 0;
    end
    chk(n_err > 0 && n_full > 0 && n_empty_hold > 0, "errors, full and empty all exercised");
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
