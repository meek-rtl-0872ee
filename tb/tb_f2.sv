// tb_f2: self-checking test of the forwarding fabric (DC-Buffers + NoC).
// The testbench plays the DEU: it pushes a program-order stream into the
// per-lane buffers the way the DEU does (run-time packets on any lane, only
// when every run-time FIFO has room; a status beat of one header on the last
// lane and three registers on lanes 0..2, only when every status FIFO has
// room). It also plays three hooked little cores (of four) with random port
// back-pressure; each core parses what it receives as
//   start header, 31 registers, run-time data, end header, 31 registers
// and reports completion by toggling its done line a while later.
// Checked:
//   * the union of delivered packets equals the generated stream, in order;
//   * every core's own stream has the segment shape above;
//   * each segment's run-time data reaches one core only;
//   * the fabric back-pressures the producer and waits for a free core.
// Segment shape and ordering rules follow the fabric description; the core model and its timing are this test's own.
module tb_f2;
  import meek_pkg::*;
  localparam int CW = 4, NL = 4, NPK = 6000;
  logic clk = 0, rst_n = 0;
  logic [CW-1:0] rt_push, rt_ready, st_push, st_ready;
  seq_pkt_t [CW-1:0] rt_pkt, st_pkt;
  logic [NL-1:0] hook = 4'b1101, done = 0, lrdy;
  logic [NL-1:0][1:0] lv;
  pkt_t [1:0] lp;
  logic stall, ov;
  logic [1:0] ow;
  pkt_t gen [NPK];
  int n_gen = 0, n_out = 0, seq = 0;
  int checks = 0, failures = 0;
  int st_state [NL];   // 0 idle, 1 start regs, 2 running, 3 end regs
  int st_regs [NL];
  int n_segs_done = 0, n_bp = 0, n_stall = 0, n_multi = 0;
  bit gen_done = 0;

  f2 #(.CW(CW), .NL(NL), .BUF_DEPTH(8)) dut (.clk, .rst_n,
    .rt_push_i(rt_push), .rt_pkt_i(rt_pkt), .rt_ready_o(rt_ready),
    .st_push_i(st_push), .st_pkt_i(st_pkt), .st_ready_o(st_ready),
    .hook_mask_i(hook), .lc_done_tgl_i(done), .lc_ready_i(lrdy),
    .lc_vld_o(lv), .lc_pkt_o(lp), .stall_o(stall), .owner_valid_o(ov), .owner_o(ow));

  always #5 clk = ~clk;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  function automatic pkt_t mk(input pkt_kind_e k, input int idx);
    pkt_t p;
    p = '0;
    p.kind = k;
    p.idx = 5'(idx);
    p.addr = {$urandom, $urandom};
    p.data = {$urandom, $urandom};
    return p;
  endfunction

  // Producer (DEU model).
  task automatic status(input bit fin);
    int r;
    r = 1;
    while (r < 32) begin
      @(negedge clk);
      st_push = '0; rt_push = '0;
      if (st_ready == '1) begin
        if (r == 1) begin
          st_push[CW-1] = 1'b1;
          st_pkt[CW-1] = {SEQ_W'(seq), mk(PK_HDR, int'(fin))};
          gen[n_gen++] = st_pkt[CW-1].pkt; seq++;
        end
        for (int p = 0; p < 3; p++) if (r < 32) begin
          st_push[p] = 1'b1;
          st_pkt[p] = {SEQ_W'(seq), mk(PK_REG, r)};
          gen[n_gen++] = st_pkt[p].pkt; seq++; r++;
        end
      end else n_bp++;
    end
    @(negedge clk);
    st_push = '0;
  endtask
  task automatic runtime(input int n);
    while (n > 0) begin
      @(negedge clk);
      st_push = '0; rt_push = '0;
      if (rt_ready == '1) begin
        for (int l = 0; l < CW; l++) if (n > 0 && $urandom_range(0, 1)) begin
          rt_push[l] = 1'b1;
          rt_pkt[l] = {SEQ_W'(seq), mk(pkt_kind_e'($urandom_range(0, 2)), 0)};
          gen[n_gen++] = rt_pkt[l].pkt; seq++; n--;
        end
      end else n_bp++;
    end
    @(negedge clk);
    rt_push = '0;
  endtask
  initial begin : producer
    rt_push = '0; st_push = '0; rt_pkt = '0; st_pkt = '0;
    wait (rst_n);
    status(0);
    for (int s = 0; s < 40; s++) begin
      runtime($urandom_range(0, 60));
      status(s == 39);
    end
    gen_done = 1;
  end

  // Little cores.
  for (genvar c = 0; c < NL; c++) begin : g_core
    initial begin
      st_state[c] = 0; st_regs[c] = 0;
      forever begin
        @(negedge clk);
        #2;
        for (int s = 0; s < 2; s++) if (lv[c][s]) begin
          case (st_state[c])
            0: begin chk(lp[s].kind == PK_HDR && !lp[s].idx[0], "segment starts with a header"); st_state[c] = 1; st_regs[c] = 0; end
            1: begin chk(lp[s].kind == PK_REG, "start registers"); st_regs[c]++; if (st_regs[c] == 31) st_state[c] = 2; end
            2: if (lp[s].kind == PK_HDR) begin st_state[c] = 3; st_regs[c] = 0; end
               else chk(lp[s].kind inside {PK_LOAD, PK_STORE, PK_CSR}, "run-time data inside a segment");
            default: begin chk(lp[s].kind == PK_REG, "end registers"); st_regs[c]++; if (st_regs[c] == 31) st_state[c] = 4; end
          endcase
        end
        if (st_state[c] == 4) begin
          repeat ($urandom_range(3, 150)) @(posedge clk);
          done[c] = ~done[c];
          st_state[c] = 0;
          n_segs_done++;
        end
      end
    end
  end

  initial begin
    lrdy = '1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    forever begin
      @(negedge clk);
      lrdy = ($urandom_range(0, 4) == 0) ? 4'($urandom) : '1;
      #1;
      if (stall) n_stall++;
      for (int s = 0; s < 2; s++) begin
        logic [NL-1:0] m;
        for (int c = 0; c < NL; c++) m[c] = lv[c][s];
        chk((m & ~lrdy) == 0 && (m & ~hook) == 0, "only ready, hooked ports");
        if (m != 0) begin
          chk(n_out < n_gen && lp[s] == gen[n_out], $sformatf("delivered packet %0d in order", n_out));
          if ($countones(m) > 1) n_multi++;
          if (lp[s].kind inside {PK_LOAD, PK_STORE, PK_CSR}) chk($countones(m) == 1, "run-time data to one core");
          n_out++;
        end
      end
      if (gen_done && n_out == n_gen) break;
    end
    repeat (200) @(posedge clk);
    chk(n_segs_done == 40, $sformatf("all 40 segments completed (%0d)", n_segs_done));
    chk(n_bp > 0, "producer back-pressured");
    chk(n_stall > 0, "fabric waited for a free core");
    chk(n_multi > 0, "status data multicast");
    $display("packets=%0d segments=%0d backpressure=%0d stall=%0d multicast=%0d", n_out, n_segs_done, n_bp, n_stall, n_multi);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
