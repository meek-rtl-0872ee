// tb_hm_noc: self-checking test of the re-ordering multicast NoC.
// The testbench plays the DC-Buffers (eight FIFO heads filled with a
// program-order stream spread over the lanes as the DEU does) and the
// little cores (random port back-pressure, segment completion signalled
// some time after the End RCP has arrived). Checked properties:
//   * packets leave in sequence order, each once, at most two per cycle;
//   * run-time packets reach exactly the core owning the open segment;
//   * a header reaches the previous owner and at most one new owner, which
//     must be hooked and free; a final header opens no segment;
//   * register packets follow their header's destinations;
//   * nothing is sent to a port that is not ready;
//   * the waiting state is entered when all hooked cores are busy.
// Expected order comes from the sequence numbers the test assigns.
module tb_hm_noc;
  import meek_pkg::*;
  localparam int CW = 4, NL = 4, NH = 8;
  logic clk = 0, rst_n = 0;
  logic [NH-1:0] hv, pop;
  seq_pkt_t [NH-1:0] heads;
  logic [NL-1:0] hook = 4'b1011, done = 0, lrdy;
  logic [NL-1:0][1:0] lv;
  pkt_t [1:0] lp;
  logic stall, ov;
  logic [1:0] ow;
  seq_pkt_t qm [NH][64];
  int qh [NH], qt [NH];
  int checks = 0, failures = 0;
  int next_seq = 0, gen_seq = 0;
  int owner = -1;
  logic [NL-1:0] reg_mask = 0;
  bit busy [NL];
  int regs_left [NL];
  int to_pop[$];
  int cyc = 0;
  int freed_at [NL];
  int n_dual = 0, n_stall = 0, n_multi = 0, n_delivered = 0, n_segs = 0;

  hm_noc #(.CW(CW), .NL(NL)) dut (.clk, .rst_n, .head_valid_i(hv), .head_i(heads), .pop_o(pop),
    .hook_mask_i(hook), .lc_done_tgl_i(done), .lc_ready_i(lrdy), .lc_vld_o(lv), .lc_pkt_o(lp),
    .stall_o(stall), .owner_valid_o(ov), .owner_o(ow));

  always #5 clk = ~clk;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  // The heads are refreshed whenever a queue changes.
  task automatic refresh();
    for (int h = 0; h < NH; h++) begin
      hv[h] = (qt[h] != qh[h]);
      heads[h] = qm[h][qh[h] % 64];
    end
  endtask

  // Stream generator: (kind, lane) pushed with the next sequence number.
  task automatic put(input int h, input pkt_t p);
    while (qt[h] - qh[h] >= 8) @(posedge clk);
    qm[h][qt[h] % 64] = {SEQ_W'(gen_seq), p};
    qt[h]++;
    gen_seq++;
    refresh();
  endtask
  task automatic rcp(input bit fin);
    pkt_t p;
    p = '0; p.kind = PK_HDR; p.idx = {4'b0, fin}; p.addr = 64'(gen_seq); p.data = 64'(gen_seq);
    put(6, p);
    for (int r = 1; r < 32; r++) begin
      p = '0; p.kind = PK_REG; p.idx = 5'(r); p.data = {$urandom, $urandom};
      put(2 * ((r - 1) % 3), p);
    end
  endtask
  initial begin : gen
    pkt_t p;
    wait (rst_n);
    @(negedge clk);
    for (int round = 0; round < 3; round++) begin
      rcp(0);
      for (int s = 0; s < 12; s++) begin
        for (int k = 0; k < $urandom_range(0, 40); k++) begin
          p = '0; p.kind = pkt_kind_e'($urandom_range(0, 2)); p.addr = {$urandom, $urandom}; p.data = 64'(gen_seq);
          put(2 * $urandom_range(0, 3) + 1, p);
          if ($urandom_range(0, 3) == 0) @(negedge clk);
        end
        rcp(s == 11);
      end
    end
  end

  // Little cores: finish a segment a while after its End RCP registers.
  for (genvar c = 0; c < NL; c++) begin : g_core
    initial begin
      forever begin
        @(posedge clk);
        if (busy[c] && regs_left[c] == 0) begin
          repeat ($urandom_range(5, 200)) @(posedge clk);
          busy[c] = 0;
          freed_at[c] = cyc;
          regs_left[c] = -1;
          done[c] = ~done[c];
        end
      end
    end
  end

  initial begin
    for (int c = 0; c < NL; c++) begin busy[c] = 0; regs_left[c] = -1; freed_at[c] = -10; end
    lrdy = '1;
    for (int h = 0; h < NH; h++) begin qh[h] = 0; qt[h] = 0; end
    refresh();
    repeat (2) @(posedge clk);
    rst_n = 1;
    forever begin
      @(negedge clk);
      cyc++;
      lrdy = ($urandom_range(0, 5) == 0) ? 4'($urandom) : '1;
      foreach (to_pop[i]) qh[to_pop[i]]++;
      to_pop.delete();
      refresh();
      #1;
      if (stall) begin
        n_stall++;
        // a completion needs up to three cycles to cross the synchroniser
        for (int c = 0; c < NL; c++) chk(!(hook[c] && c != owner && !busy[c] && cyc - freed_at[c] > 3), "stall only when no hooked core is free");
      end
      for (int s = 0; s < 2; s++) begin
        logic [NL-1:0] m;
        for (int c = 0; c < NL; c++) m[c] = lv[c][s];
        if (s == 1) chk(!(m != 0 && !(lv[0][0] || lv[1][0] || lv[2][0] || lv[3][0] || pop != 0)), "slot 1 only with slot 0");
        chk((m & ~lrdy) == 0, "no delivery to a busy port");
      end
      // walk the popped packets in order
      for (int s = 0; s < 2; s++) begin
        int h;
        h = -1;
        for (int k = 0; k < NH; k++)
          if (pop[k] && qt[k] != qh[k] && qm[k][qh[k] % 64].seq == SEQ_W'(next_seq)) h = k;
        if (h >= 0) begin
          pkt_t p;
          logic [NL-1:0] m;
          p = qm[h][qh[h] % 64].pkt;
          for (int c = 0; c < NL; c++) m[c] = lv[c][s];
          chk(lp[s] == p, $sformatf("slot %0d carries the popped packet: seq %0d kind %0d vs %0d", s, next_seq, lp[s].kind, p.kind));
          case (p.kind)
            PK_HDR: begin
              logic [NL-1:0] old_m, new_m;
              old_m = (owner >= 0) ? (4'b1 << owner) : 4'b0;
              new_m = m & ~old_m;
              chk((m & old_m) == old_m, "header reaches the old owner");
              chk($countones(new_m) <= 1, "at most one new owner");
              if (p.idx[0]) chk(new_m == 0, "final header opens nothing");
              else chk(new_m != 0, "non-final header opens a segment");
              if (owner >= 0) regs_left[owner] = 31;
              if (new_m != 0) begin
                int n;
                n = $clog2(new_m);
                chk(hook[n] && !busy[n], "new owner hooked and free");
                busy[n] = 1;
                owner = n;
                n_segs++;
              end else owner = -1;
              if ($countones(m) > 1) n_multi++;
              reg_mask = m;
            end
            PK_REG: begin
              chk(m == reg_mask, "registers follow their header");
            end
            default: chk(owner >= 0 ? (m == (4'b1 << owner)) : (m == 0), $sformatf("run-time data to the owner m=%b owner=%0d dut=%0d/%0d", m, owner, ov, ow));
          endcase
          to_pop.push_back(h);
          next_seq++;
          n_delivered++;
          if (s == 1) n_dual++;
        end else if (s == 0) chk(pop == 0, "pop only in sequence order");
      end
      // count End RCP registers at the cores that end a segment
      for (int c = 0; c < NL; c++) begin
        for (int s = 0; s < 2; s++) if (lv[c][s] && lp[s].kind == PK_REG && regs_left[c] > 0) regs_left[c]--;
      end
      chk($countones(pop) <= 2, "at most two packets per cycle");
      if (next_seq == gen_seq && n_segs >= 36) break;
    end
    repeat (3) @(posedge clk);
    chk(n_dual > 0, "two packets in one cycle");
    chk(n_stall > 0, "waited for a free core");
    chk(n_multi > 0, "multicast of status data");
    chk(n_segs == 36, $sformatf("36 segments opened (%0d)", n_segs));
    $display("delivered=%0d dual=%0d stall_cycles=%0d multicast=%0d", n_delivered, n_dual, n_stall, n_multi);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
