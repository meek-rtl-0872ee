// tb_cdc_fifo: self-checking test of the asynchronous FIFO.
// Writer at a 10-unit clock (fast domain), reader at a 23-unit clock (slow
// domain, as the little cores run at half the big core's rate or less).
// Random valid/ready on both sides; every word read must equal the next word
// written, none may be lost or duplicated, and full must throttle the writer.
// Expected values are a software queue; clock ratios are random.
module tb_cdc_fifo;
  localparam int W = 40;
  logic wclk = 0, rclk = 0, wrst_n = 0, rrst_n = 0;
  logic wvalid = 0, rready = 0, wready, rvalid;
  logic [W-1:0] wdata = 0, rdata;
  logic [W-1:0] q[$];
  int checks = 0, failures = 0, nread = 0, full_seen = 0;

  cdc_fifo #(.WIDTH(W), .DEPTH(8)) dut (.wclk, .wrst_n, .wvalid, .wdata, .wready,
    .rclk, .rrst_n, .rvalid, .rdata, .rready);

  always #5 wclk = ~wclk;
  always #11.5 rclk = ~rclk;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  // writer
  initial begin
    repeat (3) @(posedge wclk);
    wrst_n = 1;
    for (int i = 0; i < 600; i++) begin
      @(negedge wclk);
      wvalid = (i < 300) ? 1'b1 : 1'($urandom);
      wdata  = {8'(i), 32'($urandom)};
      @(posedge wclk);
      if (wvalid && wready) q.push_back(wdata);
      if (wvalid && !wready) full_seen++;
    end
    @(negedge wclk) wvalid = 0;
  end
  // reader
  initial begin
    repeat (3) @(posedge rclk);
    rrst_n = 1;
    for (int i = 0; i < 2500; i++) begin
      @(negedge rclk);
      rready = (i < 50) ? 1'b0 : 1'($urandom);
      @(posedge rclk);
      if (rvalid && rready) begin
        chk(q.size() != 0, "read with nothing written");
        if (q.size() != 0) chk(rdata == q.pop_front(), $sformatf("word %0d in order", nread));
        nread++;
      end
    end
    chk(q.size() == 0, $sformatf("all words delivered (%0d left)", q.size()));
    chk(full_seen > 0, "full throttled the writer");
    chk(nread > 100, $sformatf("enough traffic (%0d words)", nread));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge wclk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
