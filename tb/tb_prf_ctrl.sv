// tb_prf_ctrl: self-checking test of the PRF controllers.
// A behavioural 128 x 64-bit register file sits behind the read ports.
// Random commit groups update the commit map table; the test keeps its own
// arch->phys map and checks that DEU reads return the committed value of
// each architectural register (x0 = 0), that the DEU preempts the core on
// the ports it uses, and that the core's own reads pass through otherwise.
// Expected register contents come from a software copy of the map table and register file.
module tb_prf_ctrl;
  import meek_pkg::*;
  localparam int CW = 4, P = 3;
  logic clk = 0, rst_n = 0;
  logic [CW-1:0] we = 0;
  logic [CW-1:0][4:0] wa;
  logic [CW-1:0][6:0] wp;
  logic deu_en = 0;
  logic [P-1:0] den = 0;
  logic [P-1:0][4:0] dareg;
  logic [P-1:0][63:0] drd, crd;
  logic [P-1:0][6:0] craddr, praddr;
  logic [P-1:0] pre;
  logic [P-1:0][63:0] prd;
  logic [63:0] prf [128];
  int map [32];
  int checks = 0, failures = 0;

  prf_ctrl dut (.clk, .rst_n, .cmt_we_i(we), .cmt_areg_i(wa), .cmt_preg_i(wp),
    .deu_en_i(deu_en), .deu_rd_en_i(den), .deu_areg_i(dareg), .deu_rdata_o(drd),
    .core_raddr_i(craddr), .core_rdata_o(crd), .core_preempt_o(pre),
    .prf_raddr_o(praddr), .prf_rdata_i(prd));

  always_comb for (int k = 0; k < P; k++) prd[k] = prf[praddr[k]];
  always #5 clk = ~clk;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  initial begin
    for (int i = 0; i < 128; i++) prf[i] = {$urandom, $urandom};
    for (int a = 0; a < 32; a++) map[a] = a;
    wa = '0; wp = '0; dareg = '0; craddr = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 300; it++) begin
      @(negedge clk);
      // commit group: lanes in order, later lane wins
      for (int l = 0; l < CW; l++) begin
        we[l] = 1'($urandom);
        wa[l] = 5'($urandom);
        wp[l] = 7'($urandom);
      end
      @(posedge clk); #1;
      for (int l = 0; l < CW; l++) if (we[l] && wa[l] != 0) map[wa[l]] = wp[l];
      we = 0;
      // reads
      deu_en = 1'($urandom);
      for (int k = 0; k < P; k++) begin
        den[k] = 1'($urandom);
        dareg[k] = 5'($urandom);
        craddr[k] = 7'($urandom);
      end
      #1;
      for (int k = 0; k < P; k++) begin
        if (deu_en && den[k]) begin
          chk(pre[k], "preempt");
          chk(drd[k] == ((dareg[k] == 0) ? 64'd0 : prf[map[dareg[k]]]),
              $sformatf("DEU read x%0d", dareg[k]));
        end else begin
          chk(!pre[k], "no preempt");
          chk(crd[k] == prf[craddr[k]], "core read passes through");
        end
      end
    end
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
