// cdc_fifo: asynchronous FIFO from the fabric's clock to a little core's.
//
// Classic dual-clock FIFO: binary write/read pointers one bit wider than
// the address, converted to Gray code and passed through two flip-flops into
// the other domain. Full is judged in the write domain against the
// synchronised read pointer, empty in the read domain against the
// synchronised write pointer, so both are conservative and never wrong.
// Write handshake wvalid/wready, read handshake rvalid/rready with the head
// shown on rdata (first-word fall-through). DEPTH must be a power of two.
//
// Paper: a CDC stage between the fabric and each little core (the big core
// runs at 3.2 GHz, the little cores at 1.6 GHz). Own choice: the structure
// and the depth.
module cdc_fifo #(
  parameter int WIDTH = 274,
  parameter int DEPTH = 8
) (
  input  logic             wclk,
  input  logic             wrst_n,
  input  logic             wvalid,
  input  logic [WIDTH-1:0] wdata,
  output logic             wready,
  input  logic             rclk,
  input  logic             rrst_n,
  output logic             rvalid,
  output logic [WIDTH-1:0] rdata,
  input  logic             rready
);
  localparam int AW = $clog2(DEPTH);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] rgray_w1, rgray_w2, wgray_r1, wgray_r2;

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // Write domain.
  logic [AW:0] wbin_n;
  assign wready = (bin2gray(wbin) != {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});
  assign wbin_n = wbin + 1'b1;
  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wbin <= '0; wgray <= '0; rgray_w1 <= '0; rgray_w2 <= '0;
    end else begin
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
      if (wvalid && wready) begin
        wbin  <= wbin_n;
        wgray <= bin2gray(wbin_n);
      end
    end
  end
  always_ff @(posedge wclk) begin
    if (wvalid && wready) mem[wbin[AW-1:0]] <= wdata;
  end

  // Read domain.
  logic [AW:0] rbin_n;
  assign rvalid = (rgray != wgray_r2);
  assign rdata  = mem[rbin[AW-1:0]];
  assign rbin_n = rbin + 1'b1;
  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rbin <= '0; rgray <= '0; wgray_r1 <= '0; wgray_r2 <= '0;
    end else begin
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
      if (rvalid && rready) begin
        rbin  <= rbin_n;
        rgray <= bin2gray(rbin_n);
      end
    end
  end
endmodule
