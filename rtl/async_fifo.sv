// async_fifo: dual-clock FIFO with Gray-coded pointers.
//
// Write side in wclk, read side in rclk. Each side keeps a binary pointer one
// bit wider than the address and publishes it in Gray code; the other side
// synchronises that Gray pointer through two flops. Full and empty are
// computed from the local pointer and the synchronised remote pointer, so
// they are conservative (full may linger, empty may linger) but never wrong.
// 'rdata' shows the oldest entry; 'pop' consumes it. DEPTH is a power of two.
module async_fifo #(
  parameter int W     = 8,
  parameter int DEPTH = 8
) (
  input  logic         wclk,
  input  logic         wrst_n,
  input  logic         push,
  input  logic [W-1:0] wdata,
  output logic         full,
  input  logic         rclk,
  input  logic         rrst_n,
  input  logic         pop,
  output logic [W-1:0] rdata,
  output logic         empty
);
  localparam int AW = $clog2(DEPTH);
  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wbin, rbin, wgray, rgray;
  logic [AW:0]  rgray_w1, rgray_w2, wgray_r1, wgray_r2;

  function automatic logic [AW:0] b2g(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  assign wgray = b2g(wbin);
  assign rgray = b2g(rbin);
  assign full  = wgray == {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]};
  assign empty = rgray == wgray_r2;
  assign rdata = mem[rbin[AW-1:0]];

  always_ff @(posedge wclk) if (push && !full) mem[wbin[AW-1:0]] <= wdata;

  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wbin     <= '0;
      rgray_w1 <= '0;
      rgray_w2 <= '0;
    end else begin
      if (push && !full) wbin <= wbin + 1'b1;
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
    end
  end

  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rbin     <= '0;
      wgray_r1 <= '0;
      wgray_r2 <= '0;
    end else begin
      if (pop && !empty) rbin <= rbin + 1'b1;
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
    end
  end
endmodule
