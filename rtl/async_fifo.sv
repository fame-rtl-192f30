// async_fifo: dual-clock FIFO between the HBM/AXI clock domain and the
// accelerator clock. FAME instantiates 32 pairs of these (one read FIFO and
// one write FIFO per HBM AXI port), each W = 256 bits wide.
//
// Classic Gray-code design: binary read and write pointers one bit wider
// than the address, their Gray forms passed through two-flop synchronizers
// into the other domain; full and empty compare a local Gray pointer with
// the synchronized remote one. The read side is show-ahead: rdata holds the
// head entry whenever empty is low, and pop removes it. DEPTH must be a
// power of two. The 256-bit width and the pairing are the paper's; depth,
// show-ahead reads and reset behaviour (each side resets with its own
// active-low reset, both asserted together) are this design's choices.
module async_fifo #(
  parameter int unsigned W     = 256,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned AW   = $clog2(DEPTH)
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
  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wbin, rbin, wgray, rgray;
  logic [AW:0]  rgray_w1, rgray_w2, wgray_r1, wgray_r2;
  logic [AW:0]  wbin_n, rbin_n;

  function automatic logic [AW:0] bin2gray(logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  assign wbin_n = wbin + (AW+1)'(push && !full);
  assign rbin_n = rbin + (AW+1)'(pop && !empty);

  // write domain
  always_ff @(posedge wclk)
    if (push && !full) mem[wbin[AW-1:0]] <= wdata;

  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wbin <= '0; wgray <= '0; rgray_w1 <= '0; rgray_w2 <= '0;
    end else begin
      wbin  <= wbin_n;
      wgray <= bin2gray(wbin_n);
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
    end
  end

  assign full = (wgray == {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});

  // read domain
  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rbin <= '0; rgray <= '0; wgray_r1 <= '0; wgray_r2 <= '0;
    end else begin
      rbin  <= rbin_n;
      rgray <= bin2gray(rbin_n);
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
    end
  end

  assign empty = (rgray == wgray_r2);
  assign rdata = mem[rbin[AW-1:0]];

  assert property (@(posedge wclk) disable iff (!wrst_n) !(push && full))
    else $error("async_fifo: push while full");
  assert property (@(posedge rclk) disable iff (!rrst_n) !(pop && empty))
    else $error("async_fifo: pop while empty");
endmodule
