// tb_async_fifo: a 256-bit, 16-deep dual-clock FIFO with unrelated clocks
// (write 7 ns, read 5 ns period, then swapped speeds by throttling). A
// random pusher and popper move 3000 words; every popped word must be the
// next pushed word, the FIFO must report full at least once and empty at
// least once, and nothing may be pushed while full or popped while empty.
module tb_async_fifo;
  localparam int W = 256, DEPTH = 16;
  logic         wclk = 0, rclk = 0, wrst_n = 0, rrst_n = 0;
  logic         push = 0, pop = 0, full, empty;
  logic [W-1:0] wdata, rdata;
  logic [W-1:0] sent[$];
  int           checks = 0, failures = 0, nfull = 0, nempty = 0, nrecv = 0, nsent = 0;
  int           wphase = 0;

  async_fifo #(.W(W), .DEPTH(DEPTH)) dut (
    .wclk, .wrst_n, .push, .wdata, .full, .rclk, .rrst_n, .pop, .rdata, .empty);

  always #7 wclk = ~wclk;
  always #5 rclk = ~rclk;

  // writer
  initial begin
    repeat (3) @(posedge wclk);
    wrst_n = 1; rrst_n = 1;
    repeat (3) @(posedge wclk);
    while (nsent < 3000) begin
      @(negedge wclk);
      if (full) nfull++;
      push = 1'b0;
      if (!full && ((nsent < 1500) ? ($urandom % 8 != 0) : ($urandom % 4 == 0))) begin
        push = 1'b1;
        for (int k = 0; k < W; k += 32) wdata[k +: 32] = $urandom;
        sent.push_back(wdata);
        nsent++;
      end
    end
    @(negedge wclk) push = 1'b0;
  end

  // reader
  initial begin
    repeat (8) @(posedge rclk);
    while (nrecv < 3000) begin
      @(negedge rclk);
      if (empty) nempty++;
      pop = 1'b0;
      if (!empty && ((nrecv < 1000) ? ($urandom % 3 == 0) : 1'b1)) begin
        pop = 1'b1;
        checks++;
        if (sent.size() == 0 || rdata != sent[0]) begin
          failures++; $display("FAIL word %0d", nrecv);
        end
        if (sent.size() != 0) void'(sent.pop_front());
        nrecv++;
      end
    end
    @(negedge rclk) pop = 1'b0;
    repeat (4) @(negedge rclk);
    checks++;
    if (!empty) begin failures++; $display("FAIL not empty at end"); end
    checks++;
    if (nfull == 0 || nempty == 0) begin failures++; $display("FAIL full %0d empty %0d", nfull, nempty); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge rclk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
