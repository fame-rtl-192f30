// tb_inter_pe_bus: three PEs on the bus with random senders, destinations
// and receiver readiness. Every cycle: at most one row crosses; it goes
// from a valid sender to its ready destination with the sender's data and
// number; a row crosses whenever some sender's destination is ready; and
// under full contention the senders are served in round-robin order.
module tb_inter_pe_bus;
  import fame_pkg::*;
  localparam int NUM_PE = 3, DP = 2, PW = 2;
  logic                         clk = 0, rst_n = 0;
  logic   [NUM_PE-1:0]          tx_valid = '0, tx_ready, rx_valid, rx_ready = '0;
  coeff_t [NUM_PE-1:0][DP-1:0]  tx_data;
  logic   [NUM_PE-1:0][3:0]     tx_dst;
  coeff_t [DP-1:0]              rx_data;
  logic   [PW-1:0]              rx_src;
  int checks = 0, failures = 0, moved = 0, rr_checked = 0, last_g = -1;

  inter_pe_bus #(.NUM_PE(NUM_PE), .DP(DP)) dut (
    .clk, .rst_n, .tx_valid, .tx_ready, .tx_data, .tx_dst, .rx_valid, .rx_ready, .rx_data, .rx_src);

  always #5 clk = ~clk;

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      bit contended, any_elig;
      int g;
      @(negedge clk);
      contended = (n >= 1500);
      for (int p = 0; p < NUM_PE; p++) begin
        tx_valid[p] = contended ? 1'b1 : 1'($urandom);
        tx_dst[p]   = 4'((p + 1 + ($urandom % (NUM_PE - 1))) % NUM_PE);
        if (contended) tx_dst[p] = 4'((p + 1) % NUM_PE);
        rx_ready[p] = contended ? 1'b1 : 1'($urandom);
        for (int i = 0; i < DP; i++) tx_data[p][i] = coeff_t'({$urandom, $urandom});
      end
      #1;
      any_elig = 0;
      for (int p = 0; p < NUM_PE; p++) if (tx_valid[p] && rx_ready[tx_dst[p]]) any_elig = 1;
      checks++;
      if ($countones(tx_ready) > 1 || $countones(rx_valid) > 1) begin failures++; $display("FAIL two rows"); end
      checks++;
      if (any_elig != (tx_ready != 0)) begin failures++; $display("FAIL bus idle with eligible sender"); end
      g = -1;
      for (int p = 0; p < NUM_PE; p++) if (tx_ready[p]) g = p;
      if (g >= 0) begin
        moved++;
        checks++;
        if (!tx_valid[g] || !rx_ready[tx_dst[g]] || rx_valid != (NUM_PE'(1) << tx_dst[g]) ||
            rx_data != tx_data[g] || int'(rx_src) != g) begin
          failures++; $display("FAIL transfer from %0d", g);
        end
        if (contended && last_g >= 0 && n > 1501) begin
          checks++; rr_checked++;
          if (g != (last_g + 1) % NUM_PE) begin failures++; $display("FAIL round robin %0d after %0d", g, last_g); end
        end
        last_g = g;
      end else if (rx_valid != 0) begin
        failures++; $display("FAIL rx_valid without transfer");
      end
    end
    checks++;
    if (moved == 0 || rr_checked == 0) failures++;
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
