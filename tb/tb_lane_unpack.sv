// tb_lane_unpack: 16-lane rows into 4 words over 3 channels (two beats).
// Rows are offered at random, channels report full at random; the words
// collected per channel are reassembled into rows and compared with the
// rows sent. With no channel full, a row must be accepted every BEATS
// cycles.
module tb_lane_unpack;
  import fame_pkg::*;
  localparam int DP = 16, CH = 3, WORDS = 4, BEATS = 2;
  logic                     clk = 0, rst_n = 0;
  logic                     row_valid = 0, row_ready;
  coeff_t [DP-1:0]          row_data;
  logic [CH-1:0]            ch_full = '0, ch_push;
  logic [CH-1:0][HBM_W-1:0] ch_data;
  logic [HBM_W-1:0]         chq [CH][$];
  coeff_t [DP-1:0]          sent[$];
  int                       checks = 0, failures = 0, nsent = 0, cyc = 0, last_acc = -1, rate_ok = 0;
  bit                       fast;
  bit                       acc = 0;


  lane_unpack #(.DP(DP), .CH(CH)) dut (
    .clk, .rst_n, .row_valid, .row_ready, .row_data, .ch_full, .ch_push, .ch_data);

  always #5 clk = ~clk;

  task automatic drain_rows();
    // reassemble whole rows from the channel queues
    while (chq[0].size() >= 2 && chq[1].size() >= 1 && chq[2].size() >= 1) begin
      logic [WORDS*HBM_W-1:0] bits;
      coeff_t [DP-1:0] r;
      for (int w = 0; w < WORDS; w++) bits[w*HBM_W +: HBM_W] = chq[w % CH].pop_front();
      for (int i = 0; i < DP; i++) r[i] = bits[i*COEFF_W +: COEFF_W];
      checks++;
      if (r != sent[0]) begin failures++; $display("FAIL row mismatch"); end
      void'(sent.pop_front());
      checks++;
      if (bits[WORDS*HBM_W-1:DP*COEFF_W] != '0) begin failures++; $display("FAIL padding"); end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      cyc++;
      if (acc) row_valid = 0;
      acc = 0;
      fast = (n >= 300);
      if (n == 300) last_acc = -1;
      if (!row_valid && (fast || $urandom % 2)) begin
        row_valid = 1;
        for (int i = 0; i < DP; i++) row_data[i] = coeff_t'({$urandom, $urandom});
      end
      for (int c = 0; c < CH; c++) ch_full[c] = fast ? 1'b0 : ($urandom % 3 == 0);
      #1;
      // what the coming clock edge will do
      for (int c = 0; c < CH; c++) if (ch_push[c]) begin
        if (ch_full[c]) begin failures++; $display("FAIL push while full"); end
        chq[c].push_back(ch_data[c]);
      end
      if (row_valid && row_ready) begin
        acc = 1;
        sent.push_back(row_data);
        if (fast && last_acc >= 0) begin
          checks++;
          if (cyc - last_acc != BEATS) begin failures++; $display("FAIL rate %0d", cyc - last_acc); end
          else rate_ok++;
        end
        last_acc = cyc;
      end
      drain_rows();
    end
    @(negedge clk);
    if (acc) row_valid = 0;
    ch_full = '0;
    repeat (3) begin
      @(negedge clk);
      #1;
      for (int c = 0; c < CH; c++) if (ch_push[c]) chq[c].push_back(ch_data[c]);
    end
    checks++;
    if (rate_ok == 0 || sent.size() > 1) begin failures++; $display("FAIL rate_ok %0d left %0d", rate_ok, sent.size()); end
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
