// tb_lane_pack: 16-lane rows (4 words of 256 bits) spread over 3 channels,
// so a row takes two beats and the second beat uses one channel only.
// Channel queues are filled at random rates and row_ready is random; every
// row must equal the coefficients it was made from. With all channels full
// and row_ready high, a row must leave every BEATS cycles.
module tb_lane_pack;
  import fame_pkg::*;
  localparam int DP = 16, CH = 3, WORDS = 4, BEATS = 2;
  logic                     clk = 0, rst_n = 0;
  logic [CH-1:0]            ch_valid, ch_pop;
  logic [CH-1:0][HBM_W-1:0] ch_data;
  logic                     row_valid, row_ready = 0;
  coeff_t [DP-1:0]          row_data;
  logic [HBM_W-1:0]         chq [CH][$];
  coeff_t [DP-1:0]          rows[$];
  int                       checks = 0, failures = 0, nrows = 0, cyc = 0, last_row_cyc = -1;
  int                       gaps_ok = 0;
  bit                       fast = 0;

  lane_pack #(.DP(DP), .CH(CH)) dut (
    .clk, .rst_n, .ch_valid, .ch_data, .ch_pop, .row_valid, .row_ready, .row_data);

  always #5 clk = ~clk;

  task automatic make_row();
    coeff_t [DP-1:0] r;
    logic [WORDS*HBM_W-1:0] bits;
    for (int i = 0; i < DP; i++) r[i] = coeff_t'({$urandom, $urandom});
    rows.push_back(r);
    bits = '0;
    for (int i = 0; i < DP; i++) bits[i*COEFF_W +: COEFF_W] = r[i];
    for (int w = 0; w < WORDS; w++) chq[w % CH].push_back(bits[w*HBM_W +: HBM_W]);
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      cyc++;
      fast = (n >= 200);
      if (n == 200) last_row_cyc = -1;
      if (fast) begin
        if (rows.size() < 4) make_row();
        row_ready = 1;
      end else begin
        if ($urandom % 3 == 0 && rows.size() < 6) make_row();
        row_ready = 1'($urandom % 2);
      end
      for (int c = 0; c < CH; c++) begin
        ch_valid[c] = chq[c].size() != 0;
        ch_data[c]  = ch_valid[c] ? chq[c][0] : '0;
      end
      #1;
      // what the coming clock edge will do
      if (row_valid && row_ready) begin
        checks++;
        if (row_data != rows[0]) begin failures++; $display("FAIL row %0d", nrows); end
        void'(rows.pop_front());
        if (fast && last_row_cyc >= 0) begin
          checks++;
          if (cyc - last_row_cyc != BEATS) begin failures++; $display("FAIL rate %0d", cyc - last_row_cyc); end
          else gaps_ok++;
        end
        last_row_cyc = cyc;
        nrows++;
      end
      for (int c = 0; c < CH; c++) if (ch_pop[c]) void'(chq[c].pop_front());
    end
    checks++;
    if (nrows < 50 || gaps_ok == 0) begin failures++; $display("FAIL only %0d rows", nrows); end
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
