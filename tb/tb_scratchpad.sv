// tb_scratchpad: four banks of 16 rows x 4 lanes, six read clients and four
// write clients. Each cycle up to four reads and four writes are issued to
// distinct banks by randomly chosen clients; read data must match an array
// model one cycle later (old data on a same-row read and write), and the
// number of cycles with four concurrent reads and writes is counted.
module tb_scratchpad;
  import fame_pkg::*;
  localparam int DP = 4, DEPTH = 16, NRD = 6, NWR = 4, AW = 4;
  logic                      clk = 0, rst_n = 0;
  logic   [NRD-1:0]          rd_en = '0;
  logic   [NRD-1:0][1:0]     rd_bank;
  logic   [NRD-1:0][AW-1:0]  rd_addr;
  coeff_t [NRD-1:0][DP-1:0]  rd_data;
  logic   [NWR-1:0]          wr_en = '0;
  logic   [NWR-1:0][1:0]     wr_bank;
  logic   [NWR-1:0][AW-1:0]  wr_addr;
  coeff_t [NWR-1:0][DP-1:0]  wr_data;
  coeff_t [DP-1:0]           model [4][DEPTH];
  coeff_t [NRD-1:0][DP-1:0]  exp_d;
  logic   [NRD-1:0]          exp_v = '0;
  int                        checks = 0, failures = 0, full4 = 0;

  scratchpad #(.DP(DP), .DEPTH(DEPTH), .NRD(NRD), .NWR(NWR)) dut (
    .clk, .rst_n, .rd_en, .rd_bank, .rd_addr, .rd_data, .wr_en, .wr_bank, .wr_addr, .wr_data);

  always #5 clk = ~clk;

  function automatic coeff_t [DP-1:0] rnd_row();
    coeff_t [DP-1:0] r;
    for (int i = 0; i < DP; i++) r[i] = coeff_t'({$urandom, $urandom});
    return r;
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    // fill all banks through write client 2
    for (int k = 0; k < 4; k++)
      for (int j = 0; j < DEPTH; j++) begin
        @(negedge clk);
        wr_en = 4'b0100; wr_bank[2] = 2'(k); wr_addr[2] = AW'(j); wr_data[2] = rnd_row();
        model[k][j] = wr_data[2];
      end
    for (int cyc = 0; cyc < 1500; cyc++) begin
      int banks[$], clients[$];
      @(negedge clk);
      // check the reads of the previous cycle
      for (int c = 0; c < NRD; c++) if (exp_v[c]) begin
        checks++;
        if (rd_data[c] != exp_d[c]) begin failures++; $display("FAIL client %0d", c); end
      end
      rd_en = '0; wr_en = '0;
      banks = '{0, 1, 2, 3}; banks.shuffle();
      clients = '{0, 1, 2, 3, 4, 5}; clients.shuffle();
      for (int k = 0; k < 4; k++)
        if (cyc % 3 == 0 || $urandom % 4 != 0) begin
          rd_en[clients[k]] = 1; rd_bank[clients[k]] = 2'(banks[k]);
          rd_addr[clients[k]] = AW'($urandom);
        end
      banks.shuffle();
      clients = '{0, 1, 2, 3}; clients.shuffle();
      for (int k = 0; k < 4; k++)
        if (cyc % 3 == 0 || $urandom % 4 != 0) begin
          wr_en[clients[k]] = 1; wr_bank[clients[k]] = 2'(banks[k]);
          wr_addr[clients[k]] = (cyc % 2 == 0) ? AW'($urandom) : rd_addr[k];
          wr_data[clients[k]] = rnd_row();
        end
      if ($countones(rd_en) == 4 && $countones(wr_en) == 4) full4++;
      exp_v = rd_en;
      for (int c = 0; c < NRD; c++) if (rd_en[c]) exp_d[c] = model[rd_bank[c]][rd_addr[c]];
      for (int c = 0; c < NWR; c++) if (wr_en[c]) model[wr_bank[c]][wr_addr[c]] = wr_data[c];
    end
    @(negedge clk);
    for (int c = 0; c < NRD; c++) if (exp_v[c]) begin
      checks++;
      if (rd_data[c] != exp_d[c]) failures++;
    end
    checks++;
    if (full4 == 0) failures++;
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
