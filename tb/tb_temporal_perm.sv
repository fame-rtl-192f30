// tb_temporal_perm: 8 buffers of depth 16. Random writes and reads at
// independent per-buffer addresses, including reads of the address being
// written (must return the old word), are compared with an array model;
// read data must appear exactly one cycle after rd_en.
module tb_temporal_perm;
  import fame_pkg::*;
  localparam int DP = 8, DEPTH = 16, AW = 4;
  logic                  clk = 0, rst_n = 0, wr_en = 0, rd_en = 0, rd_valid;
  logic [DP-1:0][AW-1:0] wr_addr, rd_addr;
  coeff_t [DP-1:0]       wr_data, rd_data;
  int                    checks = 0, failures = 0;
  longint unsigned       model [DP][DEPTH];
  longint unsigned       exp_row [DP];
  logic                  exp_v = 0;
  int                    collisions = 0;

  temporal_perm #(.DP(DP), .DEPTH(DEPTH)) dut (
    .clk, .rst_n, .wr_en, .wr_addr, .wr_data, .rd_en, .rd_addr, .rd_valid, .rd_data);

  always #5 clk = ~clk;

  task automatic check_out();
    checks++;
    if (rd_valid != exp_v) begin failures++; $display("FAIL rd_valid"); end
    if (exp_v)
      for (int i = 0; i < DP; i++) begin
        checks++;
        if (64'(rd_data[i]) != exp_row[i]) begin
          failures++; $display("FAIL buf %0d got %h exp %h", i, rd_data[i], exp_row[i]);
        end
      end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    // fill every buffer
    for (int j = 0; j < DEPTH; j++) begin
      @(negedge clk);
      wr_en = 1;
      for (int i = 0; i < DP; i++) begin
        wr_addr[i] = AW'(j); wr_data[i] = coeff_t'({$urandom, $urandom});
        model[i][j] = 64'(wr_data[i]);
      end
    end
    @(negedge clk) wr_en = 0;
    rst_n = 1;
    for (int r = 0; r < 600; r++) begin
      @(negedge clk);
      check_out();
      rd_en = (r < 598) ? 1'($urandom) : 1'b0;
      wr_en = 1'($urandom);
      for (int i = 0; i < DP; i++) begin
        rd_addr[i] = AW'($urandom); wr_addr[i] = AW'($urandom);
        if (r % 5 == 0) wr_addr[i] = rd_addr[i];
        wr_data[i] = coeff_t'({$urandom, $urandom});
      end
      if (rd_en && wr_en && r % 5 == 0) collisions++;
      exp_v = rd_en;
      if (rd_en) for (int i = 0; i < DP; i++) exp_row[i] = model[i][rd_addr[i]];
      if (wr_en) for (int i = 0; i < DP; i++) model[i][wr_addr[i]] = 64'(wr_data[i]);
    end
    checks++;
    if (collisions == 0) failures++;
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
