// tb_perm_ctrl: writes random schedules into the control unit, then runs
// write steps and read steps of random schedules, with gaps, and checks
// that each step's control word (sw1, rd_addr, sw2), write address and
// strobe appear one cycle later, and that start restarts the counters.
module tb_perm_ctrl;
  import fame_pkg::*;
  localparam int DP = 8, DEPTH = 8, NSCHED = 4, AW = 3, SW = 2;
  localparam int NSW = 3 * DP / 2, WW = 2 * NSW + DP * AW;
  logic                  clk = 0, rst_n = 0;
  logic                  cfg_we = 0, start = 0, wr_step = 0, rd_step = 0;
  logic [SW+AW-1:0]      cfg_addr;
  logic [WW-1:0]         cfg_data;
  logic [SW-1:0]         sched;
  logic                  ctl_wr, ctl_rd;
  logic [AW-1:0]         ctl_wr_addr;
  logic [NSW-1:0]        ctl_sw1, ctl_sw2;
  logic [DP-1:0][AW-1:0] ctl_rd_addr;
  logic [WW-1:0]         table_m [NSCHED][DEPTH];
  int                    checks = 0, failures = 0;
  logic                  exp_wr = 0, exp_rd = 0;
  logic [WW-1:0]         exp_word;
  int                    exp_j;

  perm_ctrl #(.DP(DP), .DEPTH(DEPTH), .NSCHED(NSCHED)) dut (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_data, .start, .sched, .wr_step, .rd_step,
    .ctl_wr, .ctl_rd, .ctl_wr_addr, .ctl_sw1, .ctl_sw2, .ctl_rd_addr);

  always #5 clk = ~clk;

  task automatic check_out();
    checks++;
    if (ctl_wr != exp_wr || ctl_rd != exp_rd) begin
      failures++; $display("FAIL strobes wr=%0d rd=%0d exp %0d %0d", ctl_wr, ctl_rd, exp_wr, exp_rd);
    end
    if (exp_wr || exp_rd) begin
      checks++;
      if (ctl_sw1 != exp_word[NSW-1:0] || ctl_rd_addr != exp_word[NSW +: DP*AW] ||
          ctl_sw2 != exp_word[NSW+DP*AW +: NSW]) begin
        failures++; $display("FAIL control word");
      end
    end
    if (exp_wr) begin
      checks++;
      if (int'(ctl_wr_addr) != exp_j) begin failures++; $display("FAIL wr addr %0d exp %0d", ctl_wr_addr, exp_j); end
    end
  endtask

  initial begin
    int wj, rj;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < NSCHED; s++)
      for (int j = 0; j < DEPTH; j++) begin
        @(negedge clk);
        cfg_we = 1; cfg_addr = {SW'(s), AW'(j)};
        for (int k = 0; k < WW; k += 32) cfg_data[k +: 32] = $urandom;
        table_m[s][j] = cfg_data;
      end
    @(negedge clk) cfg_we = 0;
    for (int op = 0; op < 12; op++) begin
      @(negedge clk);
      check_out(); exp_wr = 0; exp_rd = 0;
      start = 1; sched = SW'($urandom);
      wj = 0; rj = 0;
      @(negedge clk);
      check_out();
      start = 0;
      // write phase with random gaps, then read phase
      while (wj < DEPTH || rj < DEPTH) begin
        @(negedge clk);
        check_out();
        wr_step = 0; rd_step = 0; exp_wr = 0; exp_rd = 0;
        if ($urandom % 4 != 0) begin
          if (wj < DEPTH) begin
            wr_step = 1; exp_wr = 1; exp_word = table_m[sched][wj]; exp_j = wj; wj++;
          end else begin
            rd_step = 1; exp_rd = 1; exp_word = table_m[sched][rj]; rj++;
          end
        end
      end
      @(negedge clk);
      check_out();
      wr_step = 0; rd_step = 0; exp_wr = 0; exp_rd = 0;
    end
    @(negedge clk);
    check_out();
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
