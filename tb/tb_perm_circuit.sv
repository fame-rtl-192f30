// tb_perm_circuit: a 8-lane permutation circuit with limbs of 8 rows.
// Schedule 0 is the identity; schedules 1-3 use random switch settings and
// random per-buffer read orders. Each limb is written (write phase), then
// read (read phase); every output row is compared with a model built from
// the recursive network models and the buffer contents, the whole output is
// checked to be a permutation of the input limb, and each output row must
// appear 3 cycles after its read step.
module tb_perm_circuit;
  import fame_pkg::*;
  import tb_model_pkg::*;
  localparam int DP = 8, DEPTH = 8, NSCHED = 4, AW = 3, SW = 2, LOG = 3;
  localparam int NSW = LOG * DP / 2, WW = 2 * NSW + DP * AW;
  logic             clk = 0, rst_n = 0;
  logic             cfg_we = 0, start = 0, in_valid = 0, rd_step = 0, out_valid;
  logic [SW+AW-1:0] cfg_addr;
  logic [WW-1:0]    cfg_data;
  logic [SW-1:0]    sched;
  coeff_t [DP-1:0]  din, dout;
  logic [WW-1:0]    table_m [NSCHED][DEPTH];
  int               checks = 0, failures = 0, cyc = 0;
  vec_t             exp_q[$];
  int               texp_q[$];
  u64_t             seen[$];

  perm_circuit #(.DP(DP), .DEPTH(DEPTH), .NSCHED(NSCHED)) dut (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_data, .start, .sched, .in_valid, .din,
    .rd_step, .out_valid, .dout);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  always @(negedge clk) begin
    if (out_valid) begin
      vec_t e; int t;
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("FAIL unexpected row"); end
      else begin
        e = exp_q.pop_front(); t = texp_q.pop_front();
        for (int i = 0; i < DP; i++) begin
          seen.push_back(64'(dout[i]));
          if (64'(dout[i]) != e[i]) begin failures++; $display("FAIL lane %0d got %0d exp %0d", i, dout[i], e[i]); break; end
        end
        checks++;
        if (cyc - t != 3) begin failures++; $display("FAIL latency %0d", cyc - t); end
      end
    end
  end

  function automatic bit [NSW-1:0] sw_of(logic [WW-1:0] w, bit second);
    return second ? w[NSW+DP*AW +: NSW] : w[NSW-1:0];
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    // schedules
    for (int s = 0; s < NSCHED; s++) begin
      int ord [DP][DEPTH];
      for (int i = 0; i < DP; i++) begin
        int tmp[$];
        tmp.delete();
        for (int j = 0; j < DEPTH; j++) tmp.push_back(j);
        if (s != 0) tmp.shuffle();
        for (int j = 0; j < DEPTH; j++) ord[i][j] = tmp[j];
      end
      for (int j = 0; j < DEPTH; j++) begin
        logic [WW-1:0] w;
        for (int k = 0; k < WW; k += 32) w[k +: 32] = (s == 0) ? 32'd0 : $urandom;
        for (int i = 0; i < DP; i++) w[NSW + i*AW +: AW] = AW'(ord[i][j]);
        table_m[s][j] = w;
        @(negedge clk);
        cfg_we = 1; cfg_addr = {SW'(s), AW'(j)}; cfg_data = w;
      end
    end
    @(negedge clk) cfg_we = 0;

    for (int op = 0; op < 8; op++) begin
      u64_t bufm [DP][DEPTH];
      int s;
      s = (op == 0) ? 0 : op % NSCHED;
      seen.delete();
      @(negedge clk);
      start = 1; sched = SW'(s);
      @(negedge clk);
      start = 0;
      for (int j = 0; j < DEPTH; j++) begin
        vec_t v, r;
        bit b[];
        v = new[DP]; b = new[NSW];
        for (int i = 0; i < DP; i++) begin v[i] = u64_t'(op * 1000 + j * DP + i); din[i] = coeff_t'(v[i]); end
        for (int k = 0; k < NSW; k++) b[k] = sw_of(table_m[s][j], 0)[k];
        r = net_in(v, b, DP, 0, 0);
        for (int i = 0; i < DP; i++) bufm[i][j] = r[i];
        in_valid = 1;
        @(negedge clk);
      end
      in_valid = 0;
      @(negedge clk);   // the first read step comes two cycles after the last write step
      for (int j = 0; j < DEPTH; j++) begin
        vec_t t;
        bit b[];
        logic [WW-1:0] w;
        t = new[DP]; b = new[NSW]; w = table_m[s][j];
        for (int i = 0; i < DP; i++) t[i] = bufm[i][int'(w[NSW + i*AW +: AW])];
        for (int k = 0; k < NSW; k++) b[k] = sw_of(w, 1)[k];
        exp_q.push_back(net_out(t, b, DP, LOG - 1, 0));
        texp_q.push_back(cyc);
        rd_step = ($urandom % 3 != 0) || (j == 0);
        if (!rd_step) begin
          exp_q.pop_back(); texp_q.pop_back(); j--;
        end
        @(negedge clk);
        rd_step = 0;
      end
      repeat (5) @(negedge clk);
      // output of the limb is a permutation of its input
      checks++;
      seen.sort();
      if (seen.size() != DP * DEPTH) begin failures++; $display("FAIL size %0d", seen.size()); end
      else for (int k = 0; k < DP * DEPTH; k++)
        if (seen[k] != u64_t'(op * 1000 + k)) begin failures++; $display("FAIL not a permutation k=%0d %0d", k, seen[k]); break; end
    end
    checks++;
    if (exp_q.size() != 0) failures++;
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
