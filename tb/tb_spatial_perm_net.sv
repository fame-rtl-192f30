// tb_spatial_perm_net: both spatial networks (input side and output side),
// 16 lanes, random switch settings per row. Each output row is compared
// with a recursive model of the drawn network and checked to be a
// permutation of its input row; the 1-cycle latency is checked too.
module tb_spatial_perm_net;
  import fame_pkg::*;
  import tb_model_pkg::*;
  localparam int DP  = 16;
  localparam int LOG = 4;
  localparam int NSW = LOG * DP / 2;
  logic            clk = 0, rst_n = 0, in_valid = 0, ov0, ov1;
  coeff_t [DP-1:0] din, d0, d1;
  logic [NSW-1:0]  sw;
  int              checks = 0, failures = 0;
  vec_t            e0_q[$], e1_q[$];

  spatial_perm_net #(.DP(DP), .OUTPUT_SIDE(1'b0)) dut_in (
    .clk, .rst_n, .in_valid, .din, .sw, .out_valid(ov0), .dout(d0));
  spatial_perm_net #(.DP(DP), .OUTPUT_SIDE(1'b1)) dut_out (
    .clk, .rst_n, .in_valid, .din, .sw, .out_valid(ov1), .dout(d1));

  always #5 clk = ~clk;

  task automatic cmp(coeff_t [DP-1:0] d, vec_t e, string nm);
    bit seen[DP];
    checks++;
    foreach (seen[i]) seen[i] = 0;
    for (int i = 0; i < DP; i++) begin
      if (64'(d[i]) != e[i]) begin
        failures++; $display("FAIL %s lane %0d got %0d exp %0d", nm, i, d[i], e[i]); break;
      end
    end
    checks++;
    for (int i = 0; i < DP; i++) if (int'(d[i]) < DP) seen[int'(d[i])] = 1;
    foreach (seen[i]) if (!seen[i]) begin failures++; $display("FAIL %s not a permutation %p", nm, d); break; end
  endtask

  always @(negedge clk) begin
    if (ov0 != ov1) failures++;
    if (ov0) begin
      cmp(d0, e0_q.pop_front(), "in-side");
      cmp(d1, e1_q.pop_front(), "out-side");
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 400; r++) begin
      vec_t v;
      bit   b[];
      @(negedge clk);
      v = new[DP]; b = new[NSW];
      in_valid = ($urandom % 4) != 0;
      for (int i = 0; i < NSW; i++) begin
        b[i] = (r < 2) ? 1'b0 : (r < 4) ? 1'b1 : 1'($urandom);
        sw[i] = b[i];
      end
      for (int i = 0; i < DP; i++) begin v[i] = i; din[i] = i; end
      v.shuffle();
      for (int i = 0; i < DP; i++) din[i] = v[i];
      if (in_valid) begin
        e0_q.push_back(net_in(v, b, DP, 0, 0));
        e1_q.push_back(net_out(v, b, DP, LOG - 1, 0));
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (3) @(posedge clk);
    checks++;
    if (e0_q.size() != 0) begin failures++; $display("FAIL rows missing"); end
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
