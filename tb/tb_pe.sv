// tb_pe: one processing element (8 lanes, 32-row banks, limbs of 8 rows)
// driven by a host program: LOADs from a random-gap HBM source, ALU
// instructions of every operation, a PERM with a random schedule, STOREs
// into a random-ready HBM sink, SEND onto a random-ready bus and RECV from
// a random-gap bus source. A scoreboard of the four banks, updated in
// program order, predicts every row the PE emits. Also checked: ALU and
// permutation results are written one row per cycle, LOADs on a free bank
// overlap an ALU instruction, a dependent instruction waits for its bank
// (stall_bank) or engine (stall_busy), and an ALU instruction with both
// sources in one bank raises err. Each of these mechanisms must occur.
// Sizes are reduced from the defaults so the scoreboard stays small; the
// instruction set exercised is this design's own.
module tb_pe;
  import fame_pkg::*;
  import tb_model_pkg::*;
  localparam int DP = 8, BD = 32, POLY_N = 64, NSCHED = 2;
  localparam int DEPTH = POLY_N / DP, PAW = 3, SW = 1, LOG = 3;
  localparam int NSW = LOG * DP / 2, WW = 2 * NSW + DP * PAW;
  logic             clk = 0, rst_n = 0;
  logic             instr_valid = 0, instr_ready, cfg_we = 0;
  instr_t           instr;
  logic [SW+PAW-1:0] cfg_addr;
  logic [WW-1:0]    cfg_data;
  logic             hbm_in_valid = 0, hbm_in_ready, hbm_out_valid, hbm_out_ready = 0;
  coeff_t [DP-1:0]  hbm_in_data, hbm_out_data, bus_tx_data, bus_rx_data;
  logic             bus_tx_valid, bus_tx_ready = 0, bus_rx_valid = 0, bus_rx_ready;
  logic [3:0]       bus_tx_dst;
  logic             idle, err, stall_bank, stall_busy;

  pe #(.DP(DP), .BANK_DEPTH(BD), .POLY_N(POLY_N), .NSCHED(NSCHED)) dut (.*);

  int   checks = 0, failures = 0, cyc = 0;
  u64_t mem [4][BD][DP];
  logic [WW-1:0] table_m [NSCHED][DEPTH];
  vec_t hin_q[$], hout_q[$], btx_q[$], brx_q[$];
  int   btx_dst_q[$];
  u64_t q;
  logic [54:0] mu;
  int   n_stall_bank = 0, n_stall_busy = 0, n_out_bp = 0, n_in_gap = 0, n_overlap = 0;
  int   alu_run = 0, alu_gap = 0, perm_run = 0, perm_gap = 0;
  bit   prev_alu_wr = 0, prev_perm_wr = 0;

  always #5 clk = ~clk;

  // HBM source, HBM sink, bus sink and bus source
  always @(negedge clk) begin
    cyc++;
    hbm_in_valid  = (hin_q.size() != 0) && ($urandom % 4 != 0);
    if (hbm_in_valid) for (int i = 0; i < DP; i++) hbm_in_data[i] = coeff_t'(hin_q[0][i]);
    if (hin_q.size() != 0 && !hbm_in_valid) n_in_gap++;
    hbm_out_ready = ($urandom % 3 != 0);
    bus_tx_ready  = ($urandom % 3 != 0);
    bus_rx_valid  = (brx_q.size() != 0) && ($urandom % 3 != 0);
    if (bus_rx_valid) for (int i = 0; i < DP; i++) bus_rx_data[i] = coeff_t'(brx_q[0][i]);
    #1;
    if (hbm_in_valid && hbm_in_ready) void'(hin_q.pop_front());
    if (bus_rx_valid && bus_rx_ready) void'(brx_q.pop_front());
    if (hbm_out_valid && !hbm_out_ready) n_out_bp++;
    if (rst_n && hbm_out_valid && hbm_out_ready) begin
      checks++;
      if (hout_q.size() == 0) begin failures++; $display("FAIL unexpected HBM row"); end
      else begin
        for (int i = 0; i < DP; i++) if (64'(hbm_out_data[i]) != hout_q[0][i]) begin
          failures++; $display("FAIL HBM row lane %0d got %0h exp %0h", i, hbm_out_data[i], hout_q[0][i]); break;
        end
        void'(hout_q.pop_front());
      end
    end
    if (rst_n && bus_tx_valid && bus_tx_ready) begin
      checks++;
      if (btx_q.size() == 0) begin failures++; $display("FAIL unexpected bus row"); end
      else begin
        for (int i = 0; i < DP; i++) if (64'(bus_tx_data[i]) != btx_q[0][i]) begin
          failures++; $display("FAIL bus row lane %0d", i); break;
        end
        if (int'(bus_tx_dst) != btx_dst_q[0]) begin failures++; $display("FAIL bus dst"); end
        void'(btx_q.pop_front()); void'(btx_dst_q.pop_front());
      end
    end
    if (stall_bank && instr_valid) n_stall_bank++;
    if (stall_busy && instr_valid) n_stall_busy++;
    // one row per cycle from the ALU and the permutation circuit
    if (rst_n) begin
      if (dut.wr_en[0]) alu_run++;
      else if (prev_alu_wr && dut.u_alu_eng.busy) alu_gap++;
      if (dut.wr_en[1]) perm_run++;
      else if (prev_perm_wr && (dut.u_perm_eng.st != 0)) perm_gap++;
      prev_alu_wr = dut.wr_en[0]; prev_perm_wr = dut.wr_en[1];
      if (dut.wr_en[0] && dut.wr_en[2]) n_overlap++;
    end
  end

  function automatic instr_t mk(opcode_e op, int ba, int aa, int bd, int ad, int len);
    instr_t i;
    i = '0;
    i.op = op; i.bank_a = 2'(ba); i.addr_a = 16'(aa); i.bank_d = 2'(bd); i.addr_d = 16'(ad);
    i.len = 16'(len);
    return i;
  endfunction

  task automatic send(instr_t i);
    @(negedge clk);
    instr = i; instr_valid = 1;
    #1;
    while (!instr_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    instr_valid = 0;
  endtask

  task automatic load(int b, int a, int len);
    for (int r = 0; r < len; r++) begin
      vec_t v;
      v = new[DP];
      for (int i = 0; i < DP; i++) begin v[i] = rnd54() % q; mem[b][a + r][i] = v[i]; end
      hin_q.push_back(v);
    end
    send(mk(OP_LOAD, 0, 0, b, a, len));
  endtask

  task automatic store(int b, int a, int len);
    for (int r = 0; r < len; r++) begin
      vec_t v;
      v = new[DP];
      for (int i = 0; i < DP; i++) v[i] = mem[b][a + r][i];
      hout_q.push_back(v);
    end
    send(mk(OP_STORE, b, a, 0, 0, len));
  endtask

  task automatic alu(alu_op_e op, int ba, int aa, int bb, int ab, int bc, int ac, int bd, int ad, int len);
    instr_t i;
    u64_t res [BD][DP];
    i = mk(OP_ALU, ba, aa, bd, ad, len);
    i.aop = op; i.bank_b = 2'(bb); i.addr_b = 16'(ab); i.bank_c = 2'(bc); i.addr_c = 16'(ac);
    for (int r = 0; r < len; r++)
      for (int l = 0; l < DP; l++) begin
        u64_t x, y, z;
        x = mem[ba][aa + r][l]; y = mem[bb][ab + r][l]; z = mem[bc][ac + r][l];
        case (op)
          ALU_ADD: res[r][l] = addmod(x, y, q);
          ALU_SUB: res[r][l] = submod(x, y, q);
          ALU_MUL: res[r][l] = mulmod(x, y, q);
          ALU_MAC: res[r][l] = addmod(z, mulmod(x, y, q), q);
          default: res[r][l] = submod(z, mulmod(x, y, q), q);
        endcase
      end
    for (int r = 0; r < len; r++) for (int l = 0; l < DP; l++) mem[bd][ad + r][l] = res[r][l];
    send(i);
  endtask

  task automatic perm(int s, int ba, int aa, int bd, int ad);
    u64_t bufm [DP][DEPTH];
    instr_t i;
    for (int j = 0; j < DEPTH; j++) begin
      vec_t v, r;
      bit b[];
      v = new[DP]; b = new[NSW];
      for (int l = 0; l < DP; l++) v[l] = mem[ba][aa + j][l];
      for (int k = 0; k < NSW; k++) b[k] = table_m[s][j][k];
      r = net_in(v, b, DP, 0, 0);
      for (int l = 0; l < DP; l++) bufm[l][j] = r[l];
    end
    for (int j = 0; j < DEPTH; j++) begin
      vec_t t, r;
      bit b[];
      logic [WW-1:0] w;
      t = new[DP]; b = new[NSW]; w = table_m[s][j];
      for (int l = 0; l < DP; l++) t[l] = bufm[l][int'(w[NSW + l*PAW +: PAW])];
      for (int k = 0; k < NSW; k++) b[k] = w[NSW + DP*PAW + k];
      r = net_out(t, b, DP, LOG - 1, 0);
      for (int l = 0; l < DP; l++) mem[bd][ad + j][l] = r[l];
    end
    i = mk(OP_PERM, ba, aa, bd, ad, DEPTH);
    i.sched = 4'(s);
    send(i);
  endtask

  initial begin
    instr_t i;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // schedules: 0 identity, 1 random
    for (int s = 0; s < NSCHED; s++) begin
      int ord [DP][DEPTH];
      for (int l = 0; l < DP; l++) begin
        int tmp[$];
        tmp.delete();
        for (int j = 0; j < DEPTH; j++) tmp.push_back(j);
        if (s != 0) tmp.shuffle();
        for (int j = 0; j < DEPTH; j++) ord[l][j] = tmp[j];
      end
      for (int j = 0; j < DEPTH; j++) begin
        logic [WW-1:0] w;
        for (int k = 0; k < WW; k += 32) w[k +: 32] = (s == 0) ? 32'd0 : $urandom;
        for (int l = 0; l < DP; l++) w[NSW + l*PAW +: PAW] = PAW'(ord[l][j]);
        table_m[s][j] = w;
        @(negedge clk);
        cfg_we = 1; cfg_addr = {SW'(s), PAW'(j)}; cfg_data = w;
      end
    end
    @(negedge clk) cfg_we = 0;
    q = rnd_q(); mu = calc_mu(q);
    i = mk(OP_SETQ, 0, 0, 0, 0, 0); i.q = coeff_t'(q); i.mu = mu;
    send(i);
    load(0, 0, 16);
    load(1, 0, 16);
    alu(ALU_MUL, 0, 0, 1, 0, 0, 0, 3, 0, 16);   // d3 = a0*b1
    load(2, 0, 32);                             // overlaps the ALU
    alu(ALU_MAC, 0, 0, 1, 0, 2, 0, 3, 0, 16);   // d3 = c2 + a0*b1
    perm(1, 3, 0, 1, 16);                       // waits for bank 3
    alu(ALU_SUB, 0, 0, 1, 0, 0, 0, 3, 16, 8);
    alu(ALU_ADD, 0, 8, 2, 16, 0, 0, 3, 24, 8);  // waits for the ALU engine
    alu(ALU_MUL, 2, 0, 3, 0, 0, 0, 0, 16, 16);
    alu(ALU_MSB, 0, 16, 1, 16, 2, 8, 3, 0, 8);
    perm(0, 3, 0, 2, 24);
    store(3, 0, 32);
    store(1, 16, 8);
    store(2, 24, 8);
    i = mk(OP_SEND, 0, 16, 0, 0, 16); i.peer = 4'd3;
    for (int r = 0; r < 16; r++) begin
      vec_t v;
      v = new[DP];
      for (int l = 0; l < DP; l++) v[l] = mem[0][16 + r][l];
      btx_q.push_back(v); btx_dst_q.push_back(3);
    end
    send(i);
    for (int r = 0; r < 12; r++) begin
      vec_t v;
      v = new[DP];
      for (int l = 0; l < DP; l++) begin v[l] = rnd54() % q; mem[1][r][l] = v[l]; end
      brx_q.push_back(v);
    end
    send(mk(OP_RECV, 0, 0, 1, 0, 12));
    store(1, 0, 12);
    store(0, 0, 32);
    send(mk(OP_SYNC, 0, 0, 0, 0, 0));
    repeat (5) @(negedge clk);
    checks++;
    if (err) begin failures++; $display("FAIL err set by a legal program"); end
    // illegal: a and b in the same bank
    alu(ALU_ADD, 1, 0, 1, 4, 0, 0, 2, 0, 4);
    repeat (3) @(negedge clk);
    checks++;
    if (!err) begin failures++; $display("FAIL err not raised"); end
    checks++;
    if (hout_q.size() || btx_q.size() || hin_q.size() || brx_q.size()) begin
      failures++; $display("FAIL rows left %0d %0d %0d %0d", hout_q.size(), btx_q.size(), hin_q.size(), brx_q.size());
    end
    checks++;
    if (alu_gap != 0 || perm_gap != 0 || alu_run != 72 || perm_run != 16) begin
      failures++; $display("FAIL row rate alu %0d/%0d perm %0d/%0d", alu_run, alu_gap, perm_run, perm_gap);
    end
    checks++;
    if (n_stall_bank == 0 || n_stall_busy == 0 || n_out_bp == 0 || n_in_gap == 0 || n_overlap == 0) begin
      failures++;
      $display("FAIL mechanism missing: bank %0d busy %0d bp %0d gap %0d overlap %0d",
               n_stall_bank, n_stall_busy, n_out_bp, n_in_gap, n_overlap);
    end
    $display("tb_pe: stall_bank=%0d stall_busy=%0d hbm_backpressure=%0d overlap=%0d cycles=%0d",
             n_stall_bank, n_stall_busy, n_out_bp, n_overlap, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
