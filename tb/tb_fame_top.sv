// tb_fame_top: the whole accelerator at its default (FAME-S) size: 2 PEs
// of 128 lanes, 4 x 256-row banks, limbs of N = 8192 coefficients (64
// rows), 32 HBM channel FIFO pairs. The HBM side runs on its own clock
// (7 ns against 10 ns): a model of the HBM controller pushes the words of
// each LOADed row into the read FIFOs of the PE's 16 channels (beat k,
// channel c carries word 16k+c) and pops the write FIFOs at random,
// rebuilding STOREd rows and comparing them with a scoreboard.
// Program, PE 0: SETQ, two LOADs, ALU MUL, ALU ADD (waits for the ALU
// engine), PERM through a random schedule (waits for bank 2), STORE of
// the permuted limb, SEND of it to PE 1. PE 1: SETQ, RECV, LOAD, ALU SUB,
// LOAD into a free bank (overlapping the ALU), two STOREs. Checked: every
// stored row, the ALU writing one row per cycle, and that each mechanism
// happened at least once: read FIFO full, write FIFO full, bank stall,
// engine stall, bus transfer, a LOAD overlapping an ALU instruction.
// The sizes are the published FAME-S configuration; the program and the
// HBM controller model are this testbench's own.
module tb_fame_top;
  import fame_pkg::*;
  import tb_model_pkg::*;
  localparam int NUM_PE = 2, DP = 128, BD = 256, NSCHED = 4, NUM_CH = 32, CH = 16;
  localparam int DEPTH = 64, PAW = 6, SW = 2, LOG = 7;
  localparam int NSW = LOG * DP / 2, WW = 2 * NSW + DP * PAW;
  localparam int ROW_W = DP * COEFF_W, WORDS = (ROW_W + HBM_W - 1) / HBM_W;

  logic clk = 0, rst_n = 0, hbm_clk = 0, hbm_rst_n = 0;
  logic [NUM_CH-1:0]             rdf_push = '0, rdf_full, wrf_pop = '0, wrf_empty;
  logic [NUM_CH-1:0][HBM_W-1:0]  rdf_wdata, wrf_rdata;
  logic [NUM_PE-1:0]             instr_valid = '0, instr_ready, cfg_we = '0;
  instr_t [NUM_PE-1:0]           instr;
  logic [NUM_PE-1:0][SW+PAW-1:0] cfg_addr;
  logic [NUM_PE-1:0][WW-1:0]     cfg_data;
  logic [NUM_PE-1:0]             pe_idle, pe_err, pe_stall_bank, pe_stall_busy;

  fame_top dut (.*);

  always #5   clk = ~clk;
  always #3.5 hbm_clk = ~hbm_clk;

  int   checks = 0, failures = 0, cyc = 0;
  u64_t mem [NUM_PE][4][BD][DP];
  logic [WW-1:0] sched1 [DEPTH];
  logic [HBM_W-1:0] rdw_q [NUM_CH][$];   // words still to push, per channel
  logic [HBM_W-1:0] wrw_q [NUM_CH][$];   // words popped, per channel
  vec_t exp_q [NUM_PE][$];               // rows expected from STOREs
  u64_t q;
  logic [54:0] mu;
  int   n_rdf_full = 0, n_wrf_full = 0, n_stall_bank = 0, n_stall_busy = 0;
  int   n_bus = 0, n_overlap = 0, alu_run = 0, alu_gap = 0, rows_out = 0;
  bit   prev_alu_wr = 0;

  // ---------------- HBM controller model (hbm_clk) ----------------
  always @(negedge hbm_clk) begin
    for (int c = 0; c < NUM_CH; c++) begin
      rdf_push[c] = (rdw_q[c].size() != 0) && !rdf_full[c] && ($urandom % 4 != 0);
      if (rdw_q[c].size() != 0 && rdf_full[c]) n_rdf_full++;
      if (rdf_push[c]) rdf_wdata[c] = rdw_q[c].pop_front();
      wrf_pop[c] = !wrf_empty[c] && ($urandom % 10 < 3);
      if (hbm_rst_n && wrf_pop[c]) wrw_q[c].push_back(wrf_rdata[c]);
    end
    // rebuild complete rows
    for (int p = 0; p < NUM_PE; p++) begin
      bit ok;
      ok = 1;
      for (int c = 0; c < CH; c++)
        if (wrw_q[p*CH + c].size() < ((c < WORDS - CH) ? 2 : 1)) ok = 0;
      if (ok) begin
        logic [WORDS*HBM_W-1:0] row;
        row = '0;
        for (int w = 0; w < WORDS; w++) row[w*HBM_W +: HBM_W] = wrw_q[p*CH + (w % CH)].pop_front();
        checks++; rows_out++;
        if (exp_q[p].size() == 0) begin failures++; $display("FAIL PE%0d unexpected row", p); end
        else begin
          for (int i = 0; i < DP; i++) if (u64_t'(row[i*COEFF_W +: COEFF_W]) != exp_q[p][0][i]) begin
            failures++; $display("FAIL PE%0d row lane %0d", p, i); break;
          end
          void'(exp_q[p].pop_front());
        end
      end
    end
  end

  // ---------------- accelerator-side monitors (clk) ----------------
  always @(negedge clk) if (rst_n) begin
    cyc++;
    for (int p = 0; p < NUM_PE; p++) begin
      if (pe_stall_bank[p] && instr_valid[p]) n_stall_bank++;
      if (pe_stall_busy[p] && instr_valid[p]) n_stall_busy++;
      if (pe_err[p]) begin failures++; checks++; $display("FAIL PE%0d err", p); end
    end
    if (dut.tx_valid != 0 && dut.tx_ready != 0) n_bus++;
    if (dut.wrf_full != 0) n_wrf_full++;
    if (dut.g_pe[0].u_pe.wr_en[0]) alu_run++;
    else if (prev_alu_wr && dut.g_pe[0].u_pe.u_alu_eng.busy) alu_gap++;
    prev_alu_wr = dut.g_pe[0].u_pe.wr_en[0];
    if (dut.g_pe[1].u_pe.wr_en[0] && dut.g_pe[1].u_pe.wr_en[2]) n_overlap++;
  end

  // ---------------- host ----------------
  function automatic instr_t mk(opcode_e op, int ba, int aa, int bd, int ad, int len);
    instr_t i;
    i = '0;
    i.op = op; i.bank_a = 2'(ba); i.addr_a = 16'(aa); i.bank_d = 2'(bd); i.addr_d = 16'(ad);
    i.len = 16'(len);
    return i;
  endfunction

  task automatic send(int p, instr_t i);
    @(negedge clk);
    instr[p] = i; instr_valid[p] = 1;
    #1;
    while (!instr_ready[p]) begin @(negedge clk); #1; end
    @(negedge clk);
    instr_valid[p] = 0;
  endtask

  task automatic load(int p, int b, int a, int len);
    for (int r = 0; r < len; r++) begin
      logic [WORDS*HBM_W-1:0] row;
      row = '0;
      for (int i = 0; i < DP; i++) begin
        mem[p][b][a + r][i] = rnd54() % q;
        row[i*COEFF_W +: COEFF_W] = COEFF_W'(mem[p][b][a + r][i]);
      end
      for (int w = 0; w < WORDS; w++) rdw_q[p*CH + (w % CH)].push_back(row[w*HBM_W +: HBM_W]);
    end
    send(p, mk(OP_LOAD, 0, 0, b, a, len));
  endtask

  task automatic store(int p, int b, int a, int len);
    for (int r = 0; r < len; r++) begin
      vec_t v;
      v = new[DP];
      for (int i = 0; i < DP; i++) v[i] = mem[p][b][a + r][i];
      exp_q[p].push_back(v);
    end
    send(p, mk(OP_STORE, b, a, 0, 0, len));
  endtask

  task automatic alu(int p, alu_op_e op, int ba, int aa, int bb, int ab, int bd, int ad, int len);
    instr_t i;
    i = mk(OP_ALU, ba, aa, bd, ad, len);
    i.aop = op; i.bank_b = 2'(bb); i.addr_b = 16'(ab);
    for (int r = 0; r < len; r++)
      for (int l = 0; l < DP; l++) begin
        u64_t x, y;
        x = mem[p][ba][aa + r][l]; y = mem[p][bb][ab + r][l];
        case (op)
          ALU_ADD: mem[p][bd][ad + r][l] = addmod(x, y, q);
          ALU_SUB: mem[p][bd][ad + r][l] = submod(x, y, q);
          default: mem[p][bd][ad + r][l] = mulmod(x, y, q);
        endcase
      end
    send(p, i);
  endtask

  // PERM with schedule 1 (the random one)
  task automatic perm(int p, int ba, int aa, int bd, int ad);
    u64_t bufm [DP][DEPTH];
    instr_t i;
    for (int j = 0; j < DEPTH; j++) begin
      vec_t v, r;
      bit b[];
      v = new[DP]; b = new[NSW];
      for (int l = 0; l < DP; l++) v[l] = mem[p][ba][aa + j][l];
      for (int k = 0; k < NSW; k++) b[k] = sched1[j][k];
      r = net_in(v, b, DP, 0, 0);
      for (int l = 0; l < DP; l++) bufm[l][j] = r[l];
    end
    for (int j = 0; j < DEPTH; j++) begin
      vec_t t, r;
      bit b[];
      t = new[DP]; b = new[NSW];
      for (int l = 0; l < DP; l++) t[l] = bufm[l][int'(sched1[j][NSW + l*PAW +: PAW])];
      for (int k = 0; k < NSW; k++) b[k] = sched1[j][NSW + DP*PAW + k];
      r = net_out(t, b, DP, LOG - 1, 0);
      for (int l = 0; l < DP; l++) mem[p][bd][ad + j][l] = r[l];
    end
    i = mk(OP_PERM, ba, aa, bd, ad, DEPTH);
    i.sched = 4'd1;
    send(p, i);
  endtask

  initial begin
    instr_t i;
    #20;
    rst_n = 1; hbm_rst_n = 1;
    // random schedule 1 into PE 0
    for (int l = 0; l < DP; l++) begin
      int tmp[$];
      tmp.delete();
      for (int j = 0; j < DEPTH; j++) tmp.push_back(j);
      tmp.shuffle();
      for (int j = 0; j < DEPTH; j++) sched1[j][NSW + l*PAW +: PAW] = PAW'(tmp[j]);
    end
    for (int j = 0; j < DEPTH; j++) begin
      for (int k = 0; k < NSW; k++) begin
        sched1[j][k] = 1'($urandom);
        sched1[j][NSW + DP*PAW + k] = 1'($urandom);
      end
      @(negedge clk);
      cfg_we[0] = 1; cfg_addr[0] = {SW'(1), PAW'(j)}; cfg_data[0] = sched1[j];
    end
    @(negedge clk) cfg_we[0] = 0;
    q = rnd_q(); mu = calc_mu(q);
    fork
      begin : pe0
        instr_t s;
        s = mk(OP_SETQ, 0, 0, 0, 0, 0); s.q = coeff_t'(q); s.mu = mu;
        send(0, s);
        load(0, 0, 0, DEPTH);
        load(0, 1, 0, DEPTH);
        alu(0, ALU_MUL, 0, 0, 1, 0, 2, 0, DEPTH);
        alu(0, ALU_ADD, 0, 0, 1, 0, 0, 64, DEPTH);    // engine stall
        perm(0, 2, 0, 3, 0);                          // bank stall on bank 2
        store(0, 3, 0, DEPTH);
        s = mk(OP_SEND, 3, 0, 0, 0, DEPTH); s.peer = 4'd1;
        send(0, s);
        store(0, 0, 64, 16);
        send(0, mk(OP_SYNC, 0, 0, 0, 0, 0));
      end
      begin : pe1
        instr_t s;
        s = mk(OP_SETQ, 0, 0, 0, 0, 0); s.q = coeff_t'(q); s.mu = mu;
        send(1, s);
        load(1, 1, 0, DEPTH);
        // RECV: the rows PE 0 sends are its permuted limb
        wait (exp_q[0].size() != 0 || rows_out != 0);
        for (int r = 0; r < DEPTH; r++) for (int l = 0; l < DP; l++) mem[1][0][r][l] = mem[0][3][r][l];
        send(1, mk(OP_RECV, 0, 0, 0, 0, DEPTH));
        alu(1, ALU_SUB, 0, 0, 1, 0, 2, 0, DEPTH);
        load(1, 3, 0, 16);                            // overlaps the ALU
        store(1, 2, 0, DEPTH);
        store(1, 3, 0, 16);
        send(1, mk(OP_SYNC, 0, 0, 0, 0, 0));
      end
    join
    // drain the write FIFOs
    while (exp_q[0].size() != 0 || exp_q[1].size() != 0) @(negedge clk);
    repeat (10) @(negedge clk);
    checks++;
    if (rows_out != 2 * DEPTH + 32 || pe_idle != '1) begin
      failures++; $display("FAIL rows out %0d idle %b", rows_out, pe_idle);
    end
    checks++;
    if (alu_run != 2 * DEPTH || alu_gap != 0) begin
      failures++; $display("FAIL ALU rate %0d rows, %0d gaps", alu_run, alu_gap);
    end
    checks++;
    if (n_rdf_full == 0 || n_wrf_full == 0 || n_stall_bank == 0 || n_stall_busy == 0 ||
        n_bus != DEPTH || n_overlap == 0) begin
      failures++;
      $display("FAIL mechanism missing: rdf_full %0d wrf_full %0d bank %0d busy %0d bus %0d overlap %0d",
               n_rdf_full, n_wrf_full, n_stall_bank, n_stall_busy, n_bus, n_overlap);
    end
    $display("tb_fame_top: cycles=%0d rdf_full=%0d wrf_full=%0d stall_bank=%0d stall_busy=%0d bus_rows=%0d overlap=%0d",
             cyc, n_rdf_full, n_wrf_full, n_stall_bank, n_stall_busy, n_bus, n_overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL timeout: idle %b exp %0d %0d rows %0d rdw0 %0d", pe_idle, exp_q[0].size(), exp_q[1].size(), rows_out, rdw_q[0].size());
    for (int c = 0; c < NUM_CH; c++) $display("ch %0d wrw %0d rdw %0d empty %b", c, wrw_q[c].size(), rdw_q[c].size(), wrf_empty[c]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
