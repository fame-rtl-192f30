// tb_pe_ctrl: drives instruction sequences into the PE controller with
// engine models that finish a fixed number of cycles after their start.
// Checked: each instruction starts the right engine with its fields and the
// current q/mu; an instruction waits while its engine is busy (stall_busy)
// or while another engine owns one of its banks (stall_bank), and goes as
// soon as that engine is done; engines on disjoint banks run concurrently;
// no two running engines ever share a bank; SYNC waits for all engines;
// an ALU instruction with two sources in one bank is dropped and raises err.
module tb_pe_ctrl;
  import fame_pkg::*;
  logic       clk = 0, rst_n = 0;
  logic       instr_valid = 0, instr_ready, idle, err, stall_bank, stall_busy;
  instr_t     instr;
  logic [3:0] start, done = '0;
  instr_t     cmd;
  int         checks = 0, failures = 0, cyc = 0;
  int         left [4] = '{default: 0};
  int         nstall_bank = 0, nstall_busy = 0, nconc = 0;
  int         exp_eng[$];
  logic [3:0] own [4] = '{default: '0};
  instr_t     exp_cmd[$];

  pe_ctrl dut (.clk, .rst_n, .instr_valid, .instr_ready, .instr, .start, .cmd, .done,
               .idle, .err, .stall_bank, .stall_busy);

  always #5 clk = ~clk;

  // engine models: run 6 cycles after start, then pulse done
  always @(negedge clk) if (rst_n) begin
    int nact;
    cyc++;
    done = '0;
    for (int e = 0; e < 4; e++) begin
      if (left[e] == 1) done[e] = 1'b1;
      if (left[e] > 0) left[e]--;
    end
    for (int e = 0; e < 4; e++) if (start[e]) begin
      checks++;
      if (exp_eng.size() == 0 || exp_eng[0] != e) begin failures++; $display("FAIL start of engine %0d", e); end
      else begin
        void'(exp_eng.pop_front());
        checks++;
        if (cmd != exp_cmd[0]) begin failures++; $display("FAIL cmd fields"); end
        // no bank may be owned by two running engines
        own[e] = need_of(exp_cmd[0]);
        for (int o = 0; o < 4; o++) if (o != e && left[o] > 0) begin
          checks++;
          if ((own[o] & own[e]) != 0) begin failures++; $display("FAIL engines %0d and %0d share a bank", o, e); end
        end
        void'(exp_cmd.pop_front());
      end
      left[e] = 6;
    end
    nact = 0;
    for (int e = 0; e < 4; e++) if (left[e] > 0) nact++;
    if (nact >= 2) nconc++;
    if (stall_bank && instr_valid) nstall_bank++;
    if (stall_busy && instr_valid) nstall_busy++;
  end

  function automatic instr_t mk(opcode_e op, alu_op_e aop, int ba, int bb, int bc, int bd);
    instr_t i;
    i = '0;
    i.op = op; i.aop = aop;
    i.bank_a = 2'(ba); i.bank_b = 2'(bb); i.bank_c = 2'(bc); i.bank_d = 2'(bd);
    i.addr_a = 16'($urandom); i.addr_b = 16'($urandom); i.addr_c = 16'($urandom);
    i.addr_d = 16'($urandom); i.len = 16'($urandom % 100); i.sched = 4'($urandom);
    i.peer = 4'($urandom);
    return i;
  endfunction

  function automatic logic [3:0] need_of(instr_t i);
    logic [3:0] n;
    n = '0;
    case (i.op)
      OP_ALU: begin
        n[i.bank_a] = 1; n[i.bank_b] = 1; n[i.bank_d] = 1;
        if (i.aop inside {ALU_MAC, ALU_MSB}) n[i.bank_c] = 1;
      end
      OP_PERM: begin n[i.bank_a] = 1; n[i.bank_d] = 1; end
      OP_STORE, OP_SEND: n[i.bank_a] = 1;
      default: n[i.bank_d] = 1;
    endcase
    return n;
  endfunction

  coeff_t cur_q = '0;
  mu_t    cur_mu = '0;

  // issue one instruction; returns when accepted
  task automatic issue(instr_t i, int eng);
    @(negedge clk);
    instr = i; instr_valid = 1;
    #1;
    while (!instr_ready) begin @(negedge clk); #1; end
    if (eng >= 0) begin
      instr_t e;
      e = i; e.q = cur_q; e.mu = cur_mu;
      exp_eng.push_back(eng); exp_cmd.push_back(e);
    end
    if (i.op == OP_SETQ) begin cur_q = i.q; cur_mu = i.mu; end
    @(negedge clk);
    instr_valid = 0;
  endtask

  initial begin
    instr_t i;
    repeat (2) @(negedge clk);
    rst_n = 1;
    i = mk(OP_SETQ, ALU_ADD, 0, 0, 0, 0);
    i.q = coeff_t'({$urandom, $urandom}); i.mu = mu_t'({$urandom, $urandom});
    issue(i, -1);
    // ALU on banks 0,1 -> 2 ; LOAD into bank 3 runs concurrently
    issue(mk(OP_ALU, ALU_MUL, 0, 1, 0, 2), ENG_ALU);
    issue(mk(OP_LOAD, ALU_ADD, 0, 0, 0, 3), ENG_HBM);
    // PERM reads bank 2, owned by the ALU: must wait (bank stall)
    issue(mk(OP_PERM, ALU_ADD, 2, 0, 0, 1), ENG_PERM);
    checks++;
    if (nstall_bank == 0) begin failures++; $display("FAIL no bank stall"); end
    // second ALU while first may still run: busy stall possible
    issue(mk(OP_ALU, ALU_MAC, 0, 2, 3, 0), ENG_ALU);
    issue(mk(OP_ALU, ALU_ADD, 2, 3, 0, 3), ENG_ALU);
    checks++;
    if (nstall_busy == 0) begin failures++; $display("FAIL no busy stall"); end
    // SYNC: nothing may be active afterwards
    issue(mk(OP_SYNC, ALU_ADD, 0, 0, 0, 0), -1);
    checks++;
    if (!idle) begin failures++; $display("FAIL SYNC passed while busy"); end
    // illegal ALU: two sources in bank 1
    issue(mk(OP_ALU, ALU_ADD, 1, 1, 0, 2), -1);
    @(negedge clk);
    checks++;
    if (!err) begin failures++; $display("FAIL err not raised"); end
    // new q, then a sweep of random instructions
    i = mk(OP_SETQ, ALU_ADD, 0, 0, 0, 0);
    i.q = coeff_t'({$urandom, $urandom}); i.mu = mu_t'({$urandom, $urandom});
    issue(i, -1);
    for (int n = 0; n < 200; n++) begin
      int k = $urandom % 6;
      int b0 = $urandom % 4, b1 = (b0 + 1) % 4, b2 = (b0 + 2) % 4, b3 = $urandom % 4;
      case (k)
        0: issue(mk(OP_ALU, ALU_MAC, b0, b1, b2, b3), ENG_ALU);
        1: issue(mk(OP_PERM, ALU_ADD, b0, 0, 0, b3), ENG_PERM);
        2: issue(mk(OP_LOAD, ALU_ADD, 0, 0, 0, b3), ENG_HBM);
        3: issue(mk(OP_STORE, ALU_ADD, b0, 0, 0, 0), ENG_HBM);
        4: issue(mk(OP_SEND, ALU_ADD, b0, 0, 0, 0), ENG_BUS);
        default: issue(mk(OP_RECV, ALU_ADD, 0, 0, 0, b3), ENG_BUS);
      endcase
    end
    issue(mk(OP_SYNC, ALU_ADD, 0, 0, 0, 0), -1);
    repeat (3) @(negedge clk);
    checks++;
    if (exp_eng.size() != 0 || !idle) begin failures++; $display("FAIL %0d starts missing", exp_eng.size()); end
    checks++;
    if (nconc == 0) begin failures++; $display("FAIL engines never concurrent"); end
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
