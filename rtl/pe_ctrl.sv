// pe_ctrl: the "Control" block of a PE. It takes the host's instruction
// stream and dispatches each instruction to one of four engines of the PE:
// the ALU engine (modular ALU array), the permutation engine (permutation
// circuit), the HBM transfer engine (LOAD/STORE) and the bus transfer engine
// (SEND/RECV). The engines run concurrently, which is how the scratchpad
// sees up to four simultaneous read and write streams.
//
// Hazards are handled by bank ownership: an instruction is dispatched only
// when its engine is idle and none of the banks it reads or writes belongs
// to an instruction still running on another engine. While it waits, the
// stream stalls (instr_ready low) and stall_bank or stall_busy says why.
// SETQ loads the modulus q and Barrett constant mu that later ALU
// instructions capture at dispatch; SYNC waits until every engine is idle;
// NOP is consumed. An ALU instruction whose source banks are not distinct
// cannot be served by the one read port per bank: it is dropped and the
// sticky err flag is set.
//
// Interface: instr_valid/instr_ready handshake; start[e] pulses for one
// cycle with cmd holding the instruction (q and mu filled in) and done[e]
// pulses when engine e has written its last row. idle is high when nothing
// is running. The paper only names the control block; the instruction set,
// the engines and bank ownership are this design's own.
module pe_ctrl
  import fame_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       instr_valid,
  output logic       instr_ready,
  input  instr_t     instr,
  output logic [3:0] start,
  output instr_t     cmd,
  input  logic [3:0] done,
  output logic       idle,
  output logic       err,
  output logic       stall_bank,
  output logic       stall_busy
);
  logic [3:0]            active;
  logic [3:0][3:0]       owned;      // banks owned by each engine
  logic [3:0]            in_use;
  logic [3:0]            need;       // banks the waiting instruction uses
  logic [1:0]            eng;
  logic                  is_eng, illegal, go;
  coeff_t                q_r;
  mu_t                   mu_r;

  function automatic logic [3:0] bit_of(logic [1:0] b);
    return 4'b1 << b;
  endfunction

  always_comb begin
    in_use = '0;
    for (int e = 0; e < 4; e++) if (active[e]) in_use |= owned[e];

    need = '0; eng = ENG_ALU; is_eng = 1'b1; illegal = 1'b0;
    unique case (instr.op)
      OP_ALU: begin
        eng  = ENG_ALU;
        need = bit_of(instr.bank_a) | bit_of(instr.bank_b) | bit_of(instr.bank_d);
        illegal = (instr.bank_a == instr.bank_b);
        if (instr.aop inside {ALU_MAC, ALU_MSB}) begin
          need |= bit_of(instr.bank_c);
          illegal |= (instr.bank_c == instr.bank_a) || (instr.bank_c == instr.bank_b);
        end
      end
      OP_PERM:  begin eng = ENG_PERM; need = bit_of(instr.bank_a) | bit_of(instr.bank_d); end
      OP_LOAD:  begin eng = ENG_HBM;  need = bit_of(instr.bank_d); end
      OP_STORE: begin eng = ENG_HBM;  need = bit_of(instr.bank_a); end
      OP_SEND:  begin eng = ENG_BUS;  need = bit_of(instr.bank_a); end
      OP_RECV:  begin eng = ENG_BUS;  need = bit_of(instr.bank_d); end
      default:  is_eng = 1'b0;
    endcase

    stall_busy = 1'b0; stall_bank = 1'b0;
    if (!is_eng) begin
      go = (instr.op == OP_SYNC) ? (active == '0) : 1'b1;
      stall_busy = instr_valid && !go;
    end else if (illegal) begin
      go = 1'b1;
    end else begin
      go = !active[eng] && ((need & in_use) == '0);
      stall_busy = instr_valid && active[eng];
      stall_bank = instr_valid && !active[eng] && ((need & in_use) != '0);
    end
    instr_ready = go;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= '0; owned <= '0; start <= '0; err <= 1'b0;
      q_r <= '0; mu_r <= '0; cmd <= '0;
    end else begin
      start  <= '0;
      active <= active & ~done;
      if (instr_valid && go) begin
        if (instr.op == OP_SETQ) begin
          q_r <= instr.q; mu_r <= instr.mu;
        end else if (is_eng && illegal) begin
          err <= 1'b1;
        end else if (is_eng) begin
          start[eng]  <= 1'b1;
          active[eng] <= 1'b1;
          owned[eng]  <= need;
          cmd         <= instr;
          cmd.q       <= q_r;
          cmd.mu      <= mu_r;
        end
      end
    end
  end

  assign idle = (active == '0);

  // an engine reports done only while it is active
  assert property (@(posedge clk) disable iff (!rst_n) (done & ~active) == '0);
endmodule
