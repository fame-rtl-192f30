// alu_engine: streams one ALU instruction through the modular ALU array.
//
// On start it latches the instruction (operation, banks, base rows, row
// count, q and mu) and issues one scratchpad read per source bank per cycle,
// rows addr_a+i, addr_b+i and (for MAC/MSB) addr_c+i. The rows reach the
// ALU array one cycle later (scratchpad read latency); results leave the
// array ALU_LAT cycles after that and are written to bank_d at addr_d+i.
// done pulses with the last write. One row per cycle, no stalls: bank
// ownership in pe_ctrl keeps the banks free. This sequencing is this
// design's own.
// Lint note: the engine keeps the whole instruction but uses only its ALU
// fields; the other bits of c_r are unused by design.
module alu_engine
  import fame_pkg::*;
#(
  parameter int unsigned AW = 8
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  instr_t              cmd,
  output logic                done,
  // scratchpad read clients: a, b, c
  output logic [2:0]          rd_en,
  output logic [2:0][1:0]     rd_bank,
  output logic [2:0][AW-1:0]  rd_addr,
  // ALU array control
  output logic                alu_in_valid,
  output alu_op_e             alu_op,
  output coeff_t              alu_q,
  output mu_t                 alu_mu,
  input  logic                alu_out_valid,
  // scratchpad write client
  output logic                wr_en,
  output logic [1:0]          wr_bank,
  output logic [AW-1:0]       wr_addr
);
  instr_t        c_r;
  logic          busy;
  logic [15:0]   issued, written;
  logic          use_c;

  assign use_c = c_r.aop inside {ALU_MAC, ALU_MSB};

  always_comb begin
    rd_en   = '0;
    rd_bank = {c_r.bank_c, c_r.bank_b, c_r.bank_a};
    rd_addr[0] = AW'(c_r.addr_a + issued);
    rd_addr[1] = AW'(c_r.addr_b + issued);
    rd_addr[2] = AW'(c_r.addr_c + issued);
    if (busy && issued < c_r.len) rd_en = {use_c, 2'b11};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; issued <= '0; written <= '0; done <= 1'b0;
      alu_in_valid <= 1'b0; c_r <= '0;
    end else begin
      done <= 1'b0;
      alu_in_valid <= rd_en[0];
      if (start) begin
        c_r <= cmd; busy <= 1'b1; issued <= '0; written <= '0;
      end else if (busy) begin
        if (rd_en[0]) issued <= issued + 1'b1;
        if (alu_out_valid) written <= written + 1'b1;
        if (written + 16'(alu_out_valid) == c_r.len) begin
          busy <= 1'b0; done <= 1'b1;
        end
      end
    end
  end

  assign alu_op  = c_r.aop;
  assign alu_q   = c_r.q;
  assign alu_mu  = c_r.mu;
  assign wr_en   = busy && alu_out_valid;
  assign wr_bank = c_r.bank_d;
  assign wr_addr = AW'(c_r.addr_d + written);
endmodule
