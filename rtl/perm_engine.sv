// perm_engine: runs one PERM instruction, i.e. permutes one limb of DEPTH
// rows from bank_a (rows addr_a..) into bank_d (rows addr_d..) through the
// permutation circuit using schedule cmd.sched.
//
// Phase 1 issues DEPTH scratchpad reads, one per cycle; each row enters the
// circuit one cycle later as a write step. After a gap of two cycles, phase
// 2 issues DEPTH read steps; output row j appears three cycles after its
// step and is written to bank_d at addr_d+j. done pulses with the last
// write. The sequencing is this design's own.
// Lint note: only the PERM fields of the stored instruction are used; the
// other bits of c_r are unused by design.
module perm_engine
  import fame_pkg::*;
#(
  parameter int unsigned AW     = 8,
  parameter int unsigned DEPTH  = 64,
  parameter int unsigned NSCHED = 4,
  localparam int unsigned SW    = $clog2(NSCHED)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  instr_t          cmd,
  output logic            done,
  output logic            rd_en,
  output logic [1:0]      rd_bank,
  output logic [AW-1:0]   rd_addr,
  output logic            pc_start,
  output logic [SW-1:0]   pc_sched,
  output logic            pc_in_valid,
  output logic            pc_rd_step,
  input  logic            pc_out_valid,
  output logic            wr_en,
  output logic [1:0]      wr_bank,
  output logic [AW-1:0]   wr_addr
);
  typedef enum logic [1:0] {P_IDLE, P_LOAD, P_GAP, P_READ} pstate_e;
  pstate_e     st;
  instr_t      c_r;
  logic [15:0] cnt, written;
  logic [1:0]  gap;
  logic        drain;

  assign rd_en    = (st == P_LOAD);
  assign rd_bank  = c_r.bank_a;
  assign rd_addr  = AW'(c_r.addr_a + cnt);
  assign pc_rd_step = (st == P_READ) && !drain;
  assign pc_sched = SW'(c_r.sched);
  assign wr_en    = pc_out_valid && (st != P_IDLE);
  assign wr_bank  = c_r.bank_d;
  assign wr_addr  = AW'(c_r.addr_d + written);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= P_IDLE; c_r <= '0; cnt <= '0; written <= '0; gap <= '0;
      drain <= 1'b0; done <= 1'b0; pc_start <= 1'b0; pc_in_valid <= 1'b0;
    end else begin
      done        <= 1'b0;
      pc_start    <= start;
      pc_in_valid <= rd_en;
      unique case (st)
        P_IDLE: if (start) begin
          c_r <= cmd; st <= P_LOAD; cnt <= '0; written <= '0; drain <= 1'b0;
        end
        P_LOAD: begin
          cnt <= cnt + 1'b1;
          if (cnt == 16'(DEPTH - 1)) begin st <= P_GAP; gap <= '0; cnt <= '0; end
        end
        P_GAP: begin
          // one cycle for the scratchpad read, two for the circuit
          gap <= gap + 1'b1;
          if (gap == 2'd2) st <= P_READ;
        end
        P_READ: begin
          if (!drain) begin
            cnt <= cnt + 1'b1;
            if (cnt == 16'(DEPTH - 1)) drain <= 1'b1;
          end
          if (pc_out_valid) begin
            written <= written + 1'b1;
            if (written == 16'(DEPTH - 1)) begin st <= P_IDLE; done <= 1'b1; end
          end
        end
        default: st <= P_IDLE;
      endcase
    end
  end
endmodule
