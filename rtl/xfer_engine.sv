// xfer_engine: moves rows between one scratchpad bank and a row stream.
// A PE has two: one for the HBM lanes (LOAD/STORE) and one for the
// inter-PE bus (SEND/RECV).
//
// Inbound (LOAD, RECV): in_ready is high while rows are still expected;
// each accepted row is written to bank_d at addr_d+i.
// Outbound (STORE, SEND): rows addr_a+i of bank_a are read (one cycle read
// latency) into a two-entry output queue; a read is issued only when the
// queue has room for its result, so a stalled consumer never loses a row
// and an eager one gets a row every cycle. out_dst carries the peer PE of
// SEND. done pulses when the last row has been written or handed over.
// Both streams use valid/ready: a row moves in a cycle where both are high,
// and valid stays high until it does. This transfer logic is this design's
// own; the paper states only that rows are streamed between the FIFOs, the
// bus and the scratchpad.
// wr_data is in_data passed straight through (inbound rows are written in
// the cycle they are accepted), so those outputs carry no logic of their own.
// Lint note: only the transfer fields of the stored instruction are used;
// the other bits of c_r are unused by design.
module xfer_engine
  import fame_pkg::*;
#(
  parameter int unsigned DP = 128,
  parameter int unsigned AW = 8
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  instr_t          cmd,
  output logic            done,
  // inbound stream
  input  logic            in_valid,
  output logic            in_ready,
  input  coeff_t [DP-1:0] in_data,
  // outbound stream
  output logic            out_valid,
  input  logic            out_ready,
  output coeff_t [DP-1:0] out_data,
  output logic [3:0]      out_dst,
  // scratchpad clients
  output logic            rd_en,
  output logic [1:0]      rd_bank,
  output logic [AW-1:0]   rd_addr,
  input  coeff_t [DP-1:0] rd_data,
  output logic            wr_en,
  output logic [1:0]      wr_bank,
  output logic [AW-1:0]   wr_addr,
  output coeff_t [DP-1:0] wr_data
);
  instr_t          c_r;
  logic            busy, inbound;
  logic [15:0]     issued, moved;
  logic            rd_pend;
  coeff_t [DP-1:0] qd [2];
  logic [1:0]      qcnt;
  logic            pop, push;

  assign inbound  = c_r.op inside {OP_LOAD, OP_RECV};
  assign in_ready = busy && inbound && (moved < c_r.len);
  assign wr_en    = in_valid && in_ready;
  assign wr_bank  = c_r.bank_d;
  assign wr_addr  = AW'(c_r.addr_d + moved);
  assign wr_data  = in_data;

  assign rd_en    = busy && !inbound && (issued < c_r.len) &&
                    (2'(qcnt) + 2'(rd_pend) - 2'(pop) < 2'd2);
  assign rd_bank  = c_r.bank_a;
  assign rd_addr  = AW'(c_r.addr_a + issued);
  assign out_valid = (qcnt != 0);
  assign out_data  = qd[0];
  assign out_dst   = c_r.peer;
  assign pop  = out_valid && out_ready;
  assign push = rd_pend;

  always_ff @(posedge clk) begin
    if (pop) qd[0] <= qd[1];
    if (push) begin
      if (qcnt == 0 || (qcnt == 1 && pop)) qd[0] <= rd_data;
      else                                 qd[1] <= rd_data;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_r <= '0; busy <= 1'b0; issued <= '0; moved <= '0; rd_pend <= 1'b0;
      qcnt <= '0; done <= 1'b0;
    end else begin
      done    <= 1'b0;
      rd_pend <= rd_en;
      qcnt    <= qcnt + 2'(push) - 2'(pop);
      if (start) begin
        c_r <= cmd; busy <= 1'b1; issued <= '0; moved <= '0;
      end else if (busy) begin
        if (rd_en) issued <= issued + 1'b1;
        if (wr_en || pop) moved <= moved + 1'b1;
        if (moved + 16'(wr_en || pop) == c_r.len) begin
          busy <= 1'b0; done <= 1'b1;
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) out_valid && !out_ready |=> out_valid && $stable(out_data));
endmodule
