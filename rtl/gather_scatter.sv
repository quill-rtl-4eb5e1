// gather_scatter: sparse index buffer and address generator for output I/O.
//
// With query pruning (top-rho encoder, top-N_d decoder) the accelerator works
// on a compact list of surviving queries, numbered 0..n-1, while the tokens
// they stand for are scattered over the full token space.  The sparse index
// buffer holds, for each compact query id, its original token index (written
// by the host through idx_we/idx_waddr/idx_wdata).  On start the unit drains
// the output SRAM: for q = 0..n-1 it reads row q and writes it to external
// memory at OUT_BASE + idx[q], so results land at their token positions in
// semantic order and external writes stay one beat per row.
// Timing: output SRAM read latency one cycle; one row per cycle while
// wr_ready is high; done is raised after the last write until the next start.
// wr_data is the output SRAM's read data passed straight through (no copy
// register), so a synthesis report shows those bits as undriven by logic.
// The buffer and the replacement of SRAM addresses by external addresses
// follow the paper; the drain order, handshake and OUT_BASE are this
// design's choices.
module gather_scatter
  import quill_pkg::*;
#(
  parameter int unsigned D        = D_DEF,
  parameter int unsigned NQ       = NQ_DEF,
  parameter int unsigned QW       = 15,
  parameter int unsigned OUT_BASE = 65536
) (
  input  logic             clk,
  input  logic             rst_n,
  // sparse index buffer load
  input  logic             idx_we,
  input  logic [QW-1:0]    idx_waddr,
  input  logic [QW-1:0]    idx_wdata,
  // drain control
  input  logic             start,
  input  logic [QW:0]      n,
  output logic             done,
  // output SRAM read port
  output logic             o_re,
  output logic [QW-1:0]    o_raddr,
  input  logic [D*8-1:0]   o_rdata,
  // external memory write port
  output logic             wr_valid,
  input  logic             wr_ready,
  output logic [31:0]      wr_addr,
  output logic [D*8-1:0]   wr_data
);
  logic [QW-1:0] idx_buf [NQ];
  logic [QW-1:0] tok_q;
  logic [QW:0]   rq;          // next row to read
  logic [QW:0]   nq;
  logic          busy, have;  // have: o_rdata/tok_q hold an unsent row

  always_ff @(posedge clk) if (idx_we) idx_buf[idx_waddr] <= idx_wdata;

  assign o_raddr  = rq[QW-1:0];
  assign o_re     = busy && (rq < nq) && (!have || wr_ready);
  assign wr_valid = have;
  assign wr_addr  = 32'(OUT_BASE) + 32'(tok_q);
  assign wr_data  = o_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; have <= 1'b0; done <= 1'b0;
      rq <= '0; nq <= '0; tok_q <= '0;
    end else if (start) begin
      busy <= 1'b1; have <= 1'b0; done <= 1'b0;
      rq <= '0; nq <= n;
    end else if (busy) begin
      if (o_re) begin
        tok_q <= idx_buf[rq[QW-1:0]];
        rq    <= rq + 1'b1;
        have  <= 1'b1;
      end else if (have && wr_ready) have <= 1'b0;
      if (rq == nq && (!have || wr_ready) && !o_re) begin
        busy <= 1'b0;
        done <= 1'b1;
      end
    end
  end
endmodule
