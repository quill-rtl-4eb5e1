// ext_mem_model: behavioural model of the external memory read path, for
// simulation only.  One D-byte beat per request; requests are accepted on
// valid/ready (ready is randomly withheld about one cycle in four) and
// answered in order LAT cycles later.  Contents come from tb_quill_pkg's
// generators (feature maps below FEAT_WORDS, per-query operands from
// OPND_BASE).  Counts requests in nreq.
module ext_mem_model
  import quill_pkg::*;
  import tb_quill_pkg::*;
#(
  parameter int D      = 256,
  parameter int NS_TOT = 128,
  parameter int SPREAD = 3,
  parameter int LAT    = 20
) (
  input  logic             clk,
  input  logic             req_valid,
  output logic             req_ready,
  input  logic [31:0]      req_addr,
  output logic             rsp_valid,
  output logic [D*8-1:0]   rsp_data,
  output int               nreq
);
  int unsigned      q_addr [$];
  longint           q_time [$];
  longint           now;
  logic [MAXD*8-1:0] w;

  initial begin
    now = 0; nreq = 0;
    req_ready = 1'b0; rsp_valid = 1'b0; rsp_data = '0;
  end

  always @(posedge clk) begin
    now <= now + 1;
    if (req_valid && req_ready) begin
      q_addr.push_back(req_addr);
      q_time.push_back(now);
      nreq <= nreq + 1;
    end
    if (q_addr.size() > 0 && now - q_time[0] >= LAT) begin
      w = mem_word(q_addr.pop_front(), D, NS_TOT, SPREAD);
      void'(q_time.pop_front());
      rsp_valid <= 1'b1;
      rsp_data  <= w[D*8-1:0];
    end else rsp_valid <= 1'b0;
    req_ready <= ($urandom % 4) != 0;
  end
endmodule
