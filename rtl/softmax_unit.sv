// softmax_unit: in-core Softmax over the L*K attention scores of one head.
//
// The unit takes NS scores A' (signed Q7.8) on start and returns NS weights
// A (unsigned Q0.16, summing to about 1.0).  It works sequentially on one
// shared exponential and one shared divider:
//   cycle 0          : max of the scores (subtracted for range safety)
//   NS cycles        : e_i = exp(s_i - max), one per cycle, summed
//   NS cycles        : A_i = e_i / sum, one per cycle
//   done             : one-cycle pulse, weights held until the next start
// The exponential uses base-2 range reduction and a [2/2] Pade approximant:
//   z = (max - s) * log2(e) = k + f,  0 <= f < 1
//   exp(s - max) = 2^-k * P(y),  y = -f*ln2,
//   P(y) = (12 + 6y + y^2) / (12 - 6y + y^2)
// with log2(e) as Q1.15 47274 and ln2 as Q0.16 45426; e_i is Q.16.
// Latency 2*NS + 2 cycles from start to done (34 for NS = 16).
// A Pade exponential on shared exp/add hardware is the paper's; the range
// reduction, formats and the shared divider are this design's choices.
module softmax_unit
  import quill_pkg::*;
#(
  parameter int unsigned NS = L_DEF * K_DEF     // scores per head
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic signed [SCW-1:0] scores [NS],
  output logic                  busy,
  output logic                  done,
  output logic [AW-1:0]         weights [NS]
);
  localparam int unsigned IW = $clog2(NS) + 1;
  localparam int unsigned NW = 40;
  localparam int unsigned DVW = 24;

  typedef enum logic [1:0] {P_IDLE, P_MAX, P_EXP, P_NORM} phase_t;
  phase_t phase;

  logic signed [SCW-1:0] sc   [NS];
  logic signed [SCW-1:0] mx;
  logic [16:0]           e    [NS];
  logic [IW+16:0]        sum;
  logic [IW-1:0]         idx;

  // shared divider
  logic [NW-1:0]  div_n, div_q;
  logic [DVW-1:0] div_d;
  assign div_q = div_n / NW'(div_d);

  // exponential datapath for score idx
  logic [16:0] nd;
  logic [32:0] z;
  logic [25:0] zq;
  logic [9:0]  k;
  logic [31:0] yq, y2;
  logic [23:0] pnum, pden;
  always_comb begin
    nd   = 17'(signed'({mx[SCW-1], mx}) - signed'({sc[idx[IW-2:0]][SCW-1], sc[idx[IW-2:0]]}));
    z    = 33'(nd) * 33'd47274;
    zq   = z[32:7];
    k    = zq[25:16];
    yq   = (32'(zq[15:0]) * 32'd45426) >> 16;
    y2   = (yq * yq) >> 16;
    pnum = 24'(32'd786432 - 32'd6 * yq + y2);
    pden = 24'(32'd786432 + 32'd6 * yq + y2);
    if (phase == P_EXP) begin
      div_n = NW'(pnum) << 16;
      div_d = pden;
    end else begin
      div_n = NW'(e[idx[IW-2:0]]) << 16;
      div_d = DVW'(sum);
    end
  end

  assign busy = (phase != P_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase <= P_IDLE;
      done  <= 1'b0;
      idx   <= '0;
      sum   <= '0;
      mx    <= '0;
      for (int i = 0; i < NS; i++) begin
        weights[i] <= '0; e[i] <= '0; sc[i] <= '0;
      end
    end else begin
      done <= 1'b0;
      unique case (phase)
        P_IDLE: if (start) begin
          sc    <= scores;
          phase <= P_MAX;
        end
        P_MAX: begin
          logic signed [SCW-1:0] m;
          m = sc[0];
          for (int i = 1; i < NS; i++) if (sc[i] > m) m = sc[i];
          mx    <= m;
          idx   <= '0;
          sum   <= '0;
          phase <= P_EXP;
        end
        P_EXP: begin
          logic [16:0] ev;
          ev = (k > 10'd16) ? 17'd0 : 17'(div_q >> k);
          e[idx[IW-2:0]] <= ev;
          sum <= sum + (IW+17)'(ev);
          if (idx == IW'(NS-1)) begin idx <= '0; phase <= P_NORM; end
          else idx <= idx + 1'b1;
        end
        P_NORM: begin
          weights[idx[IW-2:0]] <= (div_q > NW'(65535)) ? 16'hFFFF : AW'(div_q);
          if (idx == IW'(NS-1)) begin phase <= P_IDLE; done <= 1'b1; end
          else idx <= idx + 1'b1;
        end
        default: phase <= P_IDLE;
      endcase
    end
  end
endmodule
