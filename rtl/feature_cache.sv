// feature_cache: feature caching unit with schedule-aligned region prefetch.
//
// Two buffers (ping-pong).  The core computes on the current buffer while the
// prefetch manager fills the other one for the next query the DOOQ scheduler
// has chosen.  A fill consists of
//   * the query's operands (sampling offsets dp and attention scores A'),
//     OPB beats from OPND_BASE + qid*OPB (the dp and A buffers), and
//   * for every level l, the S x S pixel region around the reference point,
//     S = 2R+2, origin (floor(p*W_l) - R, floor(p*H_l) - R), all D channels.
// A region pixel already held by the other buffer (same level) is copied on
// chip (a hit); a pixel outside the map is written as zero (grid-sample zero
// padding); only the remaining pixels are read from memory (misses).  This is
// the incremental fetch of the set difference M(q_next) \ M(q_cur).
//
// Level buffers are split into four banks by the parity of the absolute
// pixel coordinates, bank = {y[0], x[0]}, so the four corners of any 2x2
// neighbourhood always sit in four different banks.
//
// A corner that lies inside the map but outside the current region is served
// by a small per-level victim buffer (VD full pixels, FIFO replacement).  When
// a core read touches such a corner and it is not in the victim buffer,
// rd_hit is low, the pixel is fetched with priority over prefetch, and the
// core retries the same read.  VD >= 4*K guarantees forward progress.
//
// Memory: word addressed, one D-byte pixel per beat, requests valid/ready,
// responses in request order; at most FQ requests outstanding.
// Core read: combinational; rd_data/rd_hit answer rd_x0/rd_y0/rd_ch in the
// same cycle.  Handoff: cur_valid while the current buffer is complete;
// cur_done (one cycle) releases it and the other buffer becomes current.
// The ping-pong buffers, region prefetch, incremental fetch, bank-by-parity
// goal, per-level victim path and dp/A buffers follow the paper; the region
// shape, radius R, FIFO depths, victim size and memory map are this design's.
module feature_cache
  import quill_pkg::*;
#(
  parameter int unsigned D   = D_DEF,
  parameter int unsigned M   = M_DEF,
  parameter int unsigned L   = L_DEF,
  parameter int unsigned K   = K_DEF,
  parameter int unsigned PD  = PD_DEF,
  parameter int unsigned R   = 4,        // region radius in pixels of each level
  parameter int unsigned VD  = 16,       // victim entries per level
  parameter int unsigned FQ  = 16,       // outstanding memory requests
  parameter int unsigned QW  = 15
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                flush,        // forget all cached pixels
  // next query (look-ahead from the scheduler)
  input  logic                nq_valid,
  output logic                nq_ready,
  input  logic [QW-1:0]       nq_qid,
  input  logic [PW-1:0]       nq_px,
  input  logic [PW-1:0]       nq_py,
  // current query handed to the core
  output logic                cur_valid,
  output logic [QW-1:0]       cur_qid,
  output logic [PW-1:0]       cur_px,
  output logic [PW-1:0]       cur_py,
  output logic [M*L*K*(2*OFFW+SCW)-1:0] cur_opnd,
  input  logic                cur_done,
  // core read port, one head's NS = L*K samples, PD channels
  input  logic                rd_en,
  input  logic signed [CW-1:0] rd_x0 [L*K],
  input  logic signed [CW-1:0] rd_y0 [L*K],
  input  logic [$clog2(D/PD)-1:0] rd_ch,
  output logic signed [7:0]   rd_data [L*K][4][PD],
  output logic                rd_hit,
  // external memory read port
  output logic                mem_req_valid,
  input  logic                mem_req_ready,
  output logic [31:0]         mem_req_addr,
  input  logic                mem_rsp_valid,
  input  logic [D*8-1:0]      mem_rsp_data,
  // statistics
  output logic [31:0]         stat_hit,      // region pixels copied on chip
  output logic [31:0]         stat_miss,     // region pixels read from memory
  output logic [31:0]         stat_victim    // victim-path fetches
);
  localparam int unsigned NS     = L * K;
  localparam int unsigned S      = 2 * R + 2;
  localparam int unsigned HB     = S / 2;
  localparam int unsigned BD     = HB * HB;              // words per bank
  localparam int unsigned BAW    = $clog2(BD);
  localparam int unsigned OPBITS = M * L * K * (2 * OFFW + SCW);
  localparam int unsigned OPB    = (OPBITS + D * 8 - 1) / (D * 8);
  localparam int unsigned PIW    = $clog2(L * S * S) + 1;
  localparam int unsigned VW     = $clog2(VD);
  localparam int unsigned FQW    = $clog2(FQ);

  // ---------------------------------------------------------------- storage
  logic [D*8-1:0]           fbuf  [2][L][4][BD];
  logic [OPB*D*8-1:0]       opnd  [2];
  logic signed [CW-1:0]     org_x [2][L];
  logic signed [CW-1:0]     org_y [2][L];
  logic [QW-1:0]            bqid  [2];
  logic [PW-1:0]            bpx   [2], bpy [2];
  typedef enum logic [1:0] {B_FREE, B_FILL, B_READY} bstate_t;
  bstate_t                  bst   [2];
  logic [1:0]               has_data;
  logic                     cp;                           // current buffer

  logic [L-1:0][VD-1:0]     v_valid;
  logic signed [CW-1:0]     v_x   [L][VD];
  logic signed [CW-1:0]     v_y   [L][VD];
  logic [D*8-1:0]           v_dat [L][VD];
  logic [VW-1:0]            v_ptr [L];
  logic                     v_pend;

  // ------------------------------------------------------------- helpers
  function automatic logic in_map(input int unsigned l, input logic signed [CW-1:0] x, y);
    return (x >= 0) && (y >= 0) && (x < CW'(LVL_W[l])) && (y < CW'(LVL_H[l]));
  endfunction

  function automatic logic [BAW-1:0] bank_addr(input logic signed [CW-1:0] lx, ly);
    return BAW'((int'(ly) >>> 1) * HB + (int'(lx) >>> 1));
  endfunction

  function automatic logic [31:0] pix_addr(input int unsigned l, input logic signed [CW-1:0] x, y);
    return 32'(lvl_base(l)) + 32'(y) * 32'(LVL_W[l]) + 32'(x);
  endfunction

  // ------------------------------------------------------------ core read
  logic               need_fetch;
  logic [$clog2(L)-1:0] nf_l;
  logic signed [CW-1:0] nf_x, nf_y;

  int unsigned          rl;
  logic signed [CW-1:0] rx, ry, rlx, rly;
  logic [D*8-1:0]       rword;
  logic                 rok;
  logic [VW-1:0]        rvi;
  always_comb begin
    rd_hit     = 1'b1;
    need_fetch = 1'b0;
    nf_l = '0; nf_x = '0; nf_y = '0;
    rd_data = '{default: '0};
    rl = 0; rx = '0; ry = '0; rlx = '0; rly = '0; rword = '0; rok = 1'b0; rvi = '0;
    for (int s = 0; s < NS; s++) begin
      rl = s / K;
      for (int j = 0; j < 4; j++) begin
        rx = rd_x0[s] + CW'(j & 1);
        ry  = rd_y0[s] + CW'(j >> 1);
        rlx = rx - org_x[cp][rl];
        rly = ry - org_y[cp][rl];
        rword = '0;
        rok   = 1'b0;
        rvi   = '0;
        if (!in_map(rl, rx, ry)) rok = 1'b1;
        else if (rlx >= 0 && rly >= 0 && rlx < CW'(S) && rly < CW'(S)) begin
          rword = fbuf[cp][rl][{ry[0], rx[0]}][bank_addr(rlx, rly)];
          rok   = 1'b1;
        end else begin
          // match first, then one read of the matching victim entry
          for (int v = 0; v < VD; v++)
            if (v_valid[rl][v] && v_x[rl][v] == rx && v_y[rl][v] == ry) begin
              rvi = VW'(v);
              rok = 1'b1;
            end
          rword = v_dat[rl][rvi];
        end
        for (int c = 0; c < PD; c++)
          rd_data[s][j][c] = signed'(rword[(int'(rd_ch) * PD + c) * 8 +: 8]);
        if (!rok) begin
          rd_hit = 1'b0;
          if (!need_fetch) begin
            need_fetch = 1'b1;
            nf_l = $clog2(L)'(rl);
            nf_x = rx;
            nf_y = ry;
          end
        end
      end
    end
  end

  // ------------------------------------------------------- prefetch state
  typedef enum logic [1:0] {F_IDLE, F_OPND, F_REG, F_WAIT} fstate_t;
  fstate_t            fst;
  logic               nb;                    // buffer being filled
  logic [PIW-1:0]     pi;                    // region pixel counter (l, ly, lx)
  logic [$clog2(OPB+1)-1:0] ob;              // operand beat counter

  // destination of outstanding memory requests
  typedef enum logic [1:0] {DK_OPND, DK_REG, DK_VIC} dkind_t;
  typedef struct packed {
    dkind_t           kind;
    logic             b;
    logic [1:0]       l;
    logic [1:0]       bank;
    logic [BAW-1:0]   addr;
    logic [VW-1:0]    vslot;
    logic [$clog2(OPB+1)-1:0] beat;
  } dest_t;
  dest_t              dq [FQ];
  logic [FQW-1:0]     dq_wp, dq_rp;
  logic [FQW:0]       dq_cnt;
  logic               dq_full;
  assign dq_full = (dq_cnt == (FQW+1)'(FQ));

  // current region pixel under the prefetch counter
  int unsigned          p_l;
  logic signed [CW-1:0] p_lx, p_ly, p_x, p_y, o_lx, o_ly;
  logic                 p_inmap, p_inold;
  always_comb begin
    p_l  = int'(pi) / (S * S);
    p_ly = CW'((int'(pi) % (S * S)) / S);
    p_lx = CW'(int'(pi) % S);
    p_x  = org_x[nb][p_l] + p_lx;
    p_y  = org_y[nb][p_l] + p_ly;
    o_lx = p_x - org_x[!nb][p_l];
    o_ly = p_y - org_y[!nb][p_l];
    p_inmap = in_map(p_l, p_x, p_y);
    p_inold = has_data[!nb] && o_lx >= 0 && o_ly >= 0 && o_lx < CW'(S) && o_ly < CW'(S);
  end

  // request arbitration: victim fetch first, then prefetch
  logic vic_req, opnd_req, reg_req, local_wr;
  always_comb begin
    vic_req  = rd_en && need_fetch && !v_pend && !dq_full;
    opnd_req = !vic_req && fst == F_OPND && !dq_full;
    reg_req  = !vic_req && fst == F_REG && p_inmap && !p_inold && !dq_full;
    mem_req_valid = vic_req || opnd_req || reg_req;
    if (vic_req)       mem_req_addr = pix_addr(int'(nf_l), nf_x, nf_y);
    else if (opnd_req) mem_req_addr = 32'(OPND_BASE) + 32'(bqid[nb]) * 32'(OPB) + 32'(ob);
    else               mem_req_addr = pix_addr(p_l, p_x, p_y);
    // zero or on-chip copy: needs the buffer write port, free when no response
    local_wr = fst == F_REG && (!p_inmap || p_inold) && !mem_rsp_valid;
  end

  logic signed [CW-1:0] cx [L], cy [L];
  always_comb begin
    for (int l = 0; l < L; l++) begin
      cx[l] = CW'((32'(nq_px) * LVL_W[l]) >> PFRAC) - CW'(R);
      cy[l] = CW'((32'(nq_py) * LVL_H[l]) >> PFRAC) - CW'(R);
    end
  end

  logic fill_target_free;
  logic fill_sel;
  assign fill_sel         = (bst[cp] == B_FREE) ? cp : !cp;
  assign fill_target_free = (bst[fill_sel] == B_FREE);
  assign nq_ready  = (fst == F_IDLE) && fill_target_free;
  assign cur_valid = (bst[cp] == B_READY);
  assign cur_qid   = bqid[cp];
  assign cur_px    = bpx[cp];
  assign cur_py    = bpy[cp];
  assign cur_opnd  = opnd[cp][OPBITS-1:0];

  dest_t rsp_d;
  assign rsp_d = dq[dq_rp];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fst <= F_IDLE; nb <= 1'b0; cp <= 1'b0; pi <= '0; ob <= '0;
      bst[0] <= B_FREE; bst[1] <= B_FREE; has_data <= '0;
      dq_wp <= '0; dq_rp <= '0; dq_cnt <= '0;
      v_valid <= '0; v_pend <= 1'b0;
      for (int l = 0; l < L; l++) v_ptr[l] <= '0;
      stat_hit <= '0; stat_miss <= '0; stat_victim <= '0;
      for (int b = 0; b < 2; b++) begin
        bqid[b] <= '0; bpx[b] <= '0; bpy[b] <= '0;
        for (int l = 0; l < L; l++) begin org_x[b][l] <= '0; org_y[b][l] <= '0; end
      end
    end else begin
      if (flush) begin
        v_valid  <= '0;
        has_data <= '0;
      end
      // accept the next query
      if (nq_valid && nq_ready) begin
        nb <= fill_sel;
        bst[fill_sel]  <= B_FILL;
        has_data[fill_sel] <= 1'b0;
        bqid[fill_sel] <= nq_qid;
        bpx[fill_sel]  <= nq_px;
        bpy[fill_sel]  <= nq_py;
        for (int l = 0; l < L; l++) begin
          org_x[fill_sel][l] <= cx[l];
          org_y[fill_sel][l] <= cy[l];
        end
        ob  <= '0;
        pi  <= '0;
        fst <= F_OPND;
      end
      // memory requests
      if (mem_req_valid && mem_req_ready) begin
        if (vic_req) begin
          v_ptr[nf_l] <= v_ptr[nf_l] + 1'b1;
          v_valid[nf_l][v_ptr[nf_l]] <= 1'b0;
          v_pend <= 1'b1;
          stat_victim <= stat_victim + 1;
        end else if (opnd_req) begin
          ob <= ob + 1'b1;
          if (ob == $bits(ob)'(OPB - 1)) fst <= F_REG;
        end else begin
          stat_miss <= stat_miss + 1;
        end
        dq_wp <= dq_wp + 1'b1;
      end
      // advance the region counter on a request or a local write
      if (fst == F_REG && ((reg_req && mem_req_ready) || local_wr)) begin
        if (local_wr && p_inmap) stat_hit <= stat_hit + 1;
        if (pi == PIW'(L * S * S - 1)) fst <= F_WAIT;
        else pi <= pi + 1'b1;
      end
      // memory responses, in order
      if (mem_rsp_valid) begin
        dq_rp <= dq_rp + 1'b1;
        if (rsp_d.kind == DK_VIC) begin
          v_valid[rsp_d.l][rsp_d.vslot] <= 1'b1;
          v_pend <= 1'b0;
        end
      end
      dq_cnt <= dq_cnt + (FQW+1)'(mem_req_valid && mem_req_ready) - (FQW+1)'(mem_rsp_valid);
      // fill complete once every response has arrived
      if (fst == F_WAIT && dq_cnt == '0 && !v_pend) begin
        bst[nb] <= B_READY;
        has_data[nb] <= 1'b1;
        fst <= F_IDLE;
      end
      // core releases the current buffer
      if (cur_done) begin
        bst[cp] <= B_FREE;
        cp <= !cp;
      end
    end
  end

  // storage writes (no reset)
  dest_t req_d;
  always_comb begin
    req_d = '0;
    req_d.b = nb;
    if (vic_req) begin
      req_d.kind  = DK_VIC;
      req_d.l     = 2'(nf_l);
      req_d.vslot = v_ptr[nf_l];
    end else if (opnd_req) begin
      req_d.kind = DK_OPND;
      req_d.beat = ob;
    end else begin
      req_d.kind = DK_REG;
      req_d.l    = 2'(p_l);
      req_d.bank = {p_y[0], p_x[0]};
      req_d.addr = bank_addr(p_lx, p_ly);
    end
  end

  always_ff @(posedge clk) begin
    if (mem_req_valid && mem_req_ready) begin
      dq[dq_wp] <= req_d;
      if (vic_req) begin
        v_x[nf_l][v_ptr[nf_l]] <= nf_x;
        v_y[nf_l][v_ptr[nf_l]] <= nf_y;
      end
    end
    if (local_wr)
      fbuf[nb][p_l][{p_y[0], p_x[0]}][bank_addr(p_lx, p_ly)] <=
          p_inmap ? fbuf[!nb][p_l][{p_y[0], p_x[0]}][bank_addr(o_lx, o_ly)] : '0;
    if (mem_rsp_valid) begin
      unique case (rsp_d.kind)
        DK_OPND: opnd[rsp_d.b][int'(rsp_d.beat) * D * 8 +: D * 8] <= mem_rsp_data;
        DK_REG:  fbuf[rsp_d.b][rsp_d.l][rsp_d.bank][rsp_d.addr] <= mem_rsp_data;
        DK_VIC:  v_dat[rsp_d.l][rsp_d.vslot] <= mem_rsp_data;
        default: ;
      endcase
    end
  end

  // a response never arrives without an outstanding request
  assert property (@(posedge clk) disable iff (!rst_n) mem_rsp_valid |-> dq_cnt != '0);
endmodule
