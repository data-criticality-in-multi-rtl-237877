// nic: network interface between a tile's caches and its router's PE port.
//
// Injection: an L1 miss request becomes one head-and-tail flit on VC0; an
// L2 reply becomes a five-flit packet H, B0, B1, B2, T on a reply VC (VC1 or
// VC2, the first with a free buffer slot when the packet starts), B0
// carrying words 0-1 of the block, B1 words 2-3, B2 words 4-5 and T words
// 6-7. A reply in progress, and a new reply, go before a waiting request.
// One flit is sent per cycle whenever the router's local input VC has a
// credit; the NIC keeps one credit counter per router input VC.
//
// Ejection: flits arriving on VC0 are requests for the local L2 bank and
// wait in a BUF_DEPTH-flit FIFO until the bank takes them; flits on the
// reply VCs go straight to the L1, which always accepts them. Each flit
// leaving the NIC's ejection side returns a credit to the router one cycle
// later.
//
// The paper only names the NIC; the flit order and sizes follow the paper,
// the rest (VC classes, request/reply precedence, buffering) are this
// design's own choices.
module nic
  import ernoc_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  // L1 side
  input  logic                    l1_req_valid,
  input  header_t                 l1_req_hdr,
  output logic                    l1_req_ready,
  output logic                    l1_rep_valid,
  output flit_t                   l1_rep_flit,
  // L2 side
  output logic                    l2_req_valid,
  output header_t                 l2_req_hdr,
  input  logic                    l2_req_ready,
  input  logic                    l2_rep_valid,
  input  header_t                 l2_rep_hdr,
  input  logic [BLOCK_W-1:0]      l2_rep_data,
  output logic                    l2_rep_ready,
  // router PE port
  output flit_t                   inj_flit,
  output logic                    inj_valid,
  input  logic [NUM_VC-1:0]       inj_credit,
  input  flit_t                   ej_flit,
  input  logic                    ej_valid,
  output logic [NUM_VC-1:0]       ej_credit
);
  localparam int unsigned PW = $clog2(BUF_DEPTH + 1);
  localparam int unsigned AW = $clog2(BUF_DEPTH);

  // ---------------- injection ----------------
  typedef enum logic { I_IDLE, I_BODY } istate_e;

  istate_e            ist_q;
  logic [CFI_W-1:0]   idx_q;
  logic [VC_W-1:0]    vc_q;
  logic [BLOCK_W-1:0] blk_q;
  logic [PW-1:0]      cred_q [NUM_VC];

  logic               rep_vc_ok;
  logic [VC_W-1:0]    rep_vc;
  always_comb begin
    rep_vc_ok = 1'b0;
    rep_vc    = '0;
    for (int v = NUM_VC - 1; v >= 1; v--)
      if (cred_q[v] != '0) begin
        rep_vc_ok = 1'b1;
        rep_vc    = VC_W'(v);
      end
  end

  always_comb begin
    inj_valid    = 1'b0;
    inj_flit     = '0;
    l1_req_ready = 1'b0;
    l2_rep_ready = 1'b0;
    if (ist_q == I_BODY) begin
      if (cred_q[vc_q] != '0) begin
        inj_valid      = 1'b1;
        inj_flit.ftype = (idx_q == CFI_W'(DATA_FLITS - 1)) ? FT_TAIL : FT_BODY;
        inj_flit.vc    = vc_q;
        inj_flit.data  = blk_q[idx_q*FLIT_W +: FLIT_W];
      end
    end else if (l2_rep_valid && rep_vc_ok) begin
      inj_valid      = 1'b1;
      inj_flit.ftype = FT_HEAD;
      inj_flit.vc    = rep_vc;
      inj_flit.data  = FLIT_W'(l2_rep_hdr);
      l2_rep_ready   = 1'b1;
    end else if (l1_req_valid && cred_q[0] != '0) begin
      inj_valid      = 1'b1;
      inj_flit.ftype = FT_HEADTAIL;
      inj_flit.vc    = '0;
      inj_flit.data  = FLIT_W'(l1_req_hdr);
      l1_req_ready   = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ist_q <= I_IDLE;
      idx_q <= '0;
      vc_q  <= '0;
      blk_q <= '0;
      for (int v = 0; v < NUM_VC; v++) cred_q[v] <= PW'(BUF_DEPTH);
    end else begin
      for (int v = 0; v < NUM_VC; v++)
        cred_q[v] <= cred_q[v] - PW'(inj_valid && int'(inj_flit.vc) == v) + PW'(inj_credit[v]);
      if (ist_q == I_IDLE && l2_rep_ready) begin
        ist_q <= I_BODY;
        idx_q <= '0;
        vc_q  <= rep_vc;
        blk_q <= l2_rep_data;
      end else if (ist_q == I_BODY && inj_valid) begin
        idx_q <= idx_q + 1'b1;
        if (inj_flit.ftype == FT_TAIL) ist_q <= I_IDLE;
      end
    end
  end

  // ---------------- ejection ----------------
  flit_t         rq_q [BUF_DEPTH];
  logic [AW-1:0] rq_rd_q, rq_wr_q;
  logic [PW-1:0] rq_cnt_q;
  logic          rq_push, rq_pop;

  assign rq_push      = ej_valid && ej_flit.vc == '0;
  assign rq_pop       = l2_req_valid && l2_req_ready;
  assign l2_req_valid = (rq_cnt_q != '0);
  assign l2_req_hdr   = flit_hdr(rq_q[rq_rd_q]);
  assign l1_rep_valid = ej_valid && ej_flit.vc != '0;
  assign l1_rep_flit  = ej_flit;

  always_ff @(posedge clk) if (rq_push) rq_q[rq_wr_q] <= ej_flit;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rq_rd_q   <= '0;
      rq_wr_q   <= '0;
      rq_cnt_q  <= '0;
      ej_credit <= '0;
    end else begin
      if (rq_push) rq_wr_q <= rq_wr_q + 1'b1;
      if (rq_pop)  rq_rd_q <= rq_rd_q + 1'b1;
      rq_cnt_q <= rq_cnt_q + PW'(rq_push) - PW'(rq_pop);
      ej_credit <= '0;
      ej_credit[0] <= rq_pop;
      for (int v = 1; v < NUM_VC; v++)
        ej_credit[v] <= ej_valid && int'(ej_flit.vc) == v;
    end
  end

  a_rq_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    rq_push |-> (int'(rq_cnt_q) < BUF_DEPTH))
    else $error("nic: request ejection FIFO overflow");
  a_req_single_flit: assert property (@(posedge clk) disable iff (!rst_n)
    rq_push |-> ej_flit.ftype == FT_HEADTAIL)
    else $error("nic: multi-flit packet on the request VC");
endmodule
