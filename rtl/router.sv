// router: 2-stage virtual-channel mesh router with CFI-based priority (ER-NoC).
//
// Five ports (East, South, West, North, local PE), NUM_VC = 3 virtual
// channels per input port, each a BUF_DEPTH-flit FIFO with its own CFI
// counter C. Routing is X-Y dimension order. Flow control is credit based:
// the router keeps one credit counter per downstream VC and returns one
// credit upstream, one cycle after a flit leaves an input buffer.
//
// Pipeline. Stage 1: the flit is written into its input VC buffer on the
// clock edge; while a head flit sits at the front of its VC, route compute
// (RC) and VC allocation (VA) take place. Stage 2: switch allocation (SA)
// and crossbar traversal; the crossbar output is the link, written into the
// next router's buffer on the following edge. A head flit therefore needs
// two cycles per hop and body/tail flits, which skip VA, one.
//
// ER-NoC priority. When a reply head flit is allocated, the CFI from its
// header is loaded into the VC's counter C; requests load NOPRI. In VA and
// in both SA arbitration steps the requester with the smaller C wins, ties
// round robin. Each time a body or tail flit of the VC wins SA, C is
// decremented, so C reaches 0 exactly when the critical flit is at the
// front; once the critical flit has left, C becomes NOPRI and the rest of
// the packet competes without priority. The paper states the counter is
// loaded with the CFI and decremented by one per winning flit, reaching 0 at
// the critical flit; that the head flit does not decrement it, and the
// NOPRI value after the critical flit, are this design's reading of it.
//
// Own choices (the paper is silent): VC0 carries requests and VC1..2
// replies (keeps the two message classes apart); y grows to the south; one
// VC grant per output port per cycle; buffer depth 4 as drawn in the figure.
//
// Interface: my_x/my_y give the node's position (constant straps);
// in_flit/in_valid with the VC in the flit, credits out per
// input VC (in_credit); out_flit/out_valid, credits in per output VC
// (out_credit). prio_evt pulses when C, rather than round robin, decided an
// SA output grant.
module router
  import ernoc_pkg::*;
(
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic  [COORD_W-1:0]                  my_x,     // node coordinates
  input  logic  [COORD_W-1:0]                  my_y,
  input  flit_t [NUM_PORTS-1:0]                in_flit,
  input  logic  [NUM_PORTS-1:0]                in_valid,
  output logic  [NUM_PORTS-1:0][NUM_VC-1:0]    in_credit,
  output flit_t [NUM_PORTS-1:0]                out_flit,
  output logic  [NUM_PORTS-1:0]                out_valid,
  input  logic  [NUM_PORTS-1:0][NUM_VC-1:0]    out_credit,
  output logic                                 prio_evt
);
  localparam int unsigned NP  = NUM_PORTS;
  localparam int unsigned NIV = NUM_PORTS * NUM_VC;
  localparam int unsigned PW  = $clog2(BUF_DEPTH + 1);
  localparam int unsigned AW  = $clog2(BUF_DEPTH);

  // ---------------- input VC state ----------------
  flit_t            buf_q   [NP][NUM_VC][BUF_DEPTH];
  logic [AW-1:0]    rd_q    [NP][NUM_VC];
  logic [AW-1:0]    wr_q    [NP][NUM_VC];
  logic [PW-1:0]    cnt_q   [NP][NUM_VC];
  logic             alloc_q [NP][NUM_VC];
  port_e            outp_q  [NP][NUM_VC];
  logic [VC_W-1:0]  outvc_q [NP][NUM_VC];
  logic [CNT_W-1:0] c_q     [NP][NUM_VC];

  // ---------------- output VC state ----------------
  logic             busy_q  [NP][NUM_VC];
  logic [PW-1:0]    cred_q  [NP][NUM_VC];

  // ---------------- stage 1: RC ----------------
  flit_t            front   [NP][NUM_VC];
  header_t          fhdr    [NP][NUM_VC];
  logic             is_req  [NP][NUM_VC];
  logic             nonempty[NP][NUM_VC];
  port_e            route   [NP][NUM_VC];
  logic [CNT_W-1:0] hprio   [NP][NUM_VC];

  function automatic port_e xy_route(header_t h);
    if (h.dst_x > my_x)      return P_EAST;
    else if (h.dst_x < my_x) return P_WEST;
    else if (h.dst_y > my_y) return P_SOUTH;
    else if (h.dst_y < my_y) return P_NORTH;
    else                                 return P_LOCAL;
  endfunction

  always_comb begin
    for (int p = 0; p < NP; p++)
      for (int v = 0; v < NUM_VC; v++) begin
        front[p][v]    = buf_q[p][v][rd_q[p][v]];
        fhdr[p][v]     = flit_hdr(front[p][v]);
        is_req[p][v]   = (fhdr[p][v].msg == MSG_REQ);
        nonempty[p][v] = (cnt_q[p][v] != '0);
        route[p][v]    = xy_route(fhdr[p][v]);
        hprio[p][v]    = is_req[p][v] ? NOPRI : CNT_W'(fhdr[p][v].cfi);
      end
  end

  // ---------------- stage 1: VA ----------------
  logic [NP-1:0][NIV-1:0]            va_req;
  logic [NP-1:0][NIV-1:0][CNT_W-1:0] va_prio;
  logic [NP-1:0]                     va_gv;
  logic [NP-1:0][$clog2(NIV)-1:0]    va_gi;
  logic [NP-1:0][NIV-1:0]            va_gnt;
  logic [NP-1:0]                     req_free;   // VC0 free at output port
  logic [NP-1:0]                     rep_free;   // some reply VC free
  logic [NP-1:0][VC_W-1:0]           rep_vc;     // lowest free reply VC

  always_comb begin
    for (int o = 0; o < NP; o++) begin
      req_free[o] = !busy_q[o][0];
      rep_free[o] = 1'b0;
      rep_vc[o]   = '0;
      for (int v = NUM_VC - 1; v >= 1; v--)
        if (!busy_q[o][v]) begin
          rep_free[o] = 1'b1;
          rep_vc[o]   = VC_W'(v);
        end
    end
    for (int o = 0; o < NP; o++)
      for (int p = 0; p < NP; p++)
        for (int v = 0; v < NUM_VC; v++) begin
          va_prio[o][p*NUM_VC+v] = hprio[p][v];
          va_req[o][p*NUM_VC+v]  = nonempty[p][v] && !alloc_q[p][v]
              && is_head(front[p][v].ftype) && (route[p][v] == port_e'(o))
              && (is_req[p][v] ? req_free[o] : rep_free[o]);
        end
  end

  for (genvar o = 0; o < NP; o++) begin : g_va
    prio_arbiter #(.N(NIV)) u_va (
      .clk, .rst_n, .req(va_req[o]), .prio(va_prio[o]), .update(1'b1),
      .gnt_valid(va_gv[o]), .gnt_idx(va_gi[o]), .gnt(va_gnt[o]));
  end

  // ---------------- stage 2: SA ----------------
  logic [NP-1:0][NUM_VC-1:0]            sa_elig;
  logic [NP-1:0][NUM_VC-1:0][CNT_W-1:0] sa_iprio;
  logic [NP-1:0]                        in_gv;
  logic [NP-1:0][$clog2(NUM_VC)-1:0]    in_gi;
  logic [NP-1:0][NUM_VC-1:0]            in_gnt;
  logic [NP-1:0]                        in_upd;
  logic [NP-1:0][NP-1:0]                out_req;
  logic [NP-1:0][NP-1:0][CNT_W-1:0]     out_prio;
  logic [NP-1:0]                        out_gv;
  logic [NP-1:0][$clog2(NP)-1:0]        out_gi;
  logic [NP-1:0][NP-1:0]                out_gnt;

  always_comb begin
    for (int p = 0; p < NP; p++)
      for (int v = 0; v < NUM_VC; v++) begin
        sa_elig[p][v]  = alloc_q[p][v] && nonempty[p][v]
                         && (cred_q[outp_q[p][v]][outvc_q[p][v]] != '0);
        sa_iprio[p][v] = c_q[p][v];
      end
  end

  for (genvar p = 0; p < NP; p++) begin : g_sa_in
    prio_arbiter #(.N(NUM_VC)) u_sa_in (
      .clk, .rst_n, .req(sa_elig[p]), .prio(sa_iprio[p]), .update(in_upd[p]),
      .gnt_valid(in_gv[p]), .gnt_idx(in_gi[p]), .gnt(in_gnt[p]));
  end

  always_comb begin
    for (int o = 0; o < NP; o++)
      for (int p = 0; p < NP; p++) begin
        out_req[o][p]  = in_gv[p] && (outp_q[p][in_gi[p]] == port_e'(o));
        out_prio[o][p] = c_q[p][in_gi[p]];
      end
  end

  for (genvar o = 0; o < NP; o++) begin : g_sa_out
    prio_arbiter #(.N(NP)) u_sa_out (
      .clk, .rst_n, .req(out_req[o]), .prio(out_prio[o]), .update(1'b1),
      .gnt_valid(out_gv[o]), .gnt_idx(out_gi[o]), .gnt(out_gnt[o]));
  end

  // the flit each input port offers to the switch
  flit_t [NP-1:0] sel_flit;
  always_comb begin
    for (int p = 0; p < NP; p++) begin
      sel_flit[p]    = front[p][in_gi[p]];
      sel_flit[p].vc = outvc_q[p][in_gi[p]];
    end
  end

  // pops: input port p won its output
  logic [NP-1:0][NUM_VC-1:0] pop;
  always_comb begin
    pop      = '0;
    in_upd   = '0;
    prio_evt = 1'b0;
    for (int o = 0; o < NP; o++) begin
      out_valid[o] = out_gv[o];
      out_flit[o]  = sel_flit[out_gi[o]];
      if (out_gv[o]) begin
        pop[out_gi[o]][in_gi[out_gi[o]]] = 1'b1;
        in_upd[out_gi[o]] = 1'b1;
        for (int p = 0; p < NP; p++)
          if (out_req[o][p] && out_prio[o][p] != out_prio[o][out_gi[o]]) prio_evt = 1'b1;
      end
    end
  end

  // ---------------- state update ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < NP; p++)
        for (int v = 0; v < NUM_VC; v++) begin
          rd_q[p][v]    <= '0;
          wr_q[p][v]    <= '0;
          cnt_q[p][v]   <= '0;
          alloc_q[p][v] <= 1'b0;
          outp_q[p][v]  <= P_LOCAL;
          outvc_q[p][v] <= '0;
          c_q[p][v]     <= NOPRI;
          busy_q[p][v]  <= 1'b0;
          cred_q[p][v]  <= PW'(BUF_DEPTH);
        end
      in_credit <= '0;
    end else begin
      in_credit <= pop;
      for (int p = 0; p < NP; p++)
        for (int v = 0; v < NUM_VC; v++) begin
          logic wr;
          wr = in_valid[p] && (int'(in_flit[p].vc) == v);
          if (wr) begin
            buf_q[p][v][wr_q[p][v]] <= in_flit[p];
            wr_q[p][v] <= wr_q[p][v] + 1'b1;
          end
          if (pop[p][v]) rd_q[p][v] <= rd_q[p][v] + 1'b1;
          cnt_q[p][v] <= cnt_q[p][v] + PW'(wr) - PW'(pop[p][v]);

          // VC allocation of a head flit
          if (va_gnt[route[p][v]][p*NUM_VC+v] && va_gv[route[p][v]]) begin
            alloc_q[p][v] <= 1'b1;
            outp_q[p][v]  <= route[p][v];
            outvc_q[p][v] <= is_req[p][v] ? '0 : rep_vc[route[p][v]];
            c_q[p][v]     <= hprio[p][v];
          end
          // a flit of this VC crossed the switch
          if (pop[p][v]) begin
            if (!is_head(front[p][v].ftype) && c_q[p][v] != NOPRI)
              c_q[p][v] <= (c_q[p][v] == '0) ? NOPRI : c_q[p][v] - 1'b1;
            if (is_tail(front[p][v].ftype)) alloc_q[p][v] <= 1'b0;
          end
        end
      // output VC state
      for (int o = 0; o < NP; o++) begin
        for (int v = 0; v < NUM_VC; v++) begin
          logic sent, freed;
          sent  = out_gv[o] && (int'(out_flit[o].vc) == v);
          freed = sent && is_tail(out_flit[o].ftype);
          cred_q[o][v] <= cred_q[o][v] - PW'(sent) + PW'(out_credit[o][v]);
          if (freed) busy_q[o][v] <= 1'b0;
        end
        if (va_gv[o]) begin
          if (is_req[int'(va_gi[o]) / NUM_VC][int'(va_gi[o]) % NUM_VC])
            busy_q[o][0] <= 1'b1;
          else
            busy_q[o][rep_vc[o]] <= 1'b1;
        end
      end
    end
  end

  // ---------------- handshake rules ----------------
  for (genvar p = 0; p < NP; p++) begin : g_chk
    for (genvar v = 0; v < NUM_VC; v++) begin : g_vc
      a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
        (in_valid[p] && int'(in_flit[p].vc) == v) |-> (int'(cnt_q[p][v]) < BUF_DEPTH || pop[p][v]))
        else $error("router (%0d,%0d): input buffer overflow port %0d vc %0d", my_x, my_y, p, v);
      a_credit_range: assert property (@(posedge clk) disable iff (!rst_n)
        int'(cred_q[p][v]) <= BUF_DEPTH)
        else $error("router (%0d,%0d): credit counter above buffer depth", my_x, my_y);
    end
  end
endmodule
