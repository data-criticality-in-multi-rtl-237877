// tb_router: the ER-NoC router at (1,1), with models of its five neighbours.
//
// Part 1, latency: a lone request flit entering from the West leaves on the
// East port in the second cycle after it was written into the buffer (RC+VA,
// then SA+ST: two stages).
// Part 2, CFI priority: two reply packets compete for the East output, one
// from the West with CFI 3 and one from the PE with CFI 0. By the paper's
// rule (lower counter wins, counter decremented per winning flit, priority
// only up to the critical flit) the East port must carry
//   P.H P.B0 | W.H W.B0 W.B1 W.B2 W.T | P.B1 P.B2 P.T
// which plain round robin would not produce.
// Part 3, random traffic: 400 request and reply packets with legal X-Y
// destinations from all five inputs, random credit return downstream.
// Checked: every packet leaves on its X-Y output port, flits of a packet stay
// in order on one output VC without interleaving, requests use VC0 and
// replies VC1/VC2, no flit is sent without a credit, nothing is lost, and all
// input-buffer credits come back.
module tb_router;
  import ernoc_pkg::*;
  logic clk = 0, rst_n = 0;
  flit_t [NUM_PORTS-1:0] in_flit, out_flit;
  logic [NUM_PORTS-1:0] in_valid, out_valid;
  logic [NUM_PORTS-1:0][NUM_VC-1:0] in_credit, out_credit;
  logic prio_evt;
  int checks = 0, failures = 0, cyc = 0;

  logic [COORD_W-1:0] my_x = 4'd1, my_y = 4'd1;
  router dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(logic cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cyc, msg);
    end
  endtask

  function automatic int xy_port(int dx, int dy);
    if (dx > 1) return 0; if (dx < 1) return 2;
    if (dy > 1) return 1; if (dy < 1) return 3;
    return 4;
  endfunction

  // flit encoding: data[127:112] packet id, data[111:104] flit index
  function automatic flit_t mk_flit(int id, int idx, int nfl, msg_e m, int cfi, int dx, int dy, int vc);
    flit_t f;
    header_t h;
    f = '0;
    f.vc = 2'(vc);
    if (idx == 0) begin
      h = '0; h.msg = m; h.cfi = 2'(cfi); h.dst_x = 4'(dx); h.dst_y = 4'(dy);
      f.data[HDR_W-1:0] = h;
      f.ftype = (nfl == 1) ? FT_HEADTAIL : FT_HEAD;
    end else
      f.ftype = (idx == nfl - 1) ? FT_TAIL : FT_BODY;
    f.data[127:112] = 16'(id);
    f.data[111:104] = 8'(idx);
    return f;
  endfunction

  // ---- downstream model: occupancy per output VC, random drain ----
  int occ [NUM_PORTS][NUM_VC];
  int drain_pct = 100;
  always @(posedge clk) begin
    out_credit <= '0;
    if (rst_n)
      for (int o = 0; o < NUM_PORTS; o++) begin
        if (out_valid[o]) begin
          check(occ[o][out_flit[o].vc] < BUF_DEPTH, "flit sent without downstream credit");
          occ[o][out_flit[o].vc]++;
        end
        for (int v = 0; v < NUM_VC; v++)
          if (occ[o][v] > 0 && $urandom_range(1, 100) <= drain_pct) begin
            occ[o][v]--;
            out_credit[o][v] <= 1'b1;
          end
      end
  end

  // ---- upstream credits ----
  int icred [NUM_PORTS][NUM_VC];
  always @(posedge clk) if (rst_n)
    for (int p = 0; p < NUM_PORTS; p++)
      for (int v = 0; v < NUM_VC; v++) if (in_credit[p][v]) icred[p][v]++;

  // ---- output monitor / scoreboard ----
  int cur_id [NUM_PORTS][NUM_VC];   // packet in progress on an output VC
  int cur_idx[NUM_PORTS][NUM_VC];
  int exp_port[int], exp_nfl[int];
  int delivered = 0, n_prio = 0;
  int east_log[$];
  always @(posedge clk) if (rst_n) begin
    if (prio_evt) n_prio++;
    for (int o = 0; o < NUM_PORTS; o++) if (out_valid[o]) begin
      int v, id, idx;
      v = int'(out_flit[o].vc); id = int'(out_flit[o].data[127:112]); idx = int'(out_flit[o].data[111:104]);
      if (o == 0) east_log.push_back(id * 16 + idx);
      if (is_head(out_flit[o].ftype)) begin
        check(cur_id[o][v] < 0, "new packet interleaved on a busy output VC");
        check(exp_port.exists(id) && exp_port[id] == o, "packet on wrong output port");
        check((flit_hdr(out_flit[o]).msg == MSG_REQ) == (v == 0), "message class / VC mismatch");
        cur_id[o][v] = id; cur_idx[o][v] = 0;
      end else begin
        check(cur_id[o][v] == id && cur_idx[o][v] + 1 == idx, "flit out of order or interleaved");
        cur_idx[o][v] = idx;
      end
      if (is_tail(out_flit[o].ftype)) begin
        check(exp_nfl.exists(id) && idx == exp_nfl[id] - 1, "tail index");
        cur_id[o][v] = -1;
        delivered++;
      end
    end
  end

  // ---- injection helpers ----
  flit_t pend [NUM_PORTS][$];
  initial begin
    in_valid = '0; in_flit = '0;
    forever begin
      @(negedge clk);
      in_valid = '0;
      for (int p = 0; p < NUM_PORTS; p++)
        if (pend[p].size() > 0 && icred[p][pend[p][0].vc] > 0) begin
          in_flit[p] = pend[p].pop_front();
          in_valid[p] = 1'b1;
          icred[p][in_flit[p].vc]--;
        end
    end
  end

  task automatic send_pkt(int p, int id, msg_e m, int cfi, int dx, int dy, int vc);
    int nfl;
    nfl = (m == MSG_REQ) ? 1 : 5;
    exp_port[id] = xy_port(dx, dy);
    exp_nfl[id] = nfl;
    for (int i = 0; i < nfl; i++) pend[p].push_back(mk_flit(id, i, nfl, m, cfi, dx, dy, vc));
  endtask

  task automatic wait_idle();
    int guard;
    guard = 0;
    while (guard < 20) begin
      @(posedge clk);
      guard++;
      for (int p = 0; p < NUM_PORTS; p++) if (pend[p].size() > 0 || in_valid[p] || out_valid[p]) guard = 0;
    end
  endtask

  int sent = 0;
  initial begin
    for (int o = 0; o < NUM_PORTS; o++)
      for (int v = 0; v < NUM_VC; v++) begin
        occ[o][v] = 0; cur_id[o][v] = -1; icred[o][v] = BUF_DEPTH;
      end
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    // Part 1: latency of a lone request, West -> East
    @(negedge clk);
    exp_port[1] = 0; exp_nfl[1] = 1;
    icred[2][0]--;
    in_flit[2] = mk_flit(1, 0, 1, MSG_REQ, 0, 2, 1, 0);
    in_valid[2] = 1'b1;
    @(posedge clk);                 // written into the West VC0 buffer
    #1 in_valid[2] = 1'b0;
    check(out_valid[0] == 1'b0, "left in the buffer-write cycle");
    @(posedge clk); #1;
    check(out_valid[0] == 1'b1 && int'(out_flit[0].data[127:112]) == 1,
          "two-stage latency: out in second cycle");
    wait_idle();
    sent++;
    east_log.delete();

    // Part 2: CFI priority, West (CFI 3) vs PE (CFI 0), both to East
    send_pkt(2, 10, MSG_REP, 3, 2, 1, 1);
    send_pkt(4, 20, MSG_REP, 0, 2, 1, 1);
    sent += 2;
    wait_idle();
    begin
      int exp[$] = '{20*16+0, 20*16+1, 10*16+0, 10*16+1, 10*16+2, 10*16+3, 10*16+4,
                     20*16+2, 20*16+3, 20*16+4};
      check(east_log.size() == exp.size(), "priority test flit count");
      for (int i = 0; i < exp.size() && i < east_log.size(); i++)
        check(east_log[i] == exp[i], $sformatf("priority order slot %0d: got %0d.%0d", i,
              east_log[i] / 16, east_log[i] % 16));
    end

    // Part 3: random traffic
    drain_pct = 40;
    for (int n = 0; n < 400; n++) begin
      int p, dx, dy, id, vc;
      msg_e m;
      p = $urandom_range(0, 4);
      case (p)
        0: begin dx = $urandom_range(0, 1); dy = (dx == 1) ? $urandom_range(0, 2) : $urandom_range(0, 2); end
        2: begin dx = $urandom_range(1, 2); dy = $urandom_range(0, 2); end
        1: begin dx = 1; dy = $urandom_range(0, 1); end
        3: begin dx = 1; dy = $urandom_range(1, 2); end
        default: begin dx = $urandom_range(0, 2); dy = $urandom_range(0, 2); end
      endcase
      m = ($urandom_range(0, 2) == 0) ? MSG_REQ : MSG_REP;
      id = 100 + n;
      // an upstream router keeps one packet per VC: wait until the queue is short
      while (pend[p].size() > 0) @(posedge clk);
      vc = (m == MSG_REQ) ? 0 : $urandom_range(1, 2);
      send_pkt(p, id, m, $urandom_range(0, 3), dx, dy, vc);
      sent++;
    end
    wait_idle();
    drain_pct = 100;
    repeat (30) @(posedge clk);
    check(delivered == sent, $sformatf("delivered %0d of %0d packets", delivered, sent));
    for (int p = 0; p < NUM_PORTS; p++)
      for (int v = 0; v < NUM_VC; v++) check(icred[p][v] == BUF_DEPTH, "input credits returned");
    check(n_prio > 0, "priority decided at least one grant");
    $display("delivered=%0d prio_events=%0d", delivered, n_prio);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
