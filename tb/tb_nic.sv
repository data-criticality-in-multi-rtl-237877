// tb_nic: network interface, both directions at once, with random stalls.
//
// Injection: 60 L2 replies and 60 L1 requests are offered concurrently.
// The testbench models the router's local input buffers: it counts each
// VC's occupancy, drains slots after random delays and returns the credits.
// Checked: no flit is sent to a full VC; a request is one head-tail flit on
// VC0 carrying the L1 header; a reply is H, B0, B1, B2, T back to back on one
// reply VC, the head carrying the L2 header and Bi carrying words 2i, 2i+1;
// requests and replies come out in the order offered.
// Ejection: 60 request flits (VC0) and reply flits (VC1/VC2) are sent within
// the credits the NIC returns. Checked: reply flits reach the L1 in the same
// cycle, requests reach the L2 bank in order, and all credits come back.
module tb_nic;
  import ernoc_pkg::*;
  logic clk = 0, rst_n = 0;
  logic l1_req_valid, l1_req_ready, l1_rep_valid;
  header_t l1_req_hdr;
  flit_t l1_rep_flit;
  logic l2_req_valid, l2_req_ready, l2_rep_valid, l2_rep_ready;
  header_t l2_req_hdr, l2_rep_hdr;
  logic [BLOCK_W-1:0] l2_rep_data;
  flit_t inj_flit, ej_flit;
  logic inj_valid, ej_valid;
  logic [NUM_VC-1:0] inj_credit, ej_credit;
  int checks = 0, failures = 0;
  localparam int NPKT = 60;

  nic dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(logic cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, msg);
    end
  endtask

  function automatic header_t mk_hdr(int n, msg_e m);
    header_t h;
    h = '0; h.msg = m; h.cfi = 2'(n); h.src_x = 4'(n % 3); h.dst_y = 4'(n % 5);
    h.addr = ADDR_W'(n * 1000 + 17);
    return h;
  endfunction
  function automatic logic [BLOCK_W-1:0] mk_blk(int n);
    logic [BLOCK_W-1:0] b;
    for (int w = 0; w < 8; w++) b[w*64 +: 64] = {32'(n), 32'(w)};
    return b;
  endfunction

  // ---- offered traffic ----
  int rep_sent = 0, req_sent = 0;
  initial begin
    l2_rep_valid = 0; l2_rep_hdr = '0; l2_rep_data = '0;
    wait (rst_n);
    for (int n = 0; n < NPKT; n++) begin
      repeat ($urandom_range(0, 6)) @(negedge clk);
      @(negedge clk);
      l2_rep_valid = 1; l2_rep_hdr = mk_hdr(n, MSG_REP); l2_rep_data = mk_blk(n);
      do @(posedge clk); while (!l2_rep_ready);
      #1 l2_rep_valid = 0;
      rep_sent++;
    end
  end
  initial begin
    l1_req_valid = 0; l1_req_hdr = '0;
    wait (rst_n);
    for (int n = 0; n < NPKT; n++) begin
      repeat ($urandom_range(0, 4)) @(negedge clk);
      @(negedge clk);
      l1_req_valid = 1; l1_req_hdr = mk_hdr(n + 500, MSG_REQ);
      do @(posedge clk); while (!l1_req_ready);
      #1 l1_req_valid = 0;
      req_sent++;
    end
  end

  // ---- router local input model ----
  int occ [NUM_VC];
  int got_req = 0, got_rep = 0, body_idx = -1, rep_vc = 0;
  always @(posedge clk) if (rst_n) begin
    inj_credit <= '0;
    if (inj_valid) begin
      int v;
      v = int'(inj_flit.vc);
      check(occ[v] < BUF_DEPTH, "flit sent without credit");
      occ[v]++;
      if (body_idx >= 0) begin
        check(v == rep_vc, "reply flits split over VCs");
        check(inj_flit.ftype == ((body_idx == 3) ? FT_TAIL : FT_BODY), "reply flit type");
        check(inj_flit.data == mk_blk(got_rep)[body_idx*128 +: 128], "reply body data");
        if (body_idx == 3) begin body_idx = -1; got_rep++; end
        else body_idx++;
      end else if (inj_flit.ftype == FT_HEAD) begin
        check(v != 0, "reply on request VC");
        check(flit_hdr(inj_flit) == mk_hdr(got_rep, MSG_REP), "reply header");
        rep_vc = v; body_idx = 0;
      end else begin
        check(inj_flit.ftype == FT_HEADTAIL && v == 0, "request flit type/VC");
        check(flit_hdr(inj_flit) == mk_hdr(got_req + 500, MSG_REQ), "request header");
        got_req++;
      end
    end
    for (int v = 0; v < NUM_VC; v++)
      if (occ[v] > 0 && $urandom_range(0, 2) == 0) begin
        occ[v]--;
        inj_credit[v] <= 1'b1;
      end
  end

  // ---- ejection: router output model ----
  int ecred [NUM_VC];
  int ej_req_sent = 0, ej_req_got = 0, ej_rep_sent = 0;
  initial begin
    ej_valid = 0; ej_flit = '0;
    for (int v = 0; v < NUM_VC; v++) ecred[v] = BUF_DEPTH;
    wait (rst_n);
    while (ej_req_sent < NPKT || ej_rep_sent < 5 * NPKT) begin
      int v;
      @(negedge clk);
      ej_valid = 0;
      v = $urandom_range(0, 2);
      if (ecred[v] > 0 && (v == 0 ? ej_req_sent < NPKT : ej_rep_sent < 5 * NPKT)) begin
        ej_valid = 1;
        ej_flit = '0; ej_flit.vc = 2'(v);
        if (v == 0) begin
          ej_flit.ftype = FT_HEADTAIL;
          ej_flit.data = FLIT_W'(mk_hdr(ej_req_sent + 900, MSG_REQ));
          ej_req_sent++;
        end else begin
          ej_flit.ftype = FT_BODY;
          ej_flit.data = {32'(ej_rep_sent), 96'hABCD};
          ej_rep_sent++;
        end
        ecred[v]--;
        #1;
        if (v != 0) check(l1_rep_valid && l1_rep_flit == ej_flit, "reply flit to L1");
        else check(!l1_rep_valid, "request flit leaked to L1");
      end
    end
    @(negedge clk);
    ej_valid = 0;
  end
  always @(posedge clk) if (rst_n)
    for (int v = 0; v < NUM_VC; v++) if (ej_credit[v]) ecred[v]++;

  // ---- L2 bank model (takes requests) ----
  initial begin
    l2_req_ready = 0;
    forever begin
      @(negedge clk);
      l2_req_ready = ($urandom_range(0, 2) == 0);
    end
  end
  always @(posedge clk) if (rst_n && l2_req_valid && l2_req_ready) begin
    check(l2_req_hdr == mk_hdr(ej_req_got + 900, MSG_REQ), "request to L2 in order");
    ej_req_got++;
  end

  initial begin
    for (int v = 0; v < NUM_VC; v++) occ[v] = 0;
    inj_credit = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (got_rep == NPKT && got_req == NPKT && ej_req_got == NPKT && ej_rep_sent == 5 * NPKT);
    repeat (20) @(posedge clk);
    for (int v = 0; v < NUM_VC; v++) check(ecred[v] == BUF_DEPTH, "ejection credits returned");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
