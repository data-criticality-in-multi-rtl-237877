// tb_l1_cache: the L1 controller with early restart, checked against an
// independent model of the cache contents.
//
// A small cache (4 sets x 2 ways) at node (1,0) of a 2x2 mesh receives 400
// loads to random addresses in a 2 KiB window, so hits, misses and
// evictions all occur. The testbench plays the NIC and the L2: memory word w
// of block b holds {b, w} in a fixed pattern. For every load it checks:
// hit/miss as predicted by the model (first invalid way, else per-set round
// robin); on a hit, the word one cycle after the lookup cycle; on a miss,
// the request header (request type, CFI = offset / 16, source, home node =
// block % 4), that no word comes back before the critical flit, and that the
// right word comes the cycle after the critical flit (early restart) with
// resp_early set unless the critical flit is the tail. Reply flits arrive
// with random gaps.
module tb_l1_cache;
  import ernoc_pkg::*;
  localparam int SETS = 4, WAYS = 2, MX = 2, MY = 2;
  logic clk = 0, rst_n = 0;
  logic req_valid, req_ready, resp_valid, resp_early;
  logic [ADDR_W-1:0] req_addr;
  logic [WORD_W-1:0] resp_data;
  logic miss_valid, miss_ready, rep_valid, evt_miss;
  header_t miss_hdr;
  flit_t rep_flit;
  int checks = 0, failures = 0, cycles = 0;
  int n_hit = 0, n_miss = 0, n_early = 0;

  logic [COORD_W-1:0] my_x = 4'd1, my_y = 4'd0;
  l1_cache #(.SETS(SETS), .WAYS(WAYS), .MESH_X(MX), .MESH_Y(MY)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [WORD_W-1:0] mem_word(int blk, int w);
    return {8'hC0, 24'(blk), 16'h0, 8'(w), 8'h5A};
  endfunction

  task automatic check(logic cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cycles, msg);
    end
  endtask

  // model state
  int mtag [SETS][WAYS];
  bit mval [SETS][WAYS];
  int mrr  [SETS];

  task automatic load(logic [ADDR_W-1:0] a);
    int blk, set, tg, w, cfi, way;
    bit hit;
    blk = int'(a >> 6); set = blk % SETS; tg = blk / SETS; w = int'(a[5:3]); cfi = w / 2;
    hit = 0;
    for (int i = 0; i < WAYS; i++) if (mval[set][i] && mtag[set][i] == tg) hit = 1;
    @(negedge clk);
    check(req_ready, "not ready in idle");
    req_valid = 1; req_addr = a;
    @(negedge clk);                       // accepted on the edge before
    req_valid = 0; req_addr = '0;
    check(evt_miss == !hit, "hit/miss differs from model");
    @(negedge clk);
    if (hit) begin
      n_hit++;
      check(resp_valid && resp_data == mem_word(blk, w), "hit data/latency");
      check(!miss_valid, "miss request on a hit");
    end else begin
      n_miss++;
      check(!resp_valid, "response on a miss before data");
      check(miss_valid, "no miss request");
      check(miss_hdr.msg == MSG_REQ && int'(miss_hdr.cfi) == cfi, "request CFI");
      check(int'(miss_hdr.src_x) == 1 && int'(miss_hdr.src_y) == 0, "request source");
      check(int'(miss_hdr.dst_x) == (blk % 4) % MX && int'(miss_hdr.dst_y) == (blk % 4) / MX,
            "request home node");
      check(miss_hdr.addr == a, "request address");
      repeat ($urandom_range(0, 3)) begin
        @(negedge clk);
        check(miss_valid && !resp_valid, "request dropped");
      end
      miss_ready = 1;
      @(negedge clk);
      miss_ready = 0;
      // reply: H, B0..B2, T with random gaps
      for (int f = 0; f <= DATA_FLITS; f++) begin
        repeat ($urandom_range(0, 3)) begin
          @(negedge clk);
          check(!resp_valid, "spurious response during fill");
        end
        rep_valid = 1;
        rep_flit = '0;
        if (f == 0) begin
          header_t h;
          h = miss_hdr; h.msg = MSG_REP;
          rep_flit.ftype = FT_HEAD; rep_flit.vc = 2'd1; rep_flit.data = FLIT_W'(h);
        end else begin
          rep_flit.ftype = (f == DATA_FLITS) ? FT_TAIL : FT_BODY;
          rep_flit.vc = 2'd1;
          rep_flit.data = {mem_word(blk, 2*(f-1)+1), mem_word(blk, 2*(f-1))};
        end
        @(negedge clk);
        rep_valid = 0;
        if (f >= 1 && f - 1 == cfi) begin
          check(resp_valid && resp_data == mem_word(blk, w), "early-restart word");
          check(resp_early == (cfi != DATA_FLITS - 1), "resp_early flag");
          if (resp_early) n_early++;
        end else
          check(!resp_valid, "response not tied to the critical flit");
      end
      // model update
      way = -1;
      for (int i = 0; i < WAYS; i++) if (way < 0 && !mval[set][i]) way = i;
      if (way < 0) begin way = mrr[set]; mrr[set] = (mrr[set] + 1) % WAYS; end
      mval[set][way] = 1; mtag[set][way] = tg;
    end
  endtask

  initial begin
    req_valid = 0; req_addr = '0; miss_ready = 0; rep_valid = 0; rep_flit = '0;
    for (int s = 0; s < SETS; s++) begin
      mrr[s] = 0;
      for (int i = 0; i < WAYS; i++) begin mval[s][i] = 0; mtag[s][i] = 0; end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) load(ADDR_W'($urandom_range(0, 2047)) & ~ADDR_W'(7));
    check(n_hit > 20 && n_miss > 20 && n_early > 10, "mix of hits, misses and early restarts");
    $display("hits=%0d misses=%0d early=%0d", n_hit, n_miss, n_early);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
