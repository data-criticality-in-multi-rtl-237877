// tb_ernoc_system: end-to-end run of the many-core memory system.
//
// A 3x3 mesh (9 cores, a node count that is not a power of two) with small
// caches (L1 4 sets x 2 ways, L2 16 blocks per bank) so that misses,
// evictions and network contention are frequent. The distributed L2 is
// first loaded through the fill port with word w of block b = {b, w}
// pattern; then every core issues LOADS loads at once, half of them reusing
// one of its recent addresses, the rest random over the whole memory.
// Checked: every load returns the right word; the number of L1 misses seen
// on the event outputs equals the misses counted at the cores. Each
// mechanism of the design must occur at least once: L1 hits, L1 misses,
// early restart (word returned before its block is complete), a critical
// word in each of B0, B1, B2 and T, and a router grant decided by CFI
// priority. The average miss latency (miss penalty to the critical word) is
// reported.
module tb_ernoc_system;
  import ernoc_pkg::*;
  localparam int MX = 3, MY = 3, N = MX * MY;
  localparam int L1S = 4, L1W = 2, L2B = 16;
  localparam int LOADS = 80;
  localparam int NBLK = N * L2B;

  logic clk = 0, rst_n = 0;
  logic [N-1:0] core_req_valid, core_req_ready, core_resp_valid, core_resp_early;
  logic [N-1:0][ADDR_W-1:0] core_req_addr;
  logic [N-1:0][WORD_W-1:0] core_resp_data;
  logic fill_valid;
  logic [ADDR_W-OFFSET_W-1:0] fill_block;
  logic [BLOCK_W-1:0] fill_data;
  logic [N-1:0] evt_miss, evt_prio;
  int checks = 0, failures = 0, cyc = 0;

  ernoc_system #(.MESH_X(MX), .MESH_Y(MY), .L1_SETS(L1S), .L1_WAYS(L1W), .L2_BLOCKS(L2B)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [WORD_W-1:0] mem_word(int blk, int w);
    return {16'hD00D, 32'(blk), 8'(w), 8'h3C};
  endfunction

  task automatic check(logic cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cyc, msg);
    end
  endtask

  int n_hit = 0, n_miss = 0, n_early = 0, n_prio = 0, n_evt_miss = 0, done = 0;
  int cfi_seen[4] = '{0, 0, 0, 0};
  longint miss_lat = 0;

  always @(posedge clk) if (rst_n) begin
    n_prio     += $countones(evt_prio);
    n_evt_miss += $countones(evt_miss);
  end

  task automatic core(int c);
    logic [ADDR_W-1:0] recent[4];
    for (int i = 0; i < 4; i++) recent[i] = ADDR_W'($urandom_range(0, NBLK - 1) * 64);
    for (int n = 0; n < LOADS; n++) begin
      logic [ADDR_W-1:0] a;
      int lat, blk, w;
      if ($urandom_range(0, 1) == 0) a = recent[$urandom_range(0, 3)];
      else a = ADDR_W'($urandom_range(0, NBLK - 1) * 64);
      a[5:3] = 3'($urandom);
      recent[n % 4] = a;
      blk = int'(a >> 6); w = int'(a[5:3]);
      @(negedge clk);
      while (!core_req_ready[c]) @(negedge clk);   // L1 still filling
      core_req_valid[c] = 1'b1;
      core_req_addr[c]  = a;
      @(negedge clk);
      core_req_valid[c] = 1'b0;
      lat = 1;
      while (!core_resp_valid[c]) begin
        @(negedge clk);
        lat++;
      end
      check(core_resp_data[c] == mem_word(blk, w),
            $sformatf("core %0d load %0h: got %h", c, a, core_resp_data[c]));
      if (lat <= 2) n_hit++;
      else begin
        n_miss++;
        miss_lat += lat;
        cfi_seen[w / 2]++;
        if (core_resp_early[c]) n_early++;
      end
    end
    done++;
  endtask

  initial begin
    core_req_valid = '0; core_req_addr = '0;
    fill_valid = 0; fill_block = '0; fill_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < NBLK; b++) begin
      @(negedge clk);
      fill_valid = 1; fill_block = (ADDR_W-OFFSET_W)'(b);
      for (int w = 0; w < 8; w++) fill_data[w*64 +: 64] = mem_word(b, w);
    end
    @(negedge clk);
    fill_valid = 0;
    for (int c = 0; c < N; c++) begin
      fork
        automatic int cc = c;
        core(cc);
      join_none
    end
    wait (done == N);
    repeat (5) @(posedge clk);
    check(n_evt_miss == n_miss, $sformatf("miss events %0d vs misses %0d", n_evt_miss, n_miss));
    check(n_hit > 0, "no L1 hit happened");
    check(n_miss > 0, "no L1 miss happened");
    check(n_early > 0, "no early restart happened");
    for (int i = 0; i < 4; i++) check(cfi_seen[i] > 0, $sformatf("no miss with CFI %0d", i));
    check(n_prio > 0, "no CFI-priority arbitration happened");
    $display("loads=%0d hits=%0d misses=%0d early_restarts=%0d prio_grants=%0d avg_miss_latency=%0d cycles=%0d",
             N * LOADS, n_hit, n_miss, n_early, n_prio, (n_miss > 0) ? int'(miss_lat / n_miss) : 0, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
