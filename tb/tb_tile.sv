// tb_tile: one tile on its own (a 1x1 mesh), so every miss travels
// L1 -> NIC -> router PE port -> router PE port -> NIC -> L2 bank and back.
// The L2 bank (32 blocks) is filled with word w of block b = {b, w}; then
// 300 loads (half reusing recent addresses) are issued. Checked: each load
// returns the right word, a hit answers one cycle after the lookup cycle,
// misses and early restarts both occur, no flit ever leaves on a mesh port,
// and the unloaded miss latency to a critical word in B0 is the same for
// every such miss.
module tb_tile;
  import ernoc_pkg::*;
  localparam int L2B = 32;
  logic clk = 0, rst_n = 0;
  logic [COORD_W-1:0] my_x = '0, my_y = '0;
  logic core_req_valid, core_req_ready, core_resp_valid, core_resp_early;
  logic [ADDR_W-1:0] core_req_addr;
  logic [WORD_W-1:0] core_resp_data;
  flit_t [3:0] link_in_flit, link_out_flit;
  logic [3:0] link_in_valid, link_out_valid;
  logic [3:0][NUM_VC-1:0] link_in_credit, link_out_credit;
  logic fill_valid;
  logic [$clog2(L2B)-1:0] fill_idx;
  logic [BLOCK_W-1:0] fill_data;
  logic evt_miss, evt_prio;
  int checks = 0, failures = 0, cyc = 0;

  tile #(.MESH_X(1), .MESH_Y(1), .L1_SETS(4), .L1_WAYS(2), .L2_BLOCKS(L2B)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [WORD_W-1:0] mem_word(int blk, int w);
    return {16'h7E1E, 32'(blk), 8'(w), 8'h11};
  endfunction

  task automatic check(logic cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cyc, msg);
    end
  endtask

  always @(posedge clk) if (rst_n) check(link_out_valid == '0, "flit left on a mesh port");

  int n_hit = 0, n_miss = 0, n_early = 0, b0_lat = -1;
  initial begin
    logic [ADDR_W-1:0] recent[4];
    link_in_flit = '0; link_in_valid = '0; link_out_credit = '0;
    core_req_valid = 0; core_req_addr = '0; fill_valid = 0; fill_idx = '0; fill_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < L2B; b++) begin
      @(negedge clk);
      fill_valid = 1; fill_idx = 5'(b);
      for (int w = 0; w < 8; w++) fill_data[w*64 +: 64] = mem_word(b, w);
    end
    @(negedge clk);
    fill_valid = 0;
    for (int i = 0; i < 4; i++) recent[i] = '0;
    for (int n = 0; n < 300; n++) begin
      logic [ADDR_W-1:0] a;
      int lat, blk, w;
      a = ($urandom_range(0, 1) == 0) ? recent[$urandom_range(0, 3)]
                                      : ADDR_W'($urandom_range(0, L2B - 1) * 64);
      a[5:3] = 3'($urandom);
      recent[n % 4] = a;
      blk = int'(a >> 6); w = int'(a[5:3]);
      @(negedge clk);
      while (!core_req_ready) @(negedge clk);
      core_req_valid = 1; core_req_addr = a;
      @(negedge clk);
      core_req_valid = 0;
      lat = 1;
      while (!core_resp_valid) begin @(negedge clk); lat++; end
      check(core_resp_data == mem_word(blk, w), "load data");
      if (lat == 2) n_hit++;
      else begin
        n_miss++;
        if (core_resp_early) n_early++;
        if (w / 2 == 0) begin
          if (b0_lat < 0) b0_lat = lat;
          check(lat == b0_lat, $sformatf("unloaded B0 miss latency %0d vs %0d", lat, b0_lat));
        end
      end
    end
    check(n_hit > 10 && n_miss > 10 && n_early > 5, "hits, misses and early restarts");
    $display("hits=%0d misses=%0d early=%0d b0_latency=%0d", n_hit, n_miss, n_early, b0_lat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
