// tb_cfi_mix: critical-word mixes of the 18 PARSEC 3.0 / SPLASH-2x
// benchmarks, replayed as synthetic miss traffic.
//
// The benchmarks themselves need the x86 cores, which are not part of this
// design. What the memory system sees of them is, per L1 miss, which flit
// (B0, B1, B2 or T) carries the critical word; the published profile gives
// that distribution per benchmark (percentages below). For each benchmark
// every core of a 4x4 mesh (full-size caches) issues LOADS loads to blocks
// it has never touched, so each load misses, with the word position drawn
// from the benchmark's distribution. Checked: every word is right, every
// load misses, and the critical word never arrives later than the complete
// block. Reported per benchmark: mean cycles to the critical word (early
// restart over the network with CFI priority) against mean cycles until the
// whole block is in the L1 (what a core without early restart would wait).
module tb_cfi_mix;
  import ernoc_pkg::*;
  localparam int MX = 4, MY = 4, N = MX * MY;
  localparam int LOADS = 12;
  localparam int NB = 18;

  // share of critical words in B0, B1, B2, T (per cent x 100)
  localparam int PCT [NB][4] = '{
    '{7037, 1194,  795,  974}, '{4590, 1791, 1738, 1881}, '{5449, 1720, 1338, 1493},
    '{8206,  706,  540,  548}, '{6760, 1504,  856,  880}, '{6747, 1434,  823,  996},
    '{5750, 1367, 1232, 1651}, '{4559, 2008, 1626, 1807}, '{5633, 1421, 1404, 1542},
    '{4370, 1469, 1940, 2221}, '{6719, 1227, 1026, 1028}, '{3910, 1469,  714, 3907},
    '{5046, 1519, 1394, 2041}, '{7099,  637,  432, 1832}, '{5841, 3425,  370,  364},
    '{5896, 1435, 1327, 1342}, '{3768, 2281, 1547, 2404}, '{4503, 2251, 2403,  843}};
  localparam string NAME [NB] = '{
    "blackscholes", "bodytrack", "canneal", "facesim", "ferret", "fluidanimate",
    "freqmine", "rtview", "swaptions", "barnes", "cholesky", "fft", "fmm",
    "lu_cb", "lu_ncb", "ocean_cp", "radix", "raytrace"};

  logic clk = 0, rst_n = 0;
  logic [N-1:0] core_req_valid, core_req_ready, core_resp_valid, core_resp_early;
  logic [N-1:0][ADDR_W-1:0] core_req_addr;
  logic [N-1:0][WORD_W-1:0] core_resp_data;
  logic fill_valid;
  logic [ADDR_W-OFFSET_W-1:0] fill_block;
  logic [BLOCK_W-1:0] fill_data;
  logic [N-1:0] evt_miss, evt_prio;
  int checks = 0, failures = 0, cyc = 0;

  ernoc_system #(.MESH_X(MX), .MESH_Y(MY)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [WORD_W-1:0] mem_word(int blk, int w);
    return {16'hCAFE, 32'(blk), 8'(w), 8'h77};
  endfunction

  task automatic check(logic cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cyc, msg);
    end
  endtask

  // a fresh block for every load of benchmark b, core c, load n, homed at
  // node h (spread over the mesh, rarely the core's own node)
  function automatic int blk_of(int b, int c, int n);
    int h;
    h = (c * 7 + n * 3 + b * 5 + 1) % N;
    return ((b * LOADS + n) * N + c) * N + h;
  endfunction

  int done;
  longint lat_crit, lat_full;
  int n_loads, n_misses;

  function automatic int draw_flit(int b);
    int r, acc;
    r = $urandom_range(0, 9999);
    acc = 0;
    for (int f = 0; f < 4; f++) begin
      acc += PCT[b][f];
      if (r < acc) return f;
    end
    return 3;
  endfunction

  task automatic core(int c, int b);
    for (int n = 0; n < LOADS; n++) begin
      int blk, w, lc, lf;
      logic [ADDR_W-1:0] a;
      blk = blk_of(b, c, n);
      w = 2 * draw_flit(b) + int'($urandom_range(0, 1));
      a = ADDR_W'(blk * 64 + w * 8);
      @(negedge clk);
      while (!core_req_ready[c]) @(negedge clk);
      core_req_valid[c] = 1'b1;
      core_req_addr[c]  = a;
      @(negedge clk);
      core_req_valid[c] = 1'b0;
      lc = 1;
      while (!core_resp_valid[c]) begin @(negedge clk); lc++; end
      check(core_resp_data[c] == mem_word(blk, w), "load data");
      lf = lc;
      while (!core_req_ready[c]) begin @(negedge clk); lf++; end
      check(lc <= lf, "critical word later than the whole block");
      n_loads++;
      lat_crit += lc;
      lat_full += lf;
    end
    done++;
  endtask

  int miss_ev;
  always @(posedge clk) if (rst_n) miss_ev += $countones(evt_miss);

  initial begin
    core_req_valid = '0; core_req_addr = '0;
    fill_valid = 0; fill_block = '0; fill_data = '0;
    miss_ev = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < NB; b++)
      for (int c = 0; c < N; c++)
        for (int n = 0; n < LOADS; n++) begin
          int k;
          k = blk_of(b, c, n);
          @(negedge clk);
          fill_valid = 1; fill_block = (ADDR_W-OFFSET_W)'(k);
          for (int w = 0; w < 8; w++) fill_data[w*64 +: 64] = mem_word(k, w);
        end
    @(negedge clk);
    fill_valid = 0;
    for (int b = 0; b < NB; b++) begin
      done = 0; lat_crit = 0; lat_full = 0; n_loads = 0;
      miss_ev = 0;
      for (int c = 0; c < N; c++) begin
        fork
          automatic int cc = c;
          automatic int bb = b;
          core(cc, bb);
        join_none
      end
      wait (done == N);
      repeat (2) @(posedge clk);
      check(miss_ev == N * LOADS, $sformatf("%s: every load must miss", NAME[b]));
      check(lat_crit < lat_full, $sformatf("%s: early restart gains nothing", NAME[b]));
      $display("%-13s critical word %6.2f cycles, whole block %6.2f cycles",
               NAME[b], real'(lat_crit) / n_loads, real'(lat_full) / n_loads);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
