// tb_prio_arbiter: random requests and CFI priorities against a reference
// model of "lowest counter wins, round robin from the last winner + 1 among
// equals". The grant is sampled every cycle and the model's pointer follows
// the grants that were used.
module tb_prio_arbiter;
  import ernoc_pkg::*;
  localparam int N = 5;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] req;
  logic [N-1:0][CNT_W-1:0] prio;
  logic update;
  logic gnt_valid;
  logic [$clog2(N)-1:0] gnt_idx;
  logic [N-1:0] gnt;
  int checks = 0, failures = 0;
  int ptr = 0;

  prio_arbiter #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int best, exp;
    req = '0; prio = '0; update = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      req    = N'($urandom);
      for (int i = 0; i < N; i++) prio[i] = CNT_W'($urandom_range(0, 4));
      update = ($urandom_range(0, 3) != 0);
      #1;
      best = 99; exp = -1;
      for (int i = 0; i < N; i++) if (req[i] && int'(prio[i]) < best) best = int'(prio[i]);
      for (int k = 0; k < N; k++)
        if (exp < 0 && req[(ptr + k) % N] && int'(prio[(ptr + k) % N]) == best) exp = (ptr + k) % N;
      checks++;
      if ((exp >= 0) != gnt_valid || (exp >= 0 && (int'(gnt_idx) != exp || gnt != N'(1 << exp)))) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d req=%b exp=%0d got v=%0d idx=%0d", t, req, exp, gnt_valid, gnt_idx);
      end
      @(posedge clk);
      if (update && exp >= 0) ptr = (exp + 1) % N;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
