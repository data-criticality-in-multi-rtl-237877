// tb_l2_bank: the L2 bank controller at node (1,1) of a 2x2 mesh, 16 rows.
// The bank is first filled through the fill port with a row-dependent
// pattern; then 300 random requests for blocks homed at this node (block % 4
// == 3) arrive with random source nodes and CFIs. Checked: the reply comes
// two cycles after the request is accepted, it is held while rep_ready is
// low, the header is a reply from (1,1) to the requester with the request's
// CFI and address, and the block is row block / 4 of the bank.
module tb_l2_bank;
  import ernoc_pkg::*;
  localparam int BLOCKS = 16;
  logic clk = 0, rst_n = 0;
  logic req_valid, req_ready, rep_valid, rep_ready, fill_valid;
  header_t req_hdr, rep_hdr;
  logic [BLOCK_W-1:0] rep_data, fill_data;
  logic [$clog2(BLOCKS)-1:0] fill_idx;
  int checks = 0, failures = 0;

  logic [COORD_W-1:0] my_x = 4'd1, my_y = 4'd1;
  l2_bank #(.BLOCKS(BLOCKS), .MESH_X(2), .MESH_Y(2)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [BLOCK_W-1:0] row_pat(int r);
    logic [BLOCK_W-1:0] d;
    for (int w = 0; w < 8; w++) d[w*64 +: 64] = {32'hB10C0000 + 32'(r), 32'(w * 7 + 1)};
    return d;
  endfunction

  task automatic check(logic cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", msg);
    end
  endtask

  initial begin
    req_valid = 0; req_hdr = '0; rep_ready = 0; fill_valid = 0; fill_idx = '0; fill_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < BLOCKS; r++) begin
      @(negedge clk);
      fill_valid = 1; fill_idx = 4'(r); fill_data = row_pat(r);
    end
    @(negedge clk);
    fill_valid = 0;
    for (int n = 0; n < 300; n++) begin
      int row, blk, wait_c;
      header_t h;
      row = $urandom_range(0, BLOCKS - 1);
      blk = row * 4 + 3;
      h = '0;
      h.msg = MSG_REQ; h.cfi = 2'($urandom); h.src_x = 4'($urandom_range(0, 1));
      h.src_y = 4'($urandom_range(0, 1)); h.dst_x = 4'd1; h.dst_y = 4'd1;
      h.addr = ADDR_W'(blk * 64 + $urandom_range(0, 63));
      @(negedge clk);
      check(req_ready && !rep_valid, "bank not idle");
      req_valid = 1; req_hdr = h;
      @(negedge clk);
      req_valid = 0; req_hdr = '0;
      check(!rep_valid && !req_ready, "reply too early / ready while busy");
      @(negedge clk);
      check(rep_valid, "reply not two cycles after acceptance");
      wait_c = $urandom_range(0, 3);
      for (int k = 0; k <= wait_c; k++) begin
        check(rep_valid && !req_ready, "reply dropped before rep_ready");
        check(rep_hdr.msg == MSG_REP && rep_hdr.cfi == h.cfi && rep_hdr.addr == h.addr,
              "reply header type/CFI/address");
        check(rep_hdr.dst_x == h.src_x && rep_hdr.dst_y == h.src_y &&
              int'(rep_hdr.src_x) == 1 && int'(rep_hdr.src_y) == 1, "reply header route");
        check(rep_data == row_pat(row), "reply block");
        if (k == wait_c) rep_ready = 1;
        @(negedge clk);
        rep_ready = 0;
      end
      check(!rep_valid, "reply not retired");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
