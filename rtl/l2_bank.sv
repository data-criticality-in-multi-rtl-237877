// l2_bank: one bank of the shared last-level (L2) cache and its controller.
//
// Every node holds one bank; a block's home bank is its block address
// modulo the node count, and inside the bank it sits at row
// (block address / node count). A request header arriving from the NIC
// starts a one-cycle read of the 512-bit block; the controller then offers
// the NIC a reply: a header addressed back to the requester that carries
// the requester's CFI unchanged (the ER-NoC change on the L2 side, so the
// routers along the reply path can prioritise up to the critical flit),
// together with the block, which the NIC sends as H, B0, B1, B2, T.
//
// Own choices: the paper gives the bank size (512 KiB per core, 16-way) but
// not its inner workings. Here the bank is a plain block store of
// BLOCKS rows covering all addresses that map to it, so it never misses;
// tags, ways and the miss path to the memory controllers are not built. The
// fill port stands in for the memory-controller side and writes a whole
// block (used to load memory contents). One request is served at a time;
// req_ready is high only when idle; the reply is held until rep_ready.
module l2_bank
  import ernoc_pkg::*;
#(
  parameter int unsigned BLOCKS = 8192,   // 512 KiB / 64 B
  parameter int unsigned MESH_X = 8,
  parameter int unsigned MESH_Y = 8
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [COORD_W-1:0]        my_x,     // node coordinates
  input  logic [COORD_W-1:0]        my_y,
  input  logic                      req_valid,
  input  header_t                   req_hdr,
  output logic                      req_ready,
  output logic                      rep_valid,
  output header_t                   rep_hdr,
  output logic [BLOCK_W-1:0]        rep_data,
  input  logic                      rep_ready,
  input  logic                      fill_valid,
  input  logic [$clog2(BLOCKS)-1:0] fill_idx,
  input  logic [BLOCK_W-1:0]        fill_data
);
  localparam int unsigned RW     = $clog2(BLOCKS);
  localparam int unsigned NNODES = MESH_X * MESH_Y;

  typedef enum logic [1:0] { S_IDLE, S_READ, S_REPLY } state_e;

  logic [BLOCK_W-1:0] mem [BLOCKS];
  state_e             state_q;
  header_t            hdr_q;
  logic [BLOCK_W-1:0] rd_q;

  function automatic logic [RW-1:0] row_of(logic [ADDR_W-1:0] a);
    int unsigned b;
    b = int'(a[ADDR_W-1:OFFSET_W]) / NNODES;
    return RW'(b % BLOCKS);
  endfunction

  assign req_ready = (state_q == S_IDLE);
  assign rep_valid = (state_q == S_REPLY);
  assign rep_data  = rd_q;

  always_comb begin
    rep_hdr       = hdr_q;
    rep_hdr.msg   = MSG_REP;
    rep_hdr.src_x = my_x;
    rep_hdr.src_y = my_y;
    rep_hdr.dst_x = hdr_q.src_x;
    rep_hdr.dst_y = hdr_q.src_y;
  end

  always_ff @(posedge clk) begin
    if (fill_valid) mem[fill_idx] <= fill_data;
    if (state_q == S_IDLE && req_valid) rd_q <= mem[row_of(req_hdr.addr)];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      hdr_q   <= '0;
    end else begin
      unique case (state_q)
        S_IDLE:  if (req_valid) begin
          hdr_q   <= req_hdr;
          state_q <= S_READ;
        end
        S_READ:  state_q <= S_REPLY;
        S_REPLY: if (rep_ready) state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  a_home: assert property (@(posedge clk) disable iff (!rst_n)
    (state_q == S_IDLE && req_valid) |->
      (int'(req_hdr.addr[ADDR_W-1:OFFSET_W]) % NNODES) == int'(my_y) * MESH_X + int'(my_x))
    else $error("l2_bank (%0d,%0d): request for a block homed elsewhere", my_x, my_y);
endmodule
