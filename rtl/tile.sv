// tile: one node of the mesh, the processing element's memory side.
//
// Holds the private L1 data cache (with the CFI unit), one bank of the
// shared L2, the network interface and the router. The core itself is not
// part of the design: its load port (req/resp) is a port of the tile. The
// router's four mesh ports (East, South, West, North, indices 0-3) are
// brought out; its PE port is wired to the NIC. The fill port writes a
// block of the local L2 bank and stands in for the memory-controller side.
// Timing is that of the parts: see l1_cache, nic, router and l2_bank.
module tile
  import ernoc_pkg::*;
#(
  parameter int unsigned MESH_X    = 8,
  parameter int unsigned MESH_Y    = 8,
  parameter int unsigned L1_SETS   = 64,
  parameter int unsigned L1_WAYS   = 8,
  parameter int unsigned L2_BLOCKS = 8192
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [COORD_W-1:0]           my_x,     // node coordinates
  input  logic [COORD_W-1:0]           my_y,
  // core load port
  input  logic                         core_req_valid,
  input  logic [ADDR_W-1:0]            core_req_addr,
  output logic                         core_req_ready,
  output logic                         core_resp_valid,
  output logic [WORD_W-1:0]            core_resp_data,
  output logic                         core_resp_early,
  // mesh links (E, S, W, N)
  input  flit_t [3:0]                  link_in_flit,
  input  logic  [3:0]                  link_in_valid,
  output logic  [3:0][NUM_VC-1:0]      link_in_credit,
  output flit_t [3:0]                  link_out_flit,
  output logic  [3:0]                  link_out_valid,
  input  logic  [3:0][NUM_VC-1:0]      link_out_credit,
  // L2 bank fill
  input  logic                         fill_valid,
  input  logic [$clog2(L2_BLOCKS)-1:0] fill_idx,
  input  logic [BLOCK_W-1:0]           fill_data,
  // events
  output logic                         evt_miss,
  output logic                         evt_prio
);
  flit_t [NUM_PORTS-1:0]             r_in_flit, r_out_flit;
  logic  [NUM_PORTS-1:0]             r_in_valid, r_out_valid;
  logic  [NUM_PORTS-1:0][NUM_VC-1:0] r_in_credit, r_out_credit;

  always_comb begin
    for (int d = 0; d < 4; d++) begin
      r_in_flit[d]      = link_in_flit[d];
      r_in_valid[d]     = link_in_valid[d];
      link_in_credit[d] = r_in_credit[d];
      link_out_flit[d]  = r_out_flit[d];
      link_out_valid[d] = r_out_valid[d];
      r_out_credit[d]   = link_out_credit[d];
    end
  end

  router u_router (
    .clk, .rst_n, .my_x, .my_y,
    .in_flit(r_in_flit), .in_valid(r_in_valid), .in_credit(r_in_credit),
    .out_flit(r_out_flit), .out_valid(r_out_valid), .out_credit(r_out_credit),
    .prio_evt(evt_prio));

  logic    l1_miss_valid, l1_miss_ready, l1_rep_valid;
  header_t l1_miss_hdr;
  flit_t   l1_rep_flit;
  logic    l2_req_valid, l2_req_ready, l2_rep_valid, l2_rep_ready;
  header_t l2_req_hdr, l2_rep_hdr;
  logic [BLOCK_W-1:0] l2_rep_data;

  l1_cache #(.SETS(L1_SETS), .WAYS(L1_WAYS), .MESH_X(MESH_X), .MESH_Y(MESH_Y)) u_l1 (
    .clk, .rst_n, .my_x, .my_y,
    .req_valid(core_req_valid), .req_addr(core_req_addr), .req_ready(core_req_ready),
    .resp_valid(core_resp_valid), .resp_data(core_resp_data), .resp_early(core_resp_early),
    .miss_valid(l1_miss_valid), .miss_hdr(l1_miss_hdr), .miss_ready(l1_miss_ready),
    .rep_valid(l1_rep_valid), .rep_flit(l1_rep_flit), .evt_miss);

  l2_bank #(.BLOCKS(L2_BLOCKS), .MESH_X(MESH_X), .MESH_Y(MESH_Y)) u_l2 (
    .clk, .rst_n, .my_x, .my_y,
    .req_valid(l2_req_valid), .req_hdr(l2_req_hdr), .req_ready(l2_req_ready),
    .rep_valid(l2_rep_valid), .rep_hdr(l2_rep_hdr), .rep_data(l2_rep_data),
    .rep_ready(l2_rep_ready),
    .fill_valid, .fill_idx, .fill_data);

  nic u_nic (
    .clk, .rst_n,
    .l1_req_valid(l1_miss_valid), .l1_req_hdr(l1_miss_hdr), .l1_req_ready(l1_miss_ready),
    .l1_rep_valid, .l1_rep_flit,
    .l2_req_valid, .l2_req_hdr, .l2_req_ready,
    .l2_rep_valid, .l2_rep_hdr, .l2_rep_data, .l2_rep_ready,
    .inj_flit(r_in_flit[P_LOCAL]), .inj_valid(r_in_valid[P_LOCAL]),
    .inj_credit(r_in_credit[P_LOCAL]),
    .ej_flit(r_out_flit[P_LOCAL]), .ej_valid(r_out_valid[P_LOCAL]),
    .ej_credit(r_out_credit[P_LOCAL]));
endmodule
