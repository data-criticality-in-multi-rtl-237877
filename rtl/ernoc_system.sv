// ernoc_system: many-core memory system with NoC-aware early restart (ER-NoC).
//
// MESH_X x MESH_Y tiles (default 8 x 8 = 64 cores) on a 2D mesh, each with
// a private 32 KiB 8-way L1 data cache, a 512 KiB bank of the shared L2 and
// a 3-VC, 2-stage X-Y router with 128-bit links. A core's load that misses
// in its L1 goes as a one-flit request, carrying the critical flit
// identifier (CFI), to the block's home L2 bank; the five-flit reply carries
// the CFI back, routers give priority to the reply's flits up to the
// critical one, and the L1 hands the critical word to the core as soon as
// its flit arrives (early restart).
//
// Interface: one load port per core, flattened as index y*MESH_X + x; a
// single fill port writing one block of the distributed L2 (the stand-in
// for the memory controllers, which are not part of the design), addressed
// by block address: home bank = block % nodes, row = block / nodes; per-core
// event outputs for L1 misses and priority-decided router grants.
// Sizes follow the paper's system configuration; links at the mesh edge are
// tied off.
module ernoc_system
  import ernoc_pkg::*;
#(
  parameter int unsigned MESH_X    = 8,
  parameter int unsigned MESH_Y    = 8,
  parameter int unsigned L1_SETS   = 64,
  parameter int unsigned L1_WAYS   = 8,
  parameter int unsigned L2_BLOCKS = 8192,
  localparam int unsigned N        = MESH_X * MESH_Y
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic [N-1:0]                   core_req_valid,
  input  logic [N-1:0][ADDR_W-1:0]       core_req_addr,
  output logic [N-1:0]                   core_req_ready,
  output logic [N-1:0]                   core_resp_valid,
  output logic [N-1:0][WORD_W-1:0]       core_resp_data,
  output logic [N-1:0]                   core_resp_early,
  input  logic                           fill_valid,
  input  logic [ADDR_W-OFFSET_W-1:0]     fill_block,
  input  logic [BLOCK_W-1:0]             fill_data,
  output logic [N-1:0]                   evt_miss,
  output logic [N-1:0]                   evt_prio
);
  localparam int unsigned RW = $clog2(L2_BLOCKS);
  localparam int DE = 0, DS = 1, DW = 2, DN = 3;   // mesh port indices

  flit_t [N-1:0][3:0]             out_flit;
  logic  [N-1:0][3:0]             out_valid;
  logic  [N-1:0][3:0][NUM_VC-1:0] in_credit;
  flit_t [N-1:0][3:0]             in_flit;
  logic  [N-1:0][3:0]             in_valid;
  logic  [N-1:0][3:0][NUM_VC-1:0] out_credit;

  // neighbour wiring: E=0, S=1, W=2, N=3; y grows to the south
  always_comb begin
    for (int y = 0; y < int'(MESH_Y); y++)
      for (int x = 0; x < int'(MESH_X); x++) begin
        int i;
        i = y * int'(MESH_X) + x;
        in_flit[i]    = '0;
        in_valid[i]   = '0;
        out_credit[i] = '0;
        if (x < int'(MESH_X) - 1) begin   // east neighbour
          in_flit[i][DE]    = out_flit[i+1][DW];
          in_valid[i][DE]   = out_valid[i+1][DW];
          out_credit[i][DE] = in_credit[i+1][DW];
        end
        if (x > 0) begin                  // west neighbour
          in_flit[i][DW]    = out_flit[i-1][DE];
          in_valid[i][DW]   = out_valid[i-1][DE];
          out_credit[i][DW] = in_credit[i-1][DE];
        end
        if (y < int'(MESH_Y) - 1) begin   // south neighbour
          in_flit[i][DS]    = out_flit[i+int'(MESH_X)][DN];
          in_valid[i][DS]   = out_valid[i+int'(MESH_X)][DN];
          out_credit[i][DS] = in_credit[i+int'(MESH_X)][DN];
        end
        if (y > 0) begin                  // north neighbour
          in_flit[i][DN]    = out_flit[i-int'(MESH_X)][DS];
          in_valid[i][DN]   = out_valid[i-int'(MESH_X)][DS];
          out_credit[i][DN] = in_credit[i-int'(MESH_X)][DS];
        end
      end
  end

  for (genvar y = 0; y < MESH_Y; y++) begin : g_y
    for (genvar x = 0; x < MESH_X; x++) begin : g_x
      localparam int unsigned I = y * MESH_X + x;
      logic           fv;
      logic [RW-1:0]  fidx;
      assign fv   = fill_valid && (int'(fill_block) % N == I);
      assign fidx = RW'((int'(fill_block) / N) % L2_BLOCKS);

      tile #(.MESH_X(MESH_X), .MESH_Y(MESH_Y),
             .L1_SETS(L1_SETS), .L1_WAYS(L1_WAYS), .L2_BLOCKS(L2_BLOCKS)) u_tile (
        .clk, .rst_n, .my_x(COORD_W'(x)), .my_y(COORD_W'(y)),
        .core_req_valid(core_req_valid[I]), .core_req_addr(core_req_addr[I]),
        .core_req_ready(core_req_ready[I]), .core_resp_valid(core_resp_valid[I]),
        .core_resp_data(core_resp_data[I]), .core_resp_early(core_resp_early[I]),
        .link_in_flit(in_flit[I]), .link_in_valid(in_valid[I]),
        .link_in_credit(in_credit[I]),
        .link_out_flit(out_flit[I]), .link_out_valid(out_valid[I]),
        .link_out_credit(out_credit[I]),
        .fill_valid(fv), .fill_idx(fidx), .fill_data,
        .evt_miss(evt_miss[I]), .evt_prio(evt_prio[I]));
    end
  end
endmodule
