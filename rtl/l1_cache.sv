// l1_cache: private L1 data cache with the ER-NoC L1 controller.
//
// Organisation: SETS x WAYS blocks of 64 bytes (defaults 64 x 8 = 32 KiB,
// 8-way, as in the paper). The address splits into TAG | SET INDEX | OFFSET.
// For a load the controller reads, in one cycle and in parallel, the valid
// bits, tags and data of all ways of the indexed set; per way a comparator
// and an AND with the valid bit give the way hit, their OR gives hit/miss and
// an n x 1 mux picks the word. Beside them the cfi_unit turns the offset into
// the critical flit identifier (CFI).
//
// On a miss the controller sends a one-flit request to the home L2 bank with
// the CFI in its header, then takes the reply's data flits B0, B1, B2, T as
// they come, writing two words per flit into the victim way. Early restart:
// as soon as the flit whose number equals the CFI arrives, the critical word
// is returned to the core (resp_early = 1 unless that flit is the tail),
// while the rest of the block is filled in the background. The block turns
// valid with the tail flit.
//
// Interface and timing: a load is accepted (req_ready) in the idle state;
// on a hit resp_valid comes two cycles after acceptance; on a miss it comes
// one cycle after the critical flit. Own choices (not in the paper): the
// core issues loads only (no stores, so no dirty state and no write-back;
// coherence is outside this design), one miss at a time and no new load
// until the fill completes, victim = first invalid way else a per-set
// round-robin pointer, home bank = block address modulo the node count.
module l1_cache
  import ernoc_pkg::*;
#(
  parameter int unsigned SETS     = 64,
  parameter int unsigned WAYS     = 8,
  parameter int unsigned MESH_X   = 8,
  parameter int unsigned MESH_Y   = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [COORD_W-1:0] my_x,     // node coordinates
  input  logic [COORD_W-1:0] my_y,
  // core load port
  input  logic              req_valid,
  input  logic [ADDR_W-1:0] req_addr,
  output logic              req_ready,
  output logic              resp_valid,
  output logic [WORD_W-1:0] resp_data,
  output logic              resp_early,
  // miss request to the NIC
  output logic              miss_valid,
  output header_t           miss_hdr,
  input  logic              miss_ready,
  // reply flits from the NIC (always accepted)
  input  logic              rep_valid,
  input  flit_t             rep_flit,
  // event: a miss was detected
  output logic              evt_miss
);
  localparam int unsigned IDX_W  = $clog2(SETS);
  localparam int unsigned WAY_W  = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned TAG_W  = ADDR_W - OFFSET_W - IDX_W;
  localparam int unsigned NNODES = MESH_X * MESH_Y;
  localparam int unsigned BLK_W  = ADDR_W - OFFSET_W;

  typedef enum logic [1:0] { S_IDLE, S_LOOKUP, S_MISS_REQ, S_FILL } state_e;

  state_e              state_q;
  logic [ADDR_W-1:0]   addr_q;
  logic [CFI_W-1:0]    cfi_q;
  logic [WAY_W-1:0]    victim_q;
  logic [CFI_W-1:0]    fcnt_q;

  logic                valid_q [SETS][WAYS];
  logic [TAG_W-1:0]    tag_q   [SETS][WAYS];
  logic [FLIT_W-1:0]   data_q  [SETS][WAYS][DATA_FLITS];
  logic [WAY_W-1:0]    rr_q    [SETS];

  // address fields of the load being looked up
  logic [TAG_W-1:0]    a_tag;
  logic [IDX_W-1:0]    a_idx;
  logic [OFFSET_W-1:0] a_off;
  logic [CFI_W-1:0]    a_cfi;
  assign a_tag = addr_q[ADDR_W-1 -: TAG_W];
  assign a_idx = addr_q[OFFSET_W +: IDX_W];
  assign a_off = addr_q[OFFSET_W-1:0];

  cfi_unit u_cfi (.offset(a_off), .cfi(a_cfi));

  // tag check and data lookup in parallel
  logic [WAYS-1:0]   way_hit;
  logic              hit;
  logic [WORD_W-1:0] hit_word;
  logic [FLIT_W-1:0] hit_flit;
  always_comb begin
    hit      = 1'b0;
    hit_flit = '0;
    for (int w = 0; w < WAYS; w++) begin
      way_hit[w] = valid_q[a_idx][w] && (tag_q[a_idx][w] == a_tag);
      hit        = hit | way_hit[w];
      if (way_hit[w]) hit_flit = data_q[a_idx][w][a_cfi];
    end
    hit_word = hit_flit[a_off[OFFSET_W-CFI_W-1 +: 1]*WORD_W +: WORD_W];
  end

  // victim: first invalid way, else round robin
  logic [WAY_W-1:0] victim;
  logic             found_inv;
  always_comb begin
    victim    = rr_q[a_idx];
    found_inv = 1'b0;
    for (int w = 0; w < WAYS; w++)
      if (!found_inv && !valid_q[a_idx][w]) begin
        victim    = WAY_W'(w);
        found_inv = 1'b1;
      end
  end

  // home L2 bank of the block
  logic [BLK_W-1:0] blk;
  int unsigned      home;
  always_comb begin
    blk  = addr_q[ADDR_W-1:OFFSET_W];
    home = int'(blk) % NNODES;
    miss_hdr       = '0;
    miss_hdr.msg   = MSG_REQ;
    miss_hdr.cfi   = cfi_q;
    miss_hdr.src_x = my_x;
    miss_hdr.src_y = my_y;
    miss_hdr.dst_x = COORD_W'(home % MESH_X);
    miss_hdr.dst_y = COORD_W'(home / MESH_X);
    miss_hdr.addr  = addr_q;
  end

  assign req_ready  = (state_q == S_IDLE);
  assign miss_valid = (state_q == S_MISS_REQ);
  assign evt_miss   = (state_q == S_LOOKUP) && !hit;

  logic data_flit;
  assign data_flit = rep_valid && (state_q == S_FILL) && !is_head(rep_flit.ftype);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q    <= S_IDLE;
      addr_q     <= '0;
      cfi_q      <= '0;
      victim_q   <= '0;
      fcnt_q     <= '0;
      resp_valid <= 1'b0;
      resp_data  <= '0;
      resp_early <= 1'b0;
      for (int s = 0; s < SETS; s++) begin
        rr_q[s] <= '0;
        for (int w = 0; w < WAYS; w++) valid_q[s][w] <= 1'b0;
      end
    end else begin
      resp_valid <= 1'b0;
      resp_early <= 1'b0;
      unique case (state_q)
        S_IDLE: if (req_valid) begin
          addr_q  <= req_addr;
          state_q <= S_LOOKUP;
        end
        S_LOOKUP: begin
          cfi_q <= a_cfi;
          if (hit) begin
            resp_valid <= 1'b1;
            resp_data  <= hit_word;
            state_q    <= S_IDLE;
          end else begin
            victim_q               <= victim;
            valid_q[a_idx][victim] <= 1'b0;
            tag_q[a_idx][victim]   <= a_tag;
            if (!found_inv) rr_q[a_idx] <= (int'(rr_q[a_idx]) == WAYS - 1) ? '0 : rr_q[a_idx] + 1'b1;
            fcnt_q  <= '0;
            state_q <= S_MISS_REQ;
          end
        end
        S_MISS_REQ: if (miss_ready) state_q <= S_FILL;
        S_FILL: if (data_flit) begin
          data_q[a_idx][victim_q][fcnt_q] <= rep_flit.data;
          fcnt_q <= fcnt_q + 1'b1;
          if (fcnt_q == cfi_q) begin        // early restart
            resp_valid <= 1'b1;
            resp_data  <= rep_flit.data[a_off[OFFSET_W-CFI_W-1 +: 1]*WORD_W +: WORD_W];
            resp_early <= !is_tail(rep_flit.ftype);
          end
          if (is_tail(rep_flit.ftype)) begin
            valid_q[a_idx][victim_q] <= 1'b1;
            state_q <= S_IDLE;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  a_fill_order: assert property (@(posedge clk) disable iff (!rst_n)
    data_flit |-> (is_tail(rep_flit.ftype) == (fcnt_q == CFI_W'(DATA_FLITS - 1))))
    else $error("l1_cache: reply tail flit out of place");
  a_no_stray_reply: assert property (@(posedge clk) disable iff (!rst_n)
    rep_valid |-> state_q == S_FILL)
    else $error("l1_cache: reply flit without an outstanding miss");
endmodule
