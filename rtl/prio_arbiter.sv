// prio_arbiter: CFI-priority arbiter with round-robin tie break.
//
// Among the active requests it grants the one with the smallest CFI counter
// value C (0 = critical flit, highest priority). Requests with equal C are
// served round robin: the search starts at the requester after the last one
// that was granted with `update` high. This is the router's replacement for
// plain round-robin arbitration as the paper describes it (lower C wins);
// the round-robin tie break keeps the traditional policy where C does not
// decide. The grant is combinational; the pointer moves on the clock edge.
module prio_arbiter
  import ernoc_pkg::*;
#(
  parameter int unsigned N = 5
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [N-1:0]            req,
  input  logic [N-1:0][CNT_W-1:0] prio,
  input  logic                    update,   // the grant was used this cycle
  output logic                    gnt_valid,
  output logic [$clog2(N)-1:0]    gnt_idx,
  output logic [N-1:0]            gnt
);
  localparam int unsigned IW = $clog2(N);

  logic [IW-1:0]    ptr_q;
  logic [CNT_W-1:0] best;
  logic [N-1:0]     cand;
  logic             hi_found;
  logic [IW-1:0]    hi_idx, lo_idx;

  always_comb begin
    // lowest priority value among the requests
    best = '1;
    for (int i = 0; i < N; i++)
      if (req[i] && prio[i] < best) best = prio[i];
    // first requester holding that value at or after the pointer,
    // else the first one from index 0
    for (int i = 0; i < N; i++) cand[i] = req[i] && (prio[i] == best);
    hi_found = 1'b0;
    hi_idx   = '0;
    lo_idx   = '0;
    for (int i = N - 1; i >= 0; i--) begin
      if (cand[i]) lo_idx = IW'(i);
      if (cand[i] && IW'(i) >= ptr_q) begin
        hi_found = 1'b1;
        hi_idx   = IW'(i);
      end
    end
    gnt_valid = |cand;
    gnt_idx   = hi_found ? hi_idx : lo_idx;
    gnt = '0;
    if (gnt_valid) gnt[gnt_idx] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                  ptr_q <= '0;
    else if (update && gnt_valid) ptr_q <= (int'(gnt_idx) == N - 1) ? '0 : gnt_idx + 1'b1;
  end
endmodule
