// cfi_unit: critical flit identifier (CFI) of the ER-NoC L1 controller.
//
// From the block offset of the address the core asks for, it returns which
// data flit of the reply (00 = B0, 01 = B1, 10 = B2, 11 = tail T) will carry
// the requested (critical) word. It runs beside the tag check and the data
// lookup and is purely combinational, so it adds no latency.
//
// The paper's figure labels this block "OFFSET % FLIT SIZE" while its text
// says offset 3 (word W3) travels in B1; the function that matches the text
// is the integer quotient offset / flit size, which is what is built. The
// flit size is the number of bytes of block data one flit carries.
module cfi_unit
  import ernoc_pkg::*;
#(
  parameter int unsigned OFF_W      = OFFSET_W,     // byte offset bits (6)
  parameter int unsigned FLIT_BYTES = FLIT_W / 8    // 16
) (
  input  logic [OFF_W-1:0] offset,
  output logic [CFI_W-1:0] cfi
);
  localparam int unsigned SHIFT = $clog2(FLIT_BYTES);

  logic [OFF_W-1:0] quotient;
  always_comb begin
    quotient = offset >> SHIFT;
    cfi      = quotient[CFI_W-1:0];
  end
endmodule
