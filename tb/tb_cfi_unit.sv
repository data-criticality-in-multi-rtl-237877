// tb_cfi_unit: exhaustive check of the critical flit identifier.
// Every byte offset of a 64-byte block is applied; the expected CFI is the
// number of the data flit (B0, B1, B2, T) holding that byte: offset / 16,
// with words W0-W1 in B0, W2-W3 in B1, W4-W5 in B2 and W6-W7 in T.
module tb_cfi_unit;
  import ernoc_pkg::*;
  logic [5:0] offset;
  logic [1:0] cfi;
  int checks = 0, failures = 0;

  cfi_unit dut (.offset, .cfi);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int off = 0; off < 64; off++) begin
      int word, exp;
      offset = 6'(off);
      #1;
      word = off / 8;            // 64-bit word in the block
      exp  = word / 2;           // two words per flit
      checks++;
      if (int'(cfi) != exp) begin
        failures++;
        $display("FAIL offset %0d: cfi %0d expected %0d", off, cfi, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
