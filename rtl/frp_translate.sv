// frp_translate -- decodes an encoded pointer into a machine address.
//
// This is the datapath drawn after the MAP step of the pointer-decoding
// example: the object's encoded base pointer is rebuilt from the access
// pointer's id and the stored zero offset, subtracted from the access pointer,
// and the difference is added to the decoded base address:
//
//     addr = base + (ptr - {id, zero})
//
// All arithmetic is 64-bit two's complement, so a pointer below the object's
// zero gives an address below its base, which the bounds check then rejects.
// The subtract-then-add form follows the paper's figure; the paper's earlier
// formula (base + offset) is the special case zero = 0.
//
// Purely combinational. rel is the signed byte distance from the object base.
module frp_translate
  import frp_pkg::*;
(
  input  ptr_t      ptr,    // encoded access pointer
  input  offset_t   zero,   // M[ptr.id].zero
  input  vaddr_t    base,   // M[ptr.id].base
  output ptr_t      addr,   // decoded machine address
  output logic signed [OFFSET_BITS+1:0] rel  // addr - base
);
  frp_t p;
  ptr_t base_enc;
  ptr_t diff;

  always_comb begin
    p        = frp_t'(ptr);
    base_enc = {p.id, zero};
    diff     = ptr - base_enc;
    addr     = ptr_t'(base) + diff;
    rel      = $signed({2'b00, p.offset}) - $signed({2'b00, zero});
  end
endmodule
