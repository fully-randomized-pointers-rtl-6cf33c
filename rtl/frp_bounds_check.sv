// frp_bounds_check -- the CHK step: is the whole access inside its object?
//
// The access covers [lb, ub) with ub = lb + nbytes; the object covers
// [base, base + size). The access is allowed when the intersection of the two
// is the whole access, i.e. base <= lb and ub <= base + size. The comparison
// is done on 66-bit values so that no sum can wrap.
//
// For reads the unit does not fault but returns out-of-bounds bytes as zero,
// so this block also gives oob_mask: bit i is set when byte lb + i of the
// access (i < nbytes) lies outside the object. Bits at or above nbytes are 0.
//
// The containment test is the paper's; the per-byte mask is how this design
// realises the paper's "zero any out-of-bound byte" rule. Combinational.
module frp_bounds_check
  import frp_pkg::*;
(
  input  vaddr_t     base,
  input  obj_size_t  size,
  input  ptr_t       lb,
  input  nbytes_t    nbytes,   // 1..MAX_ACCESS_BYTES
  output logic       in_bounds,
  output byte_mask_t oob_mask
);
  localparam int unsigned W = PTR_BITS + 2;
  typedef logic [W-1:0] wide_t;

  wide_t obj_lo, obj_hi, acc_lo, acc_hi;

  always_comb begin
    obj_lo    = wide_t'(base);
    obj_hi    = wide_t'(base) + wide_t'(size);
    acc_lo    = wide_t'(lb);
    acc_hi    = wide_t'(lb) + wide_t'(nbytes);
    in_bounds = (acc_lo >= obj_lo) && (acc_hi <= obj_hi);
    for (int i = 0; i < MAX_ACCESS_BYTES; i++) begin
      wide_t a;
      a = acc_lo + wide_t'(i);
      oob_mask[i] = (i < int'(nbytes)) && ((a < obj_lo) || (a >= obj_hi));
    end
  end
endmodule
