// tb_frp_bounds_check -- self-checking test of the CHK bounds test and the
// per-byte out-of-bounds mask. Random objects and accesses placed around both
// ends of the object (and far away, and across address 0) are compared with a
// byte-by-byte reference computed here.
module tb_frp_bounds_check;
  import frp_pkg::*;

  vaddr_t     base;
  obj_size_t  size;
  ptr_t       lb;
  nbytes_t    nbytes;
  logic       in_bounds;
  byte_mask_t oob_mask;
  int checks = 0, failures = 0;
  int sel;
  logic clk = 0;
  int   cycles = 0;

  frp_bounds_check dut (.base, .size, .lb, .nbytes, .in_bounds, .oob_mask);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cycles++;
    if (cycles > 100000) begin
      failures++;
      $display("watchdog expired");
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  task automatic check(string what);
    logic [PTR_BITS+1:0] a, lo, hi;
    byte_mask_t exp_mask;
    logic       exp_in;
    #1;
    lo = {2'b00, 16'h0, base};
    hi = lo + {{(PTR_BITS+2-SIZE_BITS){1'b0}}, size};
    exp_mask = '0;
    for (int i = 0; i < int'(nbytes); i++) begin
      a = {2'b00, lb} + (PTR_BITS+2)'(i);
      exp_mask[i] = (a < lo) || (a >= hi);
    end
    exp_in = (exp_mask == '0);
    checks++;
    if (in_bounds !== exp_in || oob_mask !== exp_mask) begin
      failures++;
      $display("FAIL %s: base=%h size=%0d lb=%h n=%0d -> in=%b mask=%h, expected %b %h",
               what, base, size, lb, nbytes, in_bounds, oob_mask, exp_in, exp_mask);
    end
  endtask

  initial begin
    // The worked example: 10-byte object, 2-byte load at offset 4.
    base = 48'h564745119020; size = 10; lb = 64'h564745119024; nbytes = 2;
    check("example in bounds");
    lb = 64'h564745119028; check("last two bytes");
    lb = 64'h564745119029; check("one byte past the end");
    lb = 64'h56474511901f; check("one byte before the base");
    size = 25'h1000000; lb = 64'h564745119020 + 64'hfffff8; nbytes = 8; check("full 16 MiB object, last word");
    base = 48'h8; size = 16; lb = 64'hfffffffffffffffc; nbytes = 16; check("access wrapping address 0");

    for (int i = 0; i < 20000; i++) begin
      base   = {16'($urandom), 32'($urandom)};
      size   = obj_size_t'($urandom_range(1, (i % 3 == 0) ? 100 : 5000));
      nbytes = nbytes_t'($urandom_range(1, MAX_ACCESS_BYTES));
      sel = $urandom_range(0, 3);
      unique case (sel)
        0: lb = ptr_t'(base) + ptr_t'($urandom_range(0, 32'(size)));
        1: lb = ptr_t'(base) + ptr_t'(size) - ptr_t'($urandom_range(0, 70));
        2: lb = ptr_t'(base) - ptr_t'($urandom_range(0, 70));
        default: lb = {$urandom, $urandom};
      endcase
      check("random");
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
