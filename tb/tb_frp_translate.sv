// tb_frp_translate -- self-checking test of the FRP address translation.
//
// Checks the worked example of the design (a 2-byte load through
// 0x2(%rax,%rbx,2) with %rax = 0xb5da178f9e406fb0, %rbx = 12345 on an object
// whose encoded base is 0xb5da178f9e40d020 and machine base
// 0x0000564745119020) and then random pointers against a reference computed
// here as base + (offset - zero) in 64-bit arithmetic.
module tb_frp_translate;
  import frp_pkg::*;

  ptr_t      ptr, addr;
  offset_t   zero;
  vaddr_t    base;
  logic signed [OFFSET_BITS+1:0] rel;
  int checks = 0, failures = 0;
  logic clk = 0;
  int   cycles = 0;

  frp_translate dut (.ptr, .zero, .base, .addr, .rel);

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

  task automatic check(ptr_t exp_addr, longint exp_rel, string what);
    #1;
    checks++;
    if (addr !== exp_addr || longint'(rel) != exp_rel) begin
      failures++;
      $display("FAIL %s: ptr=%h zero=%h base=%h -> addr=%h rel=%0d, expected %h %0d",
               what, ptr, zero, base, addr, rel, exp_addr, exp_rel);
    end
  endtask

  initial begin
    ptr_t rax, rbx, lea;
    rax = 64'hb5da178f9e406fb0;
    rbx = 64'd12345;
    lea = 64'h2 + rax + 2 * rbx;
    checks++;
    if (lea != 64'hb5da178f9e40d024) begin
      failures++;
      $display("FAIL example address generation %h", lea);
    end
    ptr  = lea;
    zero = 24'h40d020;
    base = 48'h564745119020;
    check(64'h0000564745119024, 4, "worked example");

    for (int i = 0; i < 20000; i++) begin
      longint d;
      ptr  = {$urandom, $urandom};
      zero = offset_t'($urandom);
      base = {16'($urandom), 32'($urandom)};
      if (i % 4 == 0) zero = ptr[OFFSET_BITS-1:0] - offset_t'($urandom_range(0, 100));
      d = longint'(ptr[OFFSET_BITS-1:0]) - longint'(zero);
      check(ptr_t'(longint'(base) + d), d, "random");
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
