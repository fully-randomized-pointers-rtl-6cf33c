// tb_frp_attacks -- the overflow, underflow and use-after-free attack loops,
// run against the GreenFat unit at its default size (4096-entry, 8-way).
//
// Each loop tries N = 10,000 times to reach a victim object q through a
// pointer p that belongs to another object, the way a memory-safety attack
// benchmark does:
//  * overflow:   p, q adjacent word-sized objects; attack(p + 8*(1+i)),
//  * underflow:  q placed just below p;            attack(p - 8*(1+i)),
//  * use after free: free(p); then repeatedly q = malloc(n) at the freed
//    address and attack(p).
// Overflow and underflow attacks alternate between 8-byte writes and 8-byte
// reads; use-after-free attacks also alternate. An attack is blocked when the
// access faults or, for a read, when every byte comes back as zero; the
// testbench also checks every response exactly against a reference decode of
// the object map and counts how many attempts got through (must be none) and
// which way each was stopped. The attack loops are the paper's; the 8-byte
// objects, the alternation of reads and writes, the fixed 30-cycle object-map
// latency and the placement of q at the exact address an attacker wants are
// this testbench's choices. One access is outstanding at a time.
module tb_frp_attacks;
  import frp_pkg::*;

  localparam int   N       = 10000;
  localparam ptr_t PROT_LO = 64'h0000_5600_0000_0000;
  localparam ptr_t PROT_HI = 64'h0000_5800_0000_0000;

  logic clk = 0, rst_n = 0;
  logic req_valid, req_ready, rsp_valid, mgmt_valid, mgmt_ready;
  access_req_t req;
  access_rsp_t rsp;
  mgmt_req_t   mgmt;
  logic        map_req_valid, map_req_ready, map_rsp_valid, map_rsp_found;
  obj_id_t     map_req_id;
  obj_meta_t   map_rsp_meta;

  greenfat_unit dut (
    .clk, .rst_n, .req_valid, .req_ready, .req, .rsp_valid, .rsp,
    .mgmt_valid, .mgmt_ready, .mgmt,
    .map_req_valid, .map_req_ready, .map_req_id, .map_rsp_valid, .map_rsp_found,
    .map_rsp_meta, .prot_lo(PROT_LO), .prot_hi(PROT_HI));

  int checks = 0, failures = 0, cycle = 0;

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL @%0d %s", cycle, msg);
  endtask

  always #5 clk = ~clk;

  always @(posedge clk) begin
    cycle++;
    if (cycle > 3000000) begin
      fail("watchdog expired");
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  // ------------------------------------------------- object map (memory)
  obj_meta_t mmap [obj_id_t];
  logic      used_id [obj_id_t];

  initial begin
    map_req_ready = 0; map_rsp_valid = 0; map_rsp_found = 0; map_rsp_meta = '0;
    forever begin
      @(negedge clk);
      if (map_req_valid) begin
        obj_id_t rid;
        map_req_ready = 1;
        rid = map_req_id;
        @(negedge clk);
        map_req_ready = 0;
        repeat (29) @(negedge clk);
        map_rsp_valid = 1;
        map_rsp_found = mmap.exists(rid);
        map_rsp_meta  = mmap.exists(rid) ? mmap[rid] : '0;
        @(negedge clk);
        map_rsp_valid = 0;
      end
    end
  end

  // ----------------------------------------------------------- allocator
  function automatic obj_id_t new_id();
    obj_id_t id;
    do id = {$urandom, 8'($urandom)};
    while (id[39:24] == 0 || used_id.exists(id));
    return id;
  endfunction

  task automatic send_mgmt(mgmt_op_e op, obj_id_t id, obj_meta_t meta);
    @(negedge clk);
    mgmt_valid = 1; mgmt.op = op; mgmt.id = id; mgmt.meta = meta;
    do @(posedge clk); while (!mgmt_ready);
    @(negedge clk);
    mgmt_valid = 0;
  endtask

  // malloc: fresh id, random zero offset keeping the page offset of base.
  task automatic malloc(input vaddr_t base, input obj_size_t size, output ptr_t p);
    obj_id_t   id;
    obj_meta_t m;
    id = new_id();
    m.base = base;
    m.size = size;
    m.zero = offset_t'(($urandom_range(0, ((1 << 24) - 4096) >> 12) << 12) | int'(base[11:0]));
    used_id[id] = 1;
    mmap[id] = m;
    send_mgmt(MGMT_INSERT, id, m);
    p = {id, m.zero};
  endtask

  task automatic free(ptr_t p);
    mmap.delete(p[63:24]);
    send_mgmt(MGMT_INVALIDATE, p[63:24], '0);
  endtask

  // ----------------------------------------------------------- reference
  function automatic access_rsp_t reference(access_req_t r);
    access_rsp_t e;
    obj_meta_t   m;
    longint      rel;
    logic        any;
    e.encoded   = |r.ptr[63:48];
    e.addr      = r.ptr;
    e.zero_mask = '0;
    e.fault     = FAULT_NONE;
    if (!e.encoded) begin
      if (r.ptr < PROT_HI && r.ptr + ptr_t'(r.nbytes) > PROT_LO) e.fault = FAULT_PROTECTED;
    end else if (!mmap.exists(r.ptr[63:24])) begin
      e.fault = FAULT_UNMAPPED;
    end else begin
      m = mmap[r.ptr[63:24]];
      rel = longint'(r.ptr[23:0]) - longint'(m.zero);
      any = 0;
      e.addr = ptr_t'(longint'(m.base) + rel);
      for (int i = 0; i < int'(r.nbytes); i++)
        if (rel + i < 0 || rel + i >= longint'(m.size)) begin
          e.zero_mask[i] = 1;
          any = 1;
        end
      if (any && r.write) begin
        e.fault = FAULT_BOUNDS;
        e.zero_mask = '0;
      end
    end
    return e;
  endfunction

  // ------------------------------------------------------------- access
  int n_through, n_fault_bounds, n_fault_unmapped, n_zeroed, n_legit;

  task automatic access(input ptr_t ptr, input logic write, output access_rsp_t got);
    access_req_t r;
    access_rsp_t e;
    r.ptr = ptr; r.nbytes = 8; r.write = write;
    e = reference(r);
    @(negedge clk);
    req_valid = 1; req = r;
    do @(posedge clk); while (!req_ready);
    @(negedge clk);
    req_valid = 0;
    while (!rsp_valid) @(posedge clk);
    got = rsp;
    checks++;
    if (got != e)
      fail($sformatf("ptr %h: addr=%h fault=%s mask=%h, expected %h %s %h", ptr, got.addr,
                     got.fault.name(), got.zero_mask, e.addr, e.fault.name(), e.zero_mask));
  endtask

  // An attack reaches q when it completes without a fault and at least one
  // byte it touches is a real byte of q's storage.
  task automatic attack(input string name, input ptr_t p, input vaddr_t q_base,
                        input obj_size_t q_size, input logic write);
    access_rsp_t got;
    logic        reached;
    access(p, write, got);
    reached = 0;
    if (got.fault == FAULT_NONE)
      for (int b = 0; b < 8; b++)
        if (!got.zero_mask[b] && got.addr + ptr_t'(b) >= ptr_t'(q_base) &&
            got.addr + ptr_t'(b) < ptr_t'(q_base) + ptr_t'(q_size))
          reached = 1;
    checks++;
    if (reached) begin
      n_through++;
      fail($sformatf("%s attack through %h reached the victim", name, p));
    end else if (got.fault == FAULT_BOUNDS) n_fault_bounds++;
    else if (got.fault == FAULT_UNMAPPED) n_fault_unmapped++;
    else n_zeroed++;
  endtask

  initial begin
    ptr_t        p, q;
    access_rsp_t got;
    vaddr_t      heap;
    req_valid = 0; req = '0; mgmt_valid = 0; mgmt = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (!mgmt_ready) @(negedge clk);
    heap = 48'h5647_4512_0000;

    // Overflow: q directly after p.
    malloc(heap, 8, p);
    malloc(heap + 8, 8, q);
    access(p, 1'b1, got);
    if (got.fault == FAULT_NONE && got.zero_mask == '0) n_legit++;
    for (int i = 0; i < N; i++)
      attack("overflow", p + ptr_t'(8 * (1 + i)), heap + 8, 8, 1'(i % 2 == 0));

    // Underflow: q directly before p.
    heap += 48'h10_0000;
    malloc(heap + 48'h2_0000, 8, p);
    malloc(heap + 48'h2_0000 - 8, 8, q);
    access(q, 1'b0, got);
    if (got.fault == FAULT_NONE && got.zero_mask == '0) n_legit++;
    for (int i = 0; i < N; i++)
      attack("underflow", p - ptr_t'(8 * (1 + i)), heap + 48'h2_0000 - 8, 8, 1'(i % 2 == 0));

    // Use after free: every new object lands on the freed storage.
    heap += 48'h10_0000;
    malloc(heap, 8, p);
    free(p);
    for (int i = 0; i < N; i++) begin
      malloc(heap, 8, q);
      attack("use-after-free", p, heap, 8, 1'(i % 2 == 0));
      if (i % 1000 == 0) begin
        access(q, 1'b1, got);   // the new owner still works
        if (got.fault == FAULT_NONE && got.zero_mask == '0) n_legit++;
      end
      free(q);
    end

    $display("attacks=%0d through=%0d bounds_fault=%0d unmapped_fault=%0d zeroed_read=%0d legit_ok=%0d",
             3 * N, n_through, n_fault_bounds, n_fault_unmapped, n_zeroed, n_legit);
    checks++;
    if (n_fault_bounds + n_fault_unmapped + n_zeroed != 3 * N) fail("attack count mismatch");
    checks++;
    if (n_legit != 12) fail($sformatf("legitimate accesses ok=%0d, expected 12", n_legit));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
