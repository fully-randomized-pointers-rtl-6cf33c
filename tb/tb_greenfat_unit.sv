// tb_greenfat_unit -- end-to-end test of the GreenFat unit at its default size
// (4096-entry, 8-way cache).
//
// The testbench plays three parts around the unit:
//  * the allocator: mints random 40-bit ids (never reused, upper 16 pointer
//    bits non-zero), places objects on a bump heap, picks a random zero offset
//    that keeps the page offset, records M[id] and sends MGMT_INSERT; on free
//    it deletes M[id] and sends MGMT_INVALIDATE; it also re-inserts live
//    objects with a new size (MGMT_INSERT on a cached id);
//  * the object map in memory: answers map requests after 20..80 cycles
//    (the LLC-to-DRAM range of the evaluated system) from M;
//  * the core: bursts of back-to-back accesses of every kind -- in-bounds
//    reads and writes, reads running off either end of an object, writes out
//    of bounds, use after free, forged ids, plain addresses inside and outside
//    the protected heap region.
// Every response is checked against a reference computed here from M
// (address, fault, zero mask), in order; hits and plain accesses must answer
// two cycles after acceptance. It also replays the worked example of the
// design (0xb5da178f9e40d024 -> 0x0000564745119024) and counts each mechanism
// (hit, miss+fill, eviction, replay after a squashed access, stall, unmapped
// fault, bounds fault, zeroed read bytes, protected-region fault, management
// update and invalidate), failing if any never happened.
module tb_greenfat_unit;
  import frp_pkg::*;

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
  int ncyc = 0;  // advanced on the falling edge, stable at rising edges

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL @%0d %s", cycle, msg);
  endtask

  always #5 clk = ~clk;
  always @(negedge clk) ncyc++;

  // ------------------------------------------------- object map (memory)
  obj_meta_t mmap [obj_id_t];
  logic      used_id [obj_id_t];

  initial begin
    map_req_ready = 0; map_rsp_valid = 0; map_rsp_found = 0; map_rsp_meta = '0;
    forever begin
      @(negedge clk);
      if (map_req_valid) begin
        obj_id_t rid;
        repeat ($urandom_range(0, 2)) @(negedge clk);
        map_req_ready = 1;
        rid = map_req_id;
        @(negedge clk);
        map_req_ready = 0;
        repeat ($urandom_range(20, 80) - 2) @(negedge clk);
        map_rsp_valid = 1;
        map_rsp_found = mmap.exists(rid);
        map_rsp_meta  = mmap.exists(rid) ? mmap[rid] : obj_meta_t'({$urandom, $urandom, $urandom, $urandom});
        @(negedge clk);
        map_rsp_valid = 0;
      end
    end
  end

  // ------------------------------------------------------------ objects
  typedef struct {
    obj_id_t   id;
    obj_meta_t meta;
    logic      live;
  } obj_t;
  obj_t objs[$];
  ptr_t heap_top = 64'h0000_5647_4512_0000;

  // ------------------------------------------------- expected responses
  typedef struct {
    access_rsp_t rsp;
    int          accepted;
  } exp_t;
  exp_t expq[$];

  function automatic access_rsp_t reference(access_req_t r);
    access_rsp_t e;
    obj_id_t id;
    e.encoded   = |r.ptr[63:48];
    e.addr      = r.ptr;
    e.zero_mask = '0;
    e.fault     = FAULT_NONE;
    id = r.ptr[63:24];
    if (!e.encoded) begin
      if (r.ptr < PROT_HI && r.ptr + ptr_t'(r.nbytes) > PROT_LO) e.fault = FAULT_PROTECTED;
    end else if (!mmap.exists(id)) begin
      e.fault = FAULT_UNMAPPED;
    end else begin
      obj_meta_t m = mmap[id];
      longint rel = longint'(r.ptr[23:0]) - longint'(m.zero);
      logic any = 0;
      e.addr = ptr_t'(longint'(m.base) + rel);
      for (int i = 0; i < int'(r.nbytes); i++) begin
        if (rel + i < 0 || rel + i >= longint'(m.size)) begin
          e.zero_mask[i] = 1;
          any = 1;
        end
      end
      if (any && r.write) begin
        e.fault = FAULT_BOUNDS;
        e.zero_mask = '0;
      end
    end
    return e;
  endfunction

  // ---------------------------------------------- mechanism counters
  int n_hit, n_miss, n_fill, n_evict, n_replay, n_stall, n_unmapped, n_bounds;
  int n_zeroed, n_protected, n_plain, n_upd, n_inval, n_lat2, n_example;
  int last_miss = -1;

  always @(posedge clk) begin
    if (rst_n) begin
      if (dut.p2_access && dut.p2.enc && dut.c_rsp_hit) n_hit++;
      if (dut.miss_now) begin n_miss++; last_miss = ncyc; end
      if (dut.c_op_valid && dut.c_op == COP_FILL && dut.state == dut.MISS) n_fill++;
      if (dut.u_cache.s1_valid && dut.u_cache.s1_op == COP_FILL && dut.u_cache.s1_state.valid == '1) n_evict++;
      if (dut.state == dut.REPLAY) n_replay++;
      if (req_valid && !req_ready && mgmt_ready == 0 && dut.state != dut.RUN) n_stall++;
      if (dut.mgmt_wb && dut.c_rsp_hit && dut.mg_q.op == MGMT_INSERT) n_upd++;
      if (dut.mgmt_wb && dut.c_rsp_hit && dut.mg_q.op == MGMT_INVALIDATE) n_inval++;
      if (rsp_valid) begin
        exp_t e;
        checks++;
        if (expq.size() == 0) fail("response with nothing outstanding");
        else begin
          e = expq.pop_front();
          if (rsp != e.rsp)
            fail($sformatf("rsp addr=%h fault=%s mask=%h enc=%b, expected %h %s %h %b",
                 rsp.addr, rsp.fault.name(), rsp.zero_mask, rsp.encoded,
                 e.rsp.addr, e.rsp.fault.name(), e.rsp.zero_mask, e.rsp.encoded));
          if (dut.state != dut.MISS && last_miss < e.accepted) begin
            checks++;
            n_lat2++;
            if (ncyc - e.accepted != 2) fail($sformatf("latency %0d, expected 2", ncyc - e.accepted));
          end
          unique case (rsp.fault)
            FAULT_UNMAPPED:  n_unmapped++;
            FAULT_BOUNDS:    n_bounds++;
            FAULT_PROTECTED: n_protected++;
            default: begin
              if (rsp.zero_mask != '0) n_zeroed++;
              if (!rsp.encoded) n_plain++;
            end
          endcase
        end
      end
      if (cycle > 400000) begin
        fail("watchdog expired");
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
    cycle++;
  end

  // ------------------------------------------------------------ drivers
  task automatic send_mgmt(mgmt_op_e op, obj_id_t id, obj_meta_t meta);
    @(negedge clk);
    mgmt_valid = 1; mgmt.op = op; mgmt.id = id; mgmt.meta = meta;
    do @(posedge clk); while (!mgmt_ready);
    @(negedge clk);
    mgmt_valid = 0;
  endtask

  task automatic send_req(access_req_t r);
    exp_t e;
    @(negedge clk);
    req_valid = 1; req = r;
    e.rsp = reference(r);
    do @(posedge clk); while (!req_ready);
    e.accepted = ncyc;
    expq.push_back(e);
  endtask

  task automatic drain();
    @(negedge clk);
    req_valid = 0;
    while (expq.size() != 0) @(negedge clk);
    @(negedge clk);
  endtask

  function automatic obj_id_t new_id(int set);
    obj_id_t id;
    do begin
      id = {$urandom, 8'($urandom)};
      if (set >= 0) id[8:0] = 9'(set);
    end while (id[39:24] == 0 || used_id.exists(id));
    return id;
  endfunction

  task automatic alloc_fixed(obj_id_t id, offset_t zero, vaddr_t base, obj_size_t size);
    obj_t o;
    o.id = id; o.meta.zero = zero; o.meta.base = base; o.meta.size = size; o.live = 1;
    used_id[id] = 1;
    mmap[id] = o.meta;
    objs.push_back(o);
    send_mgmt(MGMT_INSERT, id, o.meta);
  endtask

  task automatic alloc(int set);
    obj_size_t size;
    vaddr_t    base;
    offset_t   zero;
    int        room;
    size = obj_size_t'(($urandom_range(0, 9) == 0) ? $urandom_range(1, 70000) : $urandom_range(1, 300));
    base = vaddr_t'(heap_top);
    heap_top += ((ptr_t'(size) + 15) & ~ptr_t'(15)) + 16;
    room = (1 << 24) - int'(size) - int'(base[11:0]);
    zero = offset_t'(($urandom_range(0, room >> 12) << 12) | int'(base[11:0]));
    alloc_fixed(new_id(set), zero, base, size);
  endtask

  function automatic int pick(logic live);
    int tries = 0;
    int i;
    do begin
      i = $urandom_range(0, objs.size() - 1);
      tries++;
    end while (objs[i].live != live && tries < 1000);
    return (objs[i].live == live) ? i : -1;
  endfunction

  function automatic access_req_t make_access(int kind);
    access_req_t r;
    int i;
    longint k;
    obj_t o;
    r.nbytes = nbytes_t'($urandom_range(1, 16));
    if ($urandom_range(0, 5) == 0) r.nbytes = nbytes_t'($urandom_range(1, MAX_ACCESS_BYTES));
    r.write = 1'($urandom);
    i = pick((kind == 3) ? 1'b0 : 1'b1);
    if (i < 0) begin i = 0; kind = 5; end
    o = objs[i];
    unique case (kind)
      0, 3: k = longint'($urandom_range(0, 32'(o.meta.size) - 1)) % longint'(o.meta.size);
      1: begin k = longint'(o.meta.size) - longint'($urandom_range(1, 20)); r.write = 0; end
      2: k = ($urandom_range(0, 1) == 0) ? -longint'($urandom_range(1, 20))
                                          : longint'(o.meta.size) + longint'($urandom_range(0, 20));
      default: ;
    endcase
    if (kind == 0 && k + longint'(r.nbytes) > longint'(o.meta.size))
      r.nbytes = nbytes_t'(longint'(o.meta.size) - k);
    if (r.nbytes == 0) r.nbytes = 1;
    if (kind == 2 && k < 0 && longint'(o.meta.zero) + k < 0) k = longint'(o.meta.size);
    r.ptr = {o.id, 24'(longint'(o.meta.zero) + k)};
    if (kind == 4) r.ptr = {new_id(-1), 24'($urandom)};
    if (kind == 5) r.ptr = {16'h0, 16'h7ffc, 32'($urandom)};
    if (kind == 6) r.ptr = PROT_LO + {32'h0, 32'($urandom)};
    return r;
  endfunction

  initial begin
    access_req_t r;
    req_valid = 0; req = '0; mgmt_valid = 0; mgmt = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (!mgmt_ready) @(negedge clk);

    // Worked example: 10-byte object, movzwl 0x2(%rax,%rbx,2).
    alloc_fixed(40'hb5da178f9e, 24'h40d020, 48'h564745119020, 10);
    r.ptr = 64'h2 + 64'hb5da178f9e406fb0 + 64'd2 * 64'd12345; r.nbytes = 2; r.write = 0;
    send_req(r);
    send_req(r);
    drain();
    checks++;
    if (n_hit == 0) fail("example access did not hit after insert");
    checks++;
    if (reference(r).addr != 64'h0000564745119024 || reference(r).fault != FAULT_NONE)
      fail("example decodes wrongly in the reference");
    else n_example++;

    for (int i = 0; i < 80; i++) alloc(-1);
    for (int i = 0; i < 12; i++) alloc(5);   // more objects than one set holds

    for (int round = 0; round < 60; round++) begin
      for (int a = 0; a < 40; a++) begin
        int kind;
        kind = $urandom_range(0, 9);
        if (kind > 6) kind = 0;
        // every fourth round walks the crowded set 5 to force evictions
        if (round % 4 == 1 && a < 24) begin
          r = make_access(0);
          r.ptr = {objs[81 + (a % 12)].id, 24'(objs[81 + (a % 12)].meta.zero)};
          r.nbytes = 1;
          send_req(r);
        end else begin
          send_req(make_access(kind));
        end
        if ($urandom_range(0, 4) == 0) begin
          @(negedge clk);
          req_valid = 0;
        end
      end
      drain();
      // allocator activity between bursts
      repeat (3) begin
        int i;
        i = pick(1'b1);
        if (i > 0 && i < 81) begin
          objs[i].live = 0;
          mmap.delete(objs[i].id);
          send_mgmt(MGMT_INVALIDATE, objs[i].id, '0);
        end
      end
      repeat (3) alloc(-1);
      begin
        int i;
        i = pick(1'b1);
        if (i > 0 && i < 81) begin
          objs[i].meta.size = obj_size_t'($urandom_range(1, 32'(objs[i].meta.size)));
          mmap[objs[i].id] = objs[i].meta;
          send_mgmt(MGMT_INSERT, objs[i].id, objs[i].meta);
        end
      end
    end

    $display("hit=%0d miss=%0d fill=%0d evict=%0d replay=%0d stall=%0d unmapped=%0d bounds=%0d zeroed=%0d protected=%0d plain=%0d mgmt_update=%0d mgmt_inval=%0d lat2=%0d example=%0d",
             n_hit, n_miss, n_fill, n_evict, n_replay, n_stall, n_unmapped, n_bounds, n_zeroed,
             n_protected, n_plain, n_upd, n_inval, n_lat2, n_example);
    begin
      int cnt [15];
      cnt = '{n_hit, n_miss, n_fill, n_evict, n_replay, n_stall, n_unmapped, n_bounds,
                       n_zeroed, n_protected, n_plain, n_upd, n_inval, n_lat2, n_example};
      for (int j = 0; j < 15; j++) begin
        checks++;
        if (cnt[j] == 0) fail($sformatf("mechanism %0d never happened", j));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
