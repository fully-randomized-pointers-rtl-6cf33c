// tb_greenfat_spec_objects -- the object populations of the SPEC CPU2006
// representative regions, run through the GreenFat unit at the four cache
// sizes evaluated for it (4096, 1024, 512 and 128 entries, all 8-way).
//
// For each benchmark the paper lists the number of distinct heap objects
// touched and their mean size. This testbench allocates that many objects of
// that (mean) size, each with a fresh random id and a random zero offset,
// announces every one to the unit with MGMT_INSERT as the malloc wrapper
// would, then issues ACCESSES 8-byte loads and stores into them, and finally
// frees them all with MGMT_INVALIDATE. Objects larger than the 16 MiB the
// 24-bit offset field can address cannot be encoded; such a benchmark is
// reported and skipped (its population cannot be represented).
//
// The access stream is this testbench's own, since the paper gives only
// counts: runs of 1..32 consecutive words in one object, the next object
// being one of the 64 most recently used with probability 1/2 and any object
// otherwise. The four cache sizes run side by side on identical streams
// (same deterministic generator, same ids), each against its own object map
// model answering after 20 cycles (the LLC latency of the evaluated system).
//
// Checked: every response (machine address, no fault, no zeroed bytes) and
// that, per benchmark, a larger cache never misses more than a smaller one
// (true for LRU with the same ways and nested set index). Printed: the miss
// rate of each benchmark at each size. These miss rates come from the
// synthetic stream and are not expected to match the paper's measured ones;
// the object counts and sizes are the paper's, scaled by nothing.
module tb_greenfat_spec_objects;
  import frp_pkg::*;

  localparam int NB       = 10;
  localparam int NCFG     = 4;
  localparam int ACCESSES = 20000;
  localparam int unsigned CFG_ENTRIES [NCFG] = '{4096, 1024, 512, 128};

  // Count and mean object size (mean KiB x 1024, rounded) per benchmark.
  localparam int BENCH_COUNT [NB] = '{7, 8901, 3, 40, 8, 1, 1164, 2, 192298, 66444};
  localparam longint BENCH_SIZE [NB] = '{7505715, 2560, 195275571, 12081664, 1523302,
                                         8389632, 1843, 53601075, 512, 614};
  localparam string BENCH_NAME [NB] = '{"401.bzip2", "403.gcc", "429.mcf", "433.milc",
                                        "445.gobmk", "462.libquantum", "464.h264ref",
                                        "470.lbm", "473.astar", "483.xalancbmk"};

  logic clk = 0, rst_n = 0;
  int   checks = 0, failures = 0, cycle = 0;

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL @%0d %s", cycle, msg);
  endtask

  always #5 clk = ~clk;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
  end

  for (genvar g = 0; g < NCFG; g++) begin : cfg
    logic        req_valid, req_ready, rsp_valid, mgmt_valid, mgmt_ready;
    access_req_t req;
    access_rsp_t rsp;
    mgmt_req_t   mgmt;
    logic        map_req_valid, map_req_ready, map_rsp_valid, map_rsp_found;
    obj_id_t     map_req_id;
    obj_meta_t   map_rsp_meta;

    greenfat_unit #(.ENTRIES(CFG_ENTRIES[g])) dut (
      .clk, .rst_n, .req_valid, .req_ready, .req, .rsp_valid, .rsp,
      .mgmt_valid, .mgmt_ready, .mgmt,
      .map_req_valid, .map_req_ready, .map_req_id, .map_rsp_valid, .map_rsp_found,
      .map_rsp_meta, .prot_lo('0), .prot_hi('0));

    // identical deterministic stream in every configuration (xorshift64)
    longint unsigned rng;
    function automatic longint unsigned rnd();
      rng = rng ^ (rng << 13);
      rng = rng ^ (rng >> 7);
      rng = rng ^ (rng << 17);
      return rng;
    endfunction

    obj_meta_t   mmap [obj_id_t];
    access_rsp_t expq [$];
    int          misses [NB];
    int          skipped [NB];
    logic        finished;
    int          bench;

    // object map in memory: fixed 20-cycle answer
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
          repeat (19) @(negedge clk);
          map_rsp_valid = 1;
          map_rsp_found = mmap.exists(rid);
          map_rsp_meta  = mmap.exists(rid) ? mmap[rid] : '0;
          @(negedge clk);
          map_rsp_valid = 0;
        end
      end
    end

    always @(posedge clk) begin
      if (rst_n) begin
        if (dut.miss_now) misses[bench]++;
        if (rsp_valid) begin
          checks++;
          if (expq.size() == 0) fail("response with nothing outstanding");
          else if (rsp != expq[0])
            fail($sformatf("cfg %0d: addr=%h fault=%s mask=%h enc=%b, expected %h %s %h %b",
                           g, rsp.addr, rsp.fault.name(), rsp.zero_mask, rsp.encoded,
                           expq[0].addr, expq[0].fault.name(), expq[0].zero_mask,
                           expq[0].encoded));
          if (expq.size() != 0) expq.pop_front();
        end
      end
    end

    task automatic send_mgmt(mgmt_op_e op, obj_id_t id, obj_meta_t meta);
      @(negedge clk);
      mgmt_valid = 1; mgmt.op = op; mgmt.id = id; mgmt.meta = meta;
      do @(posedge clk); while (!mgmt_ready);
      @(negedge clk);
      mgmt_valid = 0;
    endtask

    task automatic send_req(access_req_t r, access_rsp_t e);
      @(negedge clk);
      req_valid = 1; req = r;
      do @(posedge clk); while (!req_ready);
      expq.push_back(e);
    endtask

    initial begin
      obj_id_t   ids [];
      obj_meta_t metas [];
      logic      used [obj_id_t];
      int        recent [64];
      int        nrecent, n, o, run, words;
      longint    woff;
      vaddr_t    heap;
      access_req_t r;
      access_rsp_t e;
      longint    room;
      rng = 64'h9e3779b97f4a7c15;
      finished = 0;
      bench = 0;
      req_valid = 0; req = '0; mgmt_valid = 0; mgmt = '0;
      for (int b = 0; b < NB; b++) begin
        misses[b] = 0;
        skipped[b] = 0;
      end
      @(posedge rst_n);
      while (!mgmt_ready) @(negedge clk);

      for (int b = 0; b < NB; b++) begin
        bench = b;
        if (BENCH_SIZE[b] > longint'(1) << OFFSET_BITS) begin
          skipped[b] = 1;
          continue;
        end
        // malloc of every object
        ids = new[BENCH_COUNT[b]];
        metas = new[BENCH_COUNT[b]];
        heap = 48'h1000_0000_0000;
        for (int i = 0; i < BENCH_COUNT[b]; i++) begin
          obj_id_t id;
          do id = obj_id_t'(rnd());
          while (id[39:24] == 0 || used.exists(id));
          used[id] = 1;
          metas[i].base = heap;
          metas[i].size = obj_size_t'(BENCH_SIZE[b]);
          heap += vaddr_t'(((BENCH_SIZE[b] + 15) / 16) * 16);
          room = (longint'(1) << OFFSET_BITS) - BENCH_SIZE[b] - longint'(metas[i].base[11:0]);
          metas[i].zero = offset_t'(((rnd() % longint'((room >> 12) + 1)) << 12) |
                                    longint'(metas[i].base[11:0]));
          ids[i] = id;
          mmap[id] = metas[i];
          send_mgmt(MGMT_INSERT, id, metas[i]);
        end
        // accesses
        nrecent = 0;
        n = 0;
        while (n < ACCESSES) begin
          if (nrecent > 0 && rnd() % 2 == 0) o = recent[int'(rnd() % longint'(nrecent))];
          else o = int'(rnd() % longint'(BENCH_COUNT[b]));
          if (nrecent < 64) begin
            recent[nrecent] = o;
            nrecent++;
          end else recent[int'(rnd() % 64)] = o;
          run = 1 + int'(rnd() % 32);
          words = int'(BENCH_SIZE[b] / 8);
          woff = longint'(rnd() % longint'(words));
          for (int j = 0; j < run && n < ACCESSES; j++) begin
            longint off;
            off = ((woff + longint'(j)) % longint'(words)) * 8;
            r.ptr = {ids[o], 24'(longint'(metas[o].zero) + off)};
            r.nbytes = 8;
            r.write = (rnd() % 4 == 0);
            e.addr = ptr_t'(metas[o].base) + ptr_t'(off);
            e.fault = FAULT_NONE;
            e.zero_mask = '0;
            e.encoded = 1'b1;
            send_req(r, e);
            n++;
          end
        end
        @(negedge clk);
        req_valid = 0;
        while (expq.size() != 0) @(negedge clk);
        // free of every object
        for (int i = 0; i < BENCH_COUNT[b]; i++) begin
          mmap.delete(ids[i]);
          send_mgmt(MGMT_INVALIDATE, ids[i], '0);
        end
      end
      finished = 1;
    end
  end

  initial begin
    wait (cfg[0].finished && cfg[1].finished && cfg[2].finished && cfg[3].finished);
    $display("benchmark        objects  mean_B      miss%% @4096   @1024    @512     @128");
    for (int b = 0; b < NB; b++) begin
      int m [NCFG];
      m[0] = cfg[0].misses[b]; m[1] = cfg[1].misses[b];
      m[2] = cfg[2].misses[b]; m[3] = cfg[3].misses[b];
      if (cfg[0].skipped[b] != 0)
        $display("%-16s %7d %10d   not encodable: objects exceed the 16 MiB offset field",
                 BENCH_NAME[b], BENCH_COUNT[b], BENCH_SIZE[b]);
      else
        $display("%-16s %7d %10d   %7.2f  %7.2f  %7.2f  %7.2f", BENCH_NAME[b], BENCH_COUNT[b],
                 BENCH_SIZE[b], 100.0 * m[0] / ACCESSES, 100.0 * m[1] / ACCESSES,
                 100.0 * m[2] / ACCESSES, 100.0 * m[3] / ACCESSES);
      for (int c = 1; c < NCFG; c++) begin
        checks++;
        if (m[c - 1] > m[c])
          fail($sformatf("%s: %0d entries missed %0d times, %0d entries %0d times",
                         BENCH_NAME[b], CFG_ENTRIES[c - 1], m[c - 1], CFG_ENTRIES[c], m[c]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cycle++;
    if (cycle > 20000000) begin
      fail("watchdog expired");
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end
endmodule
