// tb_greenfat_cache -- self-checking test of the GreenFat metadata cache.
//
// Runs the cache with 8 sets of 8 ways and ids drawn from a pool of 100 that
// crowd those sets, so that fills evict. A reference model written here keeps,
// per set and way, the valid bit, tag, metadata and LRU age, and predicts
// every lookup (hit, way, metadata). Operations are issued back to back in
// random order (lookups, fills of absent ids, updates and invalidations of
// cached ids), which exercises the same-set forwarding. Also checked: ready
// rises exactly SETS cycles after reset, and every lookup answers exactly two
// cycles after it was issued.
module tb_greenfat_cache;
  import frp_pkg::*;

  localparam int ENTRIES = 64;
  localparam int WAYS    = 8;
  localparam int SETS    = ENTRIES / WAYS;
  localparam int POOL    = 100;

  logic clk = 0, rst_n = 0;
  logic ready, op_valid, rsp_valid, rsp_hit;
  cache_op_e op;
  obj_id_t   op_id, rsp_id;
  logic [2:0] op_way, rsp_way;
  obj_meta_t op_meta, rsp_meta;

  greenfat_cache #(.ENTRIES(ENTRIES), .WAYS(WAYS)) dut (
    .clk, .rst_n, .ready, .op_valid, .op, .op_id, .op_way, .op_meta,
    .rsp_valid, .rsp_id, .rsp_hit, .rsp_way, .rsp_meta);

  int checks = 0, failures = 0, cycle = 0;
  int n_hit = 0, n_miss = 0, n_evict = 0, n_fwd = 0;

  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (cycle > 200000) begin
      failures++;
      $display("watchdog expired");
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  // ---------------------------------------------------- reference model
  logic      m_valid [SETS][WAYS];
  obj_id_t   m_id    [SETS][WAYS];
  obj_meta_t m_meta  [SETS][WAYS];
  int        m_age   [SETS][WAYS];
  obj_id_t   pool [POOL];

  function automatic int set_of(obj_id_t id);
    return int'(id[2:0]);
  endfunction

  function automatic int find(obj_id_t id);
    int s = set_of(id);
    for (int w = 0; w < WAYS; w++) if (m_valid[s][w] && m_id[s][w] == id) return w;
    return -1;
  endfunction

  function automatic void m_touch(int s, int w);
    for (int v = 0; v < WAYS; v++) if (m_age[s][v] < m_age[s][w]) m_age[s][v]++;
    m_age[s][w] = 0;
  endfunction

  typedef struct { obj_id_t id; logic hit; int way; obj_meta_t meta; int due; } exp_t;
  exp_t expq[$];

  // Response checker: each lookup answers exactly two cycles after issue.
  always @(posedge clk) begin
    if (rst_n && rsp_valid) begin
      exp_t e;
      checks++;
      if (expq.size() == 0) begin
        failures++;
        $display("FAIL unexpected response");
      end else begin
        e = expq.pop_front();
        if (rsp_id != e.id || rsp_hit != e.hit || cycle != e.due ||
            (e.hit && (int'(rsp_way) != e.way || rsp_meta != e.meta))) begin
          failures++;
          $display("FAIL lookup %h: hit=%b way=%0d meta=%h at %0d, expected %b %0d %h at %0d",
                   e.id, rsp_hit, rsp_way, rsp_meta, cycle, e.hit, e.way, e.meta, e.due);
        end
      end
    end
    cycle++;
  end

  int last_set = -1;

  // Inputs change on the falling edge; the cache samples them on the next
  // rising edge.
  task automatic issue(cache_op_e o, obj_id_t id, int way, obj_meta_t meta);
    int s = set_of(id);
    @(negedge clk);
    op_valid = 1'b1; op = o; op_id = id; op_way = 3'(way); op_meta = meta;
    if (s == last_set) n_fwd++;
    last_set = s;
    // advance the model in issue order
    unique case (o)
      COP_LOOKUP: begin
        exp_t e;
        int w = find(id);
        e.id = id; e.hit = (w >= 0); e.way = w; e.meta = (w >= 0) ? m_meta[s][w] : '0;
        e.due = cycle + 2;
        expq.push_back(e);
        if (w >= 0) begin m_touch(s, w); n_hit++; end else n_miss++;
      end
      COP_FILL: begin
        int v = -1;
        for (int x = 0; x < WAYS; x++) if (v < 0 && !m_valid[s][x]) v = x;
        if (v < 0) begin
          for (int x = 0; x < WAYS; x++) if (m_age[s][x] == WAYS-1) v = x;
          n_evict++;
        end
        m_valid[s][v] = 1; m_id[s][v] = id; m_meta[s][v] = meta; m_touch(s, v);
      end
      COP_UPDATE: begin
        m_valid[s][way] = 1; m_id[s][way] = id; m_meta[s][way] = meta; m_touch(s, way);
      end
      COP_INVAL: m_valid[s][way] = 0;
      default: ;
    endcase
  endtask

  task automatic idle();
    @(negedge clk);
    op_valid = 1'b0;
  endtask

  function automatic obj_meta_t rand_meta();
    obj_meta_t m;
    m.zero = offset_t'($urandom); m.base = {16'($urandom), 32'($urandom)};
    m.size = obj_size_t'($urandom);
    return m;
  endfunction

  initial begin
    op_valid = 0; op = COP_LOOKUP; op_id = '0; op_way = '0; op_meta = '0;
    for (int s = 0; s < SETS; s++)
      for (int w = 0; w < WAYS; w++) begin m_valid[s][w] = 0; m_age[s][w] = w; end
    for (int i = 0; i < POOL; i++) pool[i] = {$urandom, 8'($urandom)};
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (SETS - 1) @(posedge clk);
    #1;
    checks++;
    if (ready) begin failures++; $display("FAIL ready before %0d cycles", SETS); end
    @(posedge clk);
    #1;
    checks++;
    if (!ready) begin failures++; $display("FAIL not ready after %0d cycles", SETS); end

    for (int i = 0; i < 6000; i++) begin
      obj_id_t id;
      int w, r;
      id = pool[$urandom_range(0, POOL-1)];
      w  = find(id);
      r  = $urandom_range(0, 9);
      if (r < 5)           issue(COP_LOOKUP, id, 0, '0);
      else if (w < 0)      issue(COP_FILL, id, 0, rand_meta());
      else if (r < 8)      issue(COP_UPDATE, id, w, rand_meta());
      else                 issue(COP_INVAL, id, w, '0);
      if ($urandom_range(0, 3) == 0) idle();
    end
    idle();
    repeat (4) @(posedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d lookups unanswered", expq.size()); end
    checks++;
    if (n_hit == 0 || n_miss == 0 || n_evict == 0 || n_fwd == 0) begin
      failures++;
      $display("FAIL coverage hit=%0d miss=%0d evict=%0d same-set back-to-back=%0d", n_hit, n_miss, n_evict, n_fwd);
    end
    $display("hits=%0d misses=%0d evictions=%0d same-set back-to-back=%0d", n_hit, n_miss, n_evict, n_fwd);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
