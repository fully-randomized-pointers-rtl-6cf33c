// greenfat_cache -- set-associative cache from FRP id to object metadata.
//
// Holds recently used M[id] entries so that most encoded accesses are decoded
// without touching memory. Default geometry is the largest configuration the
// paper evaluates: 4096 entries, 8 ways (512 sets), one 16-byte entry per line,
// true LRU replacement, 2-cycle lookup. The set is indexed by the low bits of
// the id; since ids are random, the low bits spread objects evenly. A line is
// {tag, zero, base, size}: 31 + 24 + 48 + 25 = 128 bits, i.e. the 16 bytes.
//
// Storage is RAM only: one line RAM per way, and one set-state RAM holding
// each set's valid bits and LRU ages (3 bits per way, 0 = most recently
// used). After reset the cache spends SETS cycles clearing the set-state RAM;
// ready is low until then.
//
// Every operation goes through the same two-stage pipeline, one per cycle:
//   edge t   : op sampled; the set's lines and set state are read (stage 1)
//   stage 1  : tags compared, victim chosen, new set state computed
//   edge t+1 : set state and (for FILL/UPDATE) the line written back;
//              a LOOKUP's result registered into rsp_*
// so a lookup result is valid in the second cycle after the request (2-cycle
// latency). A read in the same edge as a write-back to the same set takes the
// new value (forwarding), so back-to-back operations see each other.
//
//   COP_LOOKUP : rsp_hit/rsp_way/rsp_meta; a hit makes the way MRU
//   COP_FILL   : op_meta under op_id into the first invalid way, else the LRU
//                way; made MRU. The caller must know the id is not cached.
//   COP_UPDATE : op_meta under op_id into way op_way; made MRU
//   COP_INVAL  : clear way op_way
//
// The associativity, entry count, 16-byte line, LRU policy and 2-cycle
// latency follow the paper; index/tag split, line layout, victim choice among
// invalid ways, the init sweep and the operation interface are this design's.
module greenfat_cache
  import frp_pkg::*;
#(
  parameter int unsigned ENTRIES = 4096,
  parameter int unsigned WAYS    = 8
)(
  input  logic      clk,
  input  logic      rst_n,
  output logic      ready,       // low during the post-reset clear
  input  logic      op_valid,
  input  cache_op_e op,
  input  obj_id_t   op_id,
  input  logic [$clog2(WAYS)-1:0] op_way,
  input  obj_meta_t op_meta,
  output logic      rsp_valid,   // a LOOKUP result
  output obj_id_t   rsp_id,
  output logic      rsp_hit,
  output logic [$clog2(WAYS)-1:0] rsp_way,
  output obj_meta_t rsp_meta
);
  localparam int unsigned SETS     = ENTRIES / WAYS;
  localparam int unsigned SET_BITS = $clog2(SETS);
  localparam int unsigned TAG_BITS = ID_BITS - SET_BITS;
  localparam int unsigned WAY_BITS = $clog2(WAYS);

  typedef logic [SET_BITS-1:0] set_t;
  typedef logic [TAG_BITS-1:0] tag_t;
  typedef logic [WAY_BITS-1:0] way_t;
  typedef logic [WAYS-1:0]     way_mask_t;

  typedef struct packed {
    tag_t      tag;
    obj_meta_t meta;
  } line_t;

  typedef struct packed {
    way_mask_t                 valid;
    logic [WAYS-1:0][WAY_BITS-1:0] age;  // 0 = MRU, WAYS-1 = LRU
  } set_state_t;

  function automatic set_state_t touch(set_state_t st, way_t w);
    set_state_t r;
    r = st;
    for (int v = 0; v < WAYS; v++) begin
      if (st.age[v] < st.age[w]) r.age[v] = st.age[v] + way_t'(1);
    end
    r.age[w] = '0;
    return r;
  endfunction

  function automatic set_state_t reset_state();
    set_state_t r;
    r.valid = '0;
    for (int v = 0; v < WAYS; v++) r.age[v] = way_t'(v);
    return r;
  endfunction

  // ------------------------------------------------------- init sweep
  logic init_busy;
  set_t init_set;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_busy <= 1'b1;
      init_set  <= '0;
    end else if (init_busy) begin
      init_set <= init_set + set_t'(1);
      if (init_set == set_t'(SETS-1)) init_busy <= 1'b0;
    end
  end

  assign ready = !init_busy;

  // ------------------------------------------------------- stage 1 regs
  logic      s1_valid;
  cache_op_e s1_op;
  obj_id_t   s1_id;
  way_t      s1_opway;
  obj_meta_t s1_meta;
  line_t     s1_line [WAYS];
  set_state_t s1_state;

  set_t rd_set;
  assign rd_set = op_id[SET_BITS-1:0];

  // Write-back computed in stage 1.
  set_t       s1_set;
  tag_t       s1_tag;
  way_mask_t  s1_match;
  way_t       s1_hitway, victim_way, wb_way;
  logic       s1_hit, wb_line, wb_state;
  set_state_t wb_st;
  line_t      wb_data;

  always_comb begin
    logic found;
    s1_set    = s1_id[SET_BITS-1:0];
    s1_tag    = s1_id[ID_BITS-1:SET_BITS];
    s1_hitway = '0;
    for (int w = 0; w < WAYS; w++) begin
      s1_match[w] = s1_state.valid[w] && (s1_line[w].tag == s1_tag);
      if (s1_match[w]) s1_hitway = way_t'(w);
    end
    s1_hit = |s1_match;

    found      = 1'b0;
    victim_way = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (!found && !s1_state.valid[w]) begin
        found      = 1'b1;
        victim_way = way_t'(w);
      end
    end
    if (!found) begin
      for (int w = 0; w < WAYS; w++) begin
        if (s1_state.age[w] == way_t'(WAYS-1)) victim_way = way_t'(w);
      end
    end

    wb_way   = s1_opway;
    wb_st    = s1_state;
    wb_line  = 1'b0;
    wb_state = 1'b0;
    unique case (s1_op)
      COP_LOOKUP: begin
        wb_way   = s1_hitway;
        wb_st    = touch(s1_state, s1_hitway);
        wb_state = s1_valid && s1_hit;
      end
      COP_FILL, COP_UPDATE: begin
        wb_way   = (s1_op == COP_FILL) ? victim_way : s1_opway;
        wb_st    = touch(s1_state, wb_way);
        wb_st.valid[wb_way] = 1'b1;
        wb_line  = s1_valid;
        wb_state = s1_valid;
      end
      COP_INVAL: begin
        wb_st.valid[s1_opway] = 1'b0;
        wb_state = s1_valid;
      end
      default: ;
    endcase
    wb_data = '{tag: s1_tag, meta: s1_meta};
  end

  // ------------------------------------------------------------- RAMs
  set_state_t state_ram [SETS];
  logic       st_we;
  set_t       st_wset;
  set_state_t st_wdata;

  always_comb begin
    st_we    = init_busy || wb_state;
    st_wset  = init_busy ? init_set : s1_set;
    st_wdata = init_busy ? reset_state() : wb_st;
  end

  always_ff @(posedge clk) begin
    if (st_we) state_ram[st_wset] <= st_wdata;
    if (op_valid) s1_state <= (st_we && st_wset == rd_set) ? st_wdata : state_ram[rd_set];
  end

  for (genvar w = 0; w < WAYS; w++) begin : g_way
    line_t ram [SETS];
    logic  we;
    assign we = wb_line && (wb_way == way_t'(w));
    always_ff @(posedge clk) begin
      if (we) ram[s1_set] <= wb_data;
      if (op_valid) s1_line[w] <= (we && s1_set == rd_set) ? wb_data : ram[rd_set];
    end
  end

  always_ff @(posedge clk) begin
    if (op_valid) begin
      s1_op    <= op;
      s1_id    <= op_id;
      s1_opway <= op_way;
      s1_meta  <= op_meta;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid  <= 1'b0;
      rsp_valid <= 1'b0;
    end else begin
      s1_valid  <= op_valid;
      rsp_valid <= s1_valid && (s1_op == COP_LOOKUP);
    end
  end

  always_ff @(posedge clk) begin
    if (s1_valid && s1_op == COP_LOOKUP) begin
      rsp_id   <= s1_id;
      rsp_hit  <= s1_hit;
      rsp_way  <= s1_hitway;
      rsp_meta <= s1_line[s1_hitway].meta;
    end
  end

  // ------------------------------------------------------- assertions
  // Checked on clock edges outside reset; rst_n is used only as the
  // asynchronous reset here, as in the flops above.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
    end else begin
      // A correctly maintained cache never holds one id in two ways.
      if (s1_valid) a_single_hit: assert ((s1_match & (s1_match - way_mask_t'(1))) == '0)
        else $error("id cached in more than one way");
      // No operation is accepted while the set-state RAM is being cleared.
      if (init_busy) a_no_op_in_init: assert (!op_valid)
        else $error("operation during init sweep");
      // FILL is only for ids that are not cached.
      if (s1_valid && s1_op == COP_FILL) a_fill_absent: assert (!s1_hit)
        else $error("FILL of an id that is already cached");
    end
  end

endmodule
