// greenfat_unit -- hardware decoding and checking of Fully Randomized Pointers.
//
// Sits between the core's address generation and the L1 data cache. Every
// load/store pointer is tested: if its upper 16 bits are all zero it is a
// plain address and passes through (after a check that it does not reach into
// the protected region holding the heap and the object map). Otherwise it is
// an FRP: its 40-bit id is looked up in the GreenFat cache, the metadata found
// there turns the pointer into a machine address (frp_translate), and the
// access is checked against the object's bounds (frp_bounds_check) before the
// L1-D access may start.
//
//   hit, in bounds      -> addr, FAULT_NONE
//   hit, out of bounds  -> write: FAULT_BOUNDS; read: FAULT_NONE with the
//                          out-of-bounds bytes flagged in zero_mask (or
//                          FAULT_BOUNDS when OOB_READ_FAULT is set)
//   miss                -> the entry is fetched from the object map through
//                          map_req/map_rsp (greenfat_miss_handler), put in the
//                          cache, and the access answered from it; if the map
//                          has no such id (freed object, forged pointer):
//                          FAULT_UNMAPPED
//
// The malloc/free wrappers keep the cache coherent with the map through
// mgmt_*: MGMT_INSERT after an allocation installs the entry (or overwrites a
// cached copy), MGMT_INVALIDATE after a free removes it. A management request
// first looks the id up, then writes the way it found.
//
// Timing. Requests use a valid/ready handshake; responses are a one-cycle
// rsp_valid pulse in request order (the L1-D side does not stall). A hit or a
// plain address answers in the second cycle after acceptance, one access per
// cycle. On a miss the missing access is held, a younger access already in
// the pipeline is squashed and replayed after the fill, and no new access is
// taken until then; the miss costs the map latency plus about four cycles.
// Management requests wait until the pipeline is empty and take four cycles.
// After reset the unit is not ready for SETS cycles while the cache clears.
//
// From the paper: the encoded test, the cache geometry and latency, the
// sequence lookup -> (miss: read M, fill) -> check -> L1-D or exception, the
// abort on unmapped ids and out-of-bounds writes, zeroing of out-of-bounds read
// bytes, and keeping the heap and M out of reach of plain addresses. This
// design's own: the handshakes, passing plain addresses through the same
// two-cycle pipeline, in-order blocking miss handling with replay, the
// management interface, and the protected region given as two address
// inputs.
module greenfat_unit
  import frp_pkg::*;
#(
  parameter int unsigned ENTRIES        = 4096,
  parameter int unsigned WAYS           = 8,
  parameter bit          OOB_READ_FAULT = 1'b0
)(
  input  logic        clk,
  input  logic        rst_n,
  // accesses from the core
  input  logic        req_valid,
  output logic        req_ready,
  input  access_req_t req,
  output logic        rsp_valid,
  output access_rsp_t rsp,
  // allocator wrappers
  input  logic        mgmt_valid,
  output logic        mgmt_ready,
  input  mgmt_req_t   mgmt,
  // object map in memory (through the LLC)
  output logic        map_req_valid,
  input  logic        map_req_ready,
  output obj_id_t     map_req_id,
  input  logic        map_rsp_valid,
  input  logic        map_rsp_found,
  input  obj_meta_t   map_rsp_meta,
  // protected region [prot_lo, prot_hi): unreachable with plain addresses
  input  ptr_t        prot_lo,
  input  ptr_t        prot_hi
);
  localparam int unsigned WAY_BITS = $clog2(WAYS);

  typedef enum logic [1:0] {RUN, MISS, REPLAY} state_e;

  typedef struct packed {
    logic        valid;
    logic        is_mgmt;
    logic        enc;
    access_req_t req;
  } stage_t;

  state_e      state;
  stage_t      p1, p2;
  mgmt_req_t   mg_q;
  access_req_t miss_req, replay_req;
  logic        replay_valid;

  // -------------------------------------------------------------- cache
  logic      c_ready, c_op_valid, c_rsp_valid, c_rsp_hit;
  cache_op_e c_op;
  obj_id_t   c_op_id, c_rsp_id;
  logic [WAY_BITS-1:0] c_op_way, c_rsp_way;
  obj_meta_t c_op_meta, c_rsp_meta;

  greenfat_cache #(.ENTRIES(ENTRIES), .WAYS(WAYS)) u_cache (
    .clk, .rst_n,
    .ready    (c_ready),
    .op_valid (c_op_valid),
    .op       (c_op),
    .op_id    (c_op_id),
    .op_way   (c_op_way),
    .op_meta  (c_op_meta),
    .rsp_valid(c_rsp_valid),
    .rsp_id   (c_rsp_id),
    .rsp_hit  (c_rsp_hit),
    .rsp_way  (c_rsp_way),
    .rsp_meta (c_rsp_meta)
  );

  // ------------------------------------------------------ miss handler
  logic      mh_start, mh_busy, mh_done, mh_found;
  obj_id_t   mh_id;
  obj_meta_t mh_meta;

  greenfat_miss_handler u_miss (
    .clk, .rst_n,
    .start        (mh_start),
    .start_id     (p2.req.ptr[PTR_BITS-1 -: ID_BITS]),
    .busy         (mh_busy),
    .map_req_valid,
    .map_req_ready,
    .map_req_id,
    .map_rsp_valid,
    .map_rsp_found,
    .map_rsp_meta,
    .done         (mh_done),
    .found        (mh_found),
    .id           (mh_id),
    .meta         (mh_meta)
  );

  // ------------------------------------------------------ control
  logic p2_access, miss_now, mgmt_wb, accept_req, accept_mgmt, inject;
  logic req_enc;

  always_comb begin
    req_enc   = is_encoded(req.ptr[PTR_BITS-1 -: ENC_FLAG_BITS]);
    p2_access = p2.valid && !p2.is_mgmt;
    miss_now  = p2_access && p2.enc && !c_rsp_hit;
    mgmt_wb   = p2.valid && p2.is_mgmt;
    inject    = (state == REPLAY);

    req_ready  = (state == RUN) && c_ready && !mgmt_valid && !miss_now
                 && !(p1.valid && p1.is_mgmt) && !mgmt_wb;
    mgmt_ready = (state == RUN) && c_ready && !p1.valid && !p2.valid;
    accept_req  = req_valid && req_ready;
    accept_mgmt = mgmt_valid && mgmt_ready;
    mh_start    = miss_now;

    // One cache operation per cycle; the conditions below are exclusive.
    c_op_valid = 1'b0;
    c_op       = COP_LOOKUP;
    c_op_id    = req.ptr[PTR_BITS-1 -: ID_BITS];
    c_op_way   = c_rsp_way;
    c_op_meta  = mg_q.meta;
    if (mgmt_wb) begin
      c_op_id    = mg_q.id;
      c_op_valid = (mg_q.op == MGMT_INSERT) || c_rsp_hit;
      c_op       = (mg_q.op == MGMT_INVALIDATE) ? COP_INVAL :
                   (c_rsp_hit ? COP_UPDATE : COP_FILL);
    end else if (state == MISS) begin
      c_op_valid = mh_done && mh_found;
      c_op       = COP_FILL;
      c_op_id    = mh_id;
      c_op_meta  = mh_meta;
    end else if (inject) begin
      c_op_valid = is_encoded(replay_req.ptr[PTR_BITS-1 -: ENC_FLAG_BITS]);
      c_op_id    = replay_req.ptr[PTR_BITS-1 -: ID_BITS];
    end else if (accept_mgmt) begin
      c_op_valid = 1'b1;
      c_op_id    = mgmt.id;
    end else if (accept_req) begin
      c_op_valid = req_enc;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= RUN;
      p1           <= '0;
      p2           <= '0;
      mg_q         <= '0;
      miss_req     <= '0;
      replay_req   <= '0;
      replay_valid <= 1'b0;
    end else begin
      // stage 1
      if (inject) begin
        p1 <= '{valid: 1'b1, is_mgmt: 1'b0,
                enc: is_encoded(replay_req.ptr[PTR_BITS-1 -: ENC_FLAG_BITS]), req: replay_req};
      end else if (accept_mgmt) begin
        p1 <= '{valid: 1'b1, is_mgmt: 1'b1, enc: 1'b1, req: '0};
      end else if (accept_req) begin
        p1 <= '{valid: 1'b1, is_mgmt: 1'b0, enc: req_enc, req: req};
      end else begin
        p1.valid <= 1'b0;
      end
      if (accept_mgmt) mg_q <= mgmt;

      // stage 2; a miss squashes the access behind it
      if (miss_now) begin
        p2.valid     <= 1'b0;
        miss_req     <= p2.req;
        replay_valid <= p1.valid;
        replay_req   <= p1.req;
      end else begin
        p2 <= p1;
      end

      unique case (state)
        RUN:    if (miss_now) state <= MISS;
        MISS:   if (mh_done) state <= replay_valid ? REPLAY : RUN;
        REPLAY: begin
          state        <= RUN;
          replay_valid <= 1'b0;
        end
        default: state <= RUN;
      endcase
    end
  end

  // ------------------------------------------- decode, check, respond
  access_req_t r;
  obj_meta_t   m;
  logic        r_enc, r_mapped;
  ptr_t        tr_addr;
  logic signed [OFFSET_BITS+1:0] tr_rel;
  logic        in_bounds;
  byte_mask_t  oob_mask;

  always_comb begin
    if (state == MISS) begin
      r        = miss_req;
      m        = mh_meta;
      r_enc    = 1'b1;
      r_mapped = mh_found;
    end else begin
      r        = p2.req;
      m        = c_rsp_meta;
      r_enc    = p2.enc;
      r_mapped = c_rsp_hit;
    end
  end

  frp_translate u_translate (
    .ptr  (r.ptr),
    .zero (m.zero),
    .base (m.base),
    .addr (tr_addr),
    .rel  (tr_rel)
  );

  frp_bounds_check u_check (
    .base      (m.base),
    .size      (m.size),
    .lb        (tr_addr),
    .nbytes    (r.nbytes),
    .in_bounds (in_bounds),
    .oob_mask  (oob_mask)
  );

  logic [PTR_BITS+1:0] plain_end;
  logic                prot_hit;

  always_comb begin
    plain_end = {2'b00, r.ptr} + {{(PTR_BITS-NBYTES_BITS+2){1'b0}}, r.nbytes};
    prot_hit  = ({2'b00, r.ptr} < {2'b00, prot_hi}) && (plain_end > {2'b00, prot_lo});

    rsp_valid     = (p2_access && !miss_now) || (state == MISS && mh_done);
    rsp.encoded   = r_enc;
    rsp.zero_mask = '0;
    if (!r_enc) begin
      rsp.addr  = r.ptr;
      rsp.fault = prot_hit ? FAULT_PROTECTED : FAULT_NONE;
    end else if (!r_mapped) begin
      rsp.addr  = r.ptr;
      rsp.fault = FAULT_UNMAPPED;
    end else begin
      rsp.addr = tr_addr;
      if (in_bounds) begin
        rsp.fault = FAULT_NONE;
      end else if (r.write || OOB_READ_FAULT) begin
        rsp.fault = FAULT_BOUNDS;
      end else begin
        rsp.fault     = FAULT_NONE;
        rsp.zero_mask = oob_mask;
      end
    end
  end

  // ------------------------------------------------------- assertions
  logic        stalled_q;
  access_req_t stalled_req_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stalled_q     <= 1'b0;
      stalled_req_q <= '0;
    end else begin
      stalled_q     <= req_valid && !req_ready;
      stalled_req_q <= req;
    end
  end

  // Checked on clock edges outside reset; rst_n is used only as the
  // asynchronous reset here, as in the flops above.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
    end else begin
      // valid/ready: a request that was not taken stays up, unchanged.
      if (stalled_q) a_req_held: assert (req_valid && req == stalled_req_q)
        else $error("access request dropped or changed while stalled");
      if (req_valid) a_req_size: assert (req.nbytes != '0 && req.nbytes <= nbytes_t'(MAX_ACCESS_BYTES))
        else $error("access size out of range");
      if (state == MISS) a_miss_empty: assert (!p2.valid)
        else $error("pipeline not drained during a miss");
    end
  end

  // tr_rel is the same offset as tr_addr - base; it is kept for debug views.
  logic unused_ok;
  assign unused_ok = &{1'b0, tr_rel, mh_busy, c_rsp_valid, c_rsp_id};

endmodule
