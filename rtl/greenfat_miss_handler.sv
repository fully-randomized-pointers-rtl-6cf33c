// greenfat_miss_handler -- fetches an object-map entry after a cache miss.
//
// When the GreenFat cache misses, the metadata of the object must come from
// the object map M, which software keeps in ordinary memory (and which the
// last-level cache holds when it is hot). This controller sends the id to the
// memory side, waits for the entry and hands it back for the cache fill and
// for the stalled access.
//
// Protocol: start (one cycle, with start_id) while !busy. The request is
// offered on map_req_* until map_req_ready; the answer arrives later as a
// one-cycle map_rsp_valid with map_rsp_found (whether M holds the id) and
// map_rsp_meta. One cycle after that, done pulses with found/meta/id held
// stable. One miss is handled at a time; latency is that of the memory side
// plus two cycles.
//
// How M is organised in memory (hash table, tree) is not part of this block:
// the memory side answers per id. The paper says only that a miss reads M
// from DRAM through the LLC and copies the entry into the cache; the
// request/response protocol is this design's.
module greenfat_miss_handler
  import frp_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,
  input  obj_id_t   start_id,
  output logic      busy,
  output logic      map_req_valid,
  input  logic      map_req_ready,
  output obj_id_t   map_req_id,
  input  logic      map_rsp_valid,
  input  logic      map_rsp_found,
  input  obj_meta_t map_rsp_meta,
  output logic      done,
  output logic      found,
  output obj_id_t   id,
  output obj_meta_t meta
);
  typedef enum logic [1:0] {IDLE, REQ, WAIT, DONE} state_e;
  state_e state;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE;
      found <= 1'b0;
      id    <= '0;
      meta  <= '0;
    end else begin
      unique case (state)
        IDLE: if (start) begin
          state <= REQ;
          id    <= start_id;
        end
        REQ:  if (map_req_ready) state <= WAIT;
        WAIT: if (map_rsp_valid) begin
          state <= DONE;
          found <= map_rsp_found;
          meta  <= map_rsp_meta;
        end
        DONE: state <= IDLE;
        default: state <= IDLE;
      endcase
    end
  end

  assign busy          = (state != IDLE);
  assign map_req_valid = (state == REQ);
  assign map_req_id    = id;
  assign done          = (state == DONE);

  // Checked on clock edges outside reset; rst_n is used only as the
  // asynchronous reset here, as in the flops above.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
    end else begin
      if (start) a_start_idle: assert (state == IDLE)
        else $error("miss started while busy");
      if (map_rsp_valid) a_rsp_expected: assert (state == WAIT)
        else $error("object-map response without a request");
    end
  end
endmodule
