// frp_pkg -- types and constants shared by the GreenFat pointer-decoding unit.
//
// A Fully Randomized Pointer (FRP) is an ordinary 64-bit word split into an
// object identifier (upper 40 bits) and a byte offset (lower 24 bits). The
// identifier is a random number minted per allocation; the offset starts at a
// random "zero" value whose low 12 bits equal the page offset of the object's
// real base address. A pointer is treated as encoded when any of its upper 16
// bits is set, because user-mode x86_64 addresses have those bits clear.
//
// The field widths (40/24), the 16-bit encoded test and the 48-bit virtual
// address follow the paper. The metadata layout (zero, base, size), the largest
// access (64 bytes) and the fault codes are this design's own choices.
package frp_pkg;

  localparam int unsigned PTR_BITS         = 64;
  localparam int unsigned ID_BITS          = 40;
  localparam int unsigned OFFSET_BITS      = 24;
  localparam int unsigned ENC_FLAG_BITS    = 16;
  localparam int unsigned ADDR_BITS        = 48;
  // An object may span the whole offset field, so its size needs one more bit.
  localparam int unsigned SIZE_BITS        = OFFSET_BITS + 1;
  // Largest single access (an AVX-512 load or store).
  localparam int unsigned MAX_ACCESS_BYTES = 64;
  localparam int unsigned NBYTES_BITS      = $clog2(MAX_ACCESS_BYTES) + 1;

  typedef logic [PTR_BITS-1:0]    ptr_t;
  typedef logic [ID_BITS-1:0]     obj_id_t;
  typedef logic [OFFSET_BITS-1:0] offset_t;
  typedef logic [ADDR_BITS-1:0]   vaddr_t;
  typedef logic [SIZE_BITS-1:0]   obj_size_t;
  typedef logic [NBYTES_BITS-1:0] nbytes_t;
  typedef logic [MAX_ACCESS_BYTES-1:0] byte_mask_t;

  // Flattened FRP: id in the most significant bits, offset in the least.
  typedef struct packed {
    obj_id_t id;
    offset_t offset;
  } frp_t;

  // Metadata of one live object, the value of M[id].
  typedef struct packed {
    offset_t   zero;  // offset field of the encoded base pointer
    vaddr_t    base;  // decoded (machine) base address
    obj_size_t size;  // object size in bytes
  } obj_meta_t;

  typedef enum logic [1:0] {
    FAULT_NONE      = 2'd0,
    FAULT_UNMAPPED  = 2'd1,  // encoded pointer with no live object: use-after-free or forged id
    FAULT_BOUNDS    = 2'd2,  // out-of-bounds write (or read, when reads fault)
    FAULT_PROTECTED = 2'd3   // plain address into the protected region (heap, M)
  } fault_e;

  // One memory access as produced by address generation.
  typedef struct packed {
    ptr_t    ptr;     // effective pointer, encoded or plain
    nbytes_t nbytes;  // access size, 1..MAX_ACCESS_BYTES
    logic    write;
  } access_req_t;

  // What the L1-D side gets back.
  typedef struct packed {
    ptr_t       addr;       // decoded machine address
    fault_e     fault;
    byte_mask_t zero_mask;  // read bytes to be returned as zero
    logic       encoded;
  } access_rsp_t;

  // Requests from the malloc/free wrappers.
  typedef enum logic {
    MGMT_INSERT     = 1'b0,  // object allocated: install M[id] in the cache
    MGMT_INVALIDATE = 1'b1   // object freed: drop id from the cache
  } mgmt_op_e;

  typedef struct packed {
    mgmt_op_e  op;
    obj_id_t   id;
    obj_meta_t meta;
  } mgmt_req_t;

  // Operations on the GreenFat cache.
  typedef enum logic [1:0] {
    COP_LOOKUP = 2'd0,  // look up an id
    COP_FILL   = 2'd1,  // write into the set's victim way (an invalid way, else the LRU way)
    COP_UPDATE = 2'd2,  // overwrite the given way (id already cached)
    COP_INVAL  = 2'd3   // clear the given way's valid bit
  } cache_op_e;

  // isEncoded, applied to the upper ENC_FLAG_BITS of a pointer.
  function automatic logic is_encoded(logic [ENC_FLAG_BITS-1:0] upper_bits);
    return |upper_bits;
  endfunction

endpackage
