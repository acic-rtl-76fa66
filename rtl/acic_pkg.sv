// acic_pkg: sizes, types and index functions shared by the ACIC blocks.
//
// The numbers follow the ACIC configuration for a 32KB, 8-way L1
// instruction cache with 64-byte blocks: a 16-entry i-Filter whose entries
// carry 58-bit tags (so a 64-bit byte address), a 256-entry CSHR of 8 sets x
// 32 ways holding 12-bit partial tags, a 1024-entry HRT of 4-bit histories,
// 16 PT counters of 5 bits and a 10-slot update queue per PT entry.
// Choices of this implementation rather than of the ACIC description: which
// address bits form the partial tag, the HRT hash, the PT threshold and
// reset value, and the number of update-request ports.
package acic_pkg;

  // Address and block geometry
  localparam int unsigned ADDR_W      = 64;            // byte address
  localparam int unsigned OFFSET_W    = 6;             // 64-byte block
  localparam int unsigned BLOCK_BITS  = 512;
  localparam int unsigned BADDR_W     = ADDR_W - OFFSET_W;   // 58: block address = i-Filter tag

  // L1 i-cache: 32KB, 8-way -> 64 sets
  localparam int unsigned IC_WAYS     = 8;
  localparam int unsigned IC_SETS     = 64;
  localparam int unsigned IC_IDX_W    = $clog2(IC_SETS);     // 6
  localparam int unsigned IC_TAG_W    = BADDR_W - IC_IDX_W;  // 52
  localparam int unsigned IC_LAT      = 4;                   // hit latency, cycles

  // i-Filter
  localparam int unsigned IF_ENTRIES  = 16;

  // CSHR
  localparam int unsigned PTAG_W      = 12;
  localparam int unsigned CSHR_SETS   = 8;
  localparam int unsigned CSHR_SET_W  = $clog2(CSHR_SETS);   // m = 3
  localparam int unsigned CSHR_WAYS   = 32;

  // Two-level predictor
  localparam int unsigned HRT_ENTRIES = 1024;
  localparam int unsigned HRT_IDX_W   = $clog2(HRT_ENTRIES); // 10
  localparam int unsigned HIST_W      = 4;
  localparam int unsigned PT_ENTRIES  = 1 << HIST_W;         // 16
  localparam int unsigned CTR_W       = 5;
  localparam int unsigned PT_THRESH   = 16;                  // admit when counter >= 16
  localparam int unsigned PTQ_DEPTH   = 10;

  // One update request per CSHR way (search matches) plus one for the entry
  // displaced unresolved by an insertion.
  localparam int unsigned NREQ        = CSHR_WAYS + 1;

  typedef logic [BADDR_W-1:0]    baddr_t;
  typedef logic [BLOCK_BITS-1:0] block_t;
  typedef logic [PTAG_W-1:0]     ptag_t;

  // Update request towards the predictor: the victim partial tag selects
  // the HRT register, outcome is 1 when the i-Filter victim was re-accessed
  // before its i-cache contender.
  typedef struct packed {
    logic  valid;
    ptag_t vtag;
    logic  outcome;
  } upd_req_t;

  // One-cycle event pulses from the top, for statistics and tests.
  typedef struct packed {
    logic fetch;          // fetch accepted
    logic ifilter_hit;
    logic icache_hit;
    logic miss;           // missed both, L2 request
    logic fill;           // L2 block written into the i-Filter
    logic ifilter_evict;  // i-Filter victim produced by a fill
    logic admit;          // victim inserted into i-cache over its contender
    logic bypass;         // victim thrown away
    logic free_insert;    // victim inserted into an empty i-cache way
    logic cshr_insert;
    logic cshr_victim_hit;      // fetch matched a victim field
    logic cshr_contender_hit;   // fetch matched at least one contender field
    logic cshr_unresolved_evict;
    logic pt_update;      // a PT counter stepped
    logic hrt_alias;      // an HRT update dropped for aliasing
    logic ptq_wait;       // a PT update queue holds more than one request
    logic ptq_drop;       // a PT update was lost to a full queue
  } acic_events_t;

  // Set index and tag of a block address in the i-cache
  function automatic logic [IC_IDX_W-1:0] ic_index(baddr_t b);
    return b[IC_IDX_W-1:0];
  endfunction

  function automatic logic [IC_TAG_W-1:0] ic_tag(baddr_t b);
    return b[BADDR_W-1:IC_IDX_W];
  endfunction

  // CSHR set: the m most significant bits of the i-cache set index
  function automatic logic [CSHR_SET_W-1:0] cshr_set(baddr_t b);
    return b[IC_IDX_W-1 -: CSHR_SET_W];
  endfunction

  // Partial tag: the low 12 bits of the i-cache tag. Victim and contender
  // always share the set index, so the tag bits are the ones that tell
  // them apart.
  function automatic ptag_t ptag(baddr_t b);
    return b[IC_IDX_W +: PTAG_W];
  endfunction

  // HRT index: XOR fold of the partial tag onto HRT_IDX_W bits, in
  // HRT_IDX_W-bit chunks from the LSB (for 12 -> 10 bits: t[9:0] ^ t[11:10]).
  // Works for any PTAG_W, shorter or longer than the index.
  function automatic logic [HRT_IDX_W-1:0] hrt_hash(ptag_t t);
    logic [HRT_IDX_W-1:0] h;
    h = '0;
    for (int i = 0; i < PTAG_W; i += HRT_IDX_W) h ^= HRT_IDX_W'(t >> i);
    return h;
  endfunction

endpackage
