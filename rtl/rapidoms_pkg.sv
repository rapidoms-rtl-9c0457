// rapidoms_pkg: sizes, fixed-point formats and record types shared by the
// RapidOMS open-modification search datapath.
//
// The sizes MAX_R, MAX_Q, Q_BLOCK, DHV and FACTOR are the published design
// point of the accelerator (4096 references per cached block, 2048 queries
// per kernel run, 16 queries in flight, 4096-bit hypervectors streamed as 16
// chunks). Everything else here (fixed-point precursor m/z, field widths, the
// DRAM record layout and the block descriptor) is this implementation's own
// choice: the original kernel passes m/z values as single-precision floats.
package rapidoms_pkg;

  // ---- design point -------------------------------------------------------
  localparam int unsigned DHV     = 4096;           // hypervector dimension
  localparam int unsigned FACTOR  = 16;             // chunks per hypervector
  localparam int unsigned CHUNK_W = DHV / FACTOR;   // 256 bits per chunk
  localparam int unsigned Q_BLOCK = 16;             // queries compared in parallel
  localparam int unsigned MAX_R   = 4096;           // references per cached block
  localparam int unsigned MAX_Q   = 2048;           // queries per kernel run

  // ---- precursor m/z: unsigned fixed point, 16 integer + 16 fraction bits --
  localparam int unsigned PMZ_W    = 32;
  localparam int unsigned PMZ_FRAC = 16;
  typedef logic [PMZ_W-1:0] pmz_t;

  // default search windows: 20 ppm standard, 75 Da open
  localparam int unsigned STD_TOL_PPM_DEF = 20;
  localparam pmz_t        OPEN_TOL_DEF    = pmz_t'(75) << PMZ_FRAC;

  localparam int unsigned ID_W = 32;                // reference / query identifier
  typedef logic [ID_W-1:0] id_t;

  // similarity score = DHV - Hamming distance, 0..DHV
  localparam int unsigned SCORE_W = $clog2(DHV + 1);
  typedef logic [SCORE_W-1:0] score_t;

  typedef logic [CHUNK_W-1:0] chunk_t;

  // per-reference metadata held next to the cached hypervector
  typedef struct packed {
    logic decoy;   // reference is a decoy spectrum (target-decoy FDR)
    id_t  ref_id;  // global reference identifier
    pmz_t pmz;     // reference precursor m/z
  } ref_meta_t;

  // best match of one query in one search mode (standard or open)
  typedef struct packed {
    logic   found;   // at least one reference fell inside the window
    logic   decoy;   // the best reference is a decoy
    id_t    ref_id;  // best reference identifier
    score_t score;   // best similarity
  } match_t;

  // one line of the result stream handed to the FDR filter
  typedef struct packed {
    id_t    qid;
    match_t m;
  } result_t;

  // reference block descriptor: one charge state, one sorted PMZ range,
  // at most MAX_R references stored contiguously in DRAM
  localparam int unsigned CHARGE_W = 4;
  localparam int unsigned ADDR_W   = 32;             // DRAM word (CHUNK_W bits) address
  localparam int unsigned RCNT_W   = $clog2(MAX_R + 1);
  typedef struct packed {
    logic [CHARGE_W-1:0] charge;
    pmz_t                min_pmz;
    pmz_t                max_pmz;
    logic [ADDR_W-1:0]   base;
    logic [RCNT_W-1:0]   count;
  } block_desc_t;

  // DRAM record of one reference: one metadata word (ref_meta_t in the low
  // bits) followed by FACTOR hypervector chunks, chunk 0 = HV bits [CHUNK_W-1:0]
  localparam int unsigned REC_WORDS = FACTOR + 1;

endpackage
