// megis_pkg: widths, operation modes and command codes shared by the MegIS
// in-storage accelerator.
//
// A k-mer is stored MSB-first at two bits per base (A=00, C=01, G=10, T=11),
// so an unsigned compare of two equal-length k-mers is their lexicographic
// order. The paper uses k=60 for the query and database k-mers, which gives
// the 120-bit datapath of its Intersect unit and k-mer registers. The 64-bit
// width of the Index Generator is also the paper's; the 32-bit taxID /
// location field and the encodings below are this design's own choices.
package megis_pkg;

  // k-mer width in bits (60 bases x 2 bits)
  localparam int unsigned KMER_W = 120;
  // number of bases in a full k-mer
  localparam int unsigned KMER_BASES = KMER_W / 2;
  // taxID (sketch tables) or genome location (reference indexes)
  localparam int unsigned ID_W = 32;
  // Index Generator compare width: prefixes of up to 32 bases
  localparam int unsigned IDXG_W = 64;
  // width of a prefix-length field, in bases (0..KMER_BASES)
  localparam int unsigned PLEN_W = $clog2(KMER_BASES + 1);
  // taxID value that marks an empty entry ("-" in the KSS tables)
  localparam logic [ID_W-1:0] NO_TAXID = '0;

  // one record as read from a flash channel after ECC: a k-mer key, its
  // taxID or location, and a flag on the final record of the database
  typedef struct packed {
    logic [KMER_W-1:0] key;
    logic [ID_W-1:0]   aux;
    logic              last;
  } rec_t;

  localparam int unsigned REC_W = $bits(rec_t);

  // ISP operation run by the accelerator
  typedef enum logic [1:0] {
    MODE_IDLE      = 2'd0,
    MODE_INTERSECT = 2'd1,  // Step 2: query k-mers vs database k-mers
    MODE_TAXID     = 2'd2,  // Step 2: intersecting k-mers vs KSS tables
    MODE_MERGE     = 2'd3   // Step 3: merge two reference indexes
  } mode_e;

  // host storage-interface commands
  typedef enum logic [1:0] {
    CMD_INIT  = 2'd0,  // MegIS_Init: enter metagenomic mode
    CMD_STEP  = 2'd1,  // MegIS_Step: toggles start/end of a host step
    CMD_WRITE = 2'd2,  // MegIS_Write: metadata update, handled by firmware
    CMD_EXIT  = 2'd3   // leave metagenomic mode (baseline SSD again)
  } cmd_e;

  // MegIS_Step arguments
  localparam logic [1:0] STEP_KMER_EXTRACTION = 2'd0;
  localparam logic [1:0] STEP_SORTING         = 2'd1;

endpackage
