// sra_pkg -- shared constants and record types of the short read aligner.
//
// The aligner scores short DNA reads against candidate alignment locations
// (CALs) in a reference genome held in the FPGA board's DRAM. Everything the
// modules exchange is defined here: the 2-bit base code, the read length, the
// DRAM word geometry, the job handed from the reference lookup to a
// Smith-Waterman unit, the result returned to the host, and the run-time
// scoring configuration.
//
// Follows the paper: bases are 2 bits (A=00, C=01, G=10, T=11, the code of the
// seed example), the reference is kept in 256-bit DRAM words (128 bases), a
// reference section is one or two such words (up to 256 bases), CALs are
// 4-byte locations, and the read length is the 100 bases of the case study.
// Own choices: 32-bit read identifiers, 12-bit scores, a 128-bit host stream
// word, base k of any packed sequence at bits [2k+1:2k], and the layout of the
// host stream words below.
package sra_pkg;

  // ---- sequence geometry --------------------------------------------------
  localparam int unsigned READ_LEN       = 100;  // bases per read = PEs per S-W unit
  localparam int unsigned WORD_BITS      = 256;  // DRAM word
  localparam int unsigned BASES_PER_WORD = WORD_BITS / 2;       // 128
  localparam int unsigned MAX_SEG_WORDS  = 2;    // a section is 1 or 2 words
  localparam int unsigned SEG_BASES      = MAX_SEG_WORDS * BASES_PER_WORD; // 256
  localparam int unsigned SEG_CNT_W      = $clog2(SEG_BASES + 1);

  // ---- field widths ---------------------------------------------------------
  localparam int unsigned CAL_W       = 32;   // 4-byte reference location
  localparam int unsigned READ_ID_W   = 32;
  localparam int unsigned SCORE_W     = 12;
  localparam int unsigned DRAM_ADDR_W = 27;   // 4 GB / 32-byte words
  localparam int unsigned WOFS_W      = $clog2(BASES_PER_WORD); // 7
  localparam int unsigned HOST_W      = 128;  // host stream word

  typedef logic [1:0]              base_t;
  typedef logic [2*READ_LEN-1:0]   read_seq_t;
  typedef logic [2*SEG_BASES-1:0]  seg_seq_t;
  typedef logic [WORD_BITS-1:0]    dram_word_t;
  typedef logic [DRAM_ADDR_W-1:0]  dram_addr_t;
  typedef logic [SCORE_W-1:0]      score_t;
  typedef logic [CAL_W-1:0]        cal_t;
  typedef logic [READ_ID_W-1:0]    read_id_t;
  typedef logic [HOST_W-1:0]       host_word_t;

  // Words of the host stream needed to carry one read's bases.
  localparam int unsigned READ_WORDS = (2 * READ_LEN + HOST_W - 1) / HOST_W; // 2

  // Host stream word kind, in bits [127:126] of a header word.
  typedef enum logic [1:0] {
    HK_NONE = 2'b00,
    HK_READ = 2'b01,   // [31:0] read id; followed by READ_WORDS base words
    HK_CAL  = 2'b10    // [32] reverse strand, [31:0] CAL
  } host_kind_e;

  // Scoring configuration (affine gap). A gap of length k costs
  // gap_open + (k-1)*gap_ext; a mismatch costs mismatch.
  typedef struct packed {
    logic [3:0] match;
    logic [3:0] mismatch;
    logic [4:0] gap_open;
    logic [3:0] gap_ext;
  } sw_cfg_t;

  // One CAL of one read, as parsed from the host stream.
  typedef struct packed {
    read_id_t  read_id;
    logic      strand;    // 1: CAL is on the reverse strand
    cal_t      cal;
    read_seq_t read;
  } cal_job_t;

  // One read-CAL pair with its reference section, for a S-W unit.
  typedef struct packed {
    read_id_t  read_id;
    logic      strand;
    cal_t      cal;
    read_seq_t read;
    cal_t      seg_start;  // reference position of section base 0
    logic      two_words;  // section is 256 bases instead of 128
    seg_seq_t  seg;
  } sw_job_t;

  // Best final-row cell of one read-CAL alignment.
  typedef struct packed {
    read_id_t read_id;
    logic     strand;
    cal_t     cal;
    score_t   score;
    cal_t     best_pos;   // reference position of the best final-row cell
  } sw_result_t;

  function automatic base_t comp(base_t b);
    return ~b;  // A<->T, C<->G under the 2-bit code
  endfunction

endpackage
