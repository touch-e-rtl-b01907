// touche_pkg: types and constants shared by the compressed last-level cache.
//
// The cache is 4 MB, 8-way, 64-byte lines, addressed by a 48-bit physical
// address, which leaves a 29-bit tag per line (these numbers follow the
// paper). A 34-bit tag entry holds the tag, a dirty bit, a valid bit and
// three replacement bits. The valid/dirty pair 0/1, impossible for a normal
// line, marks a line that holds compressed blocks; in such a line the top two
// tag bits become the line's valid and dirty summary and the low 27 bits hold
// either three 9-bit signatures or a 16-bit superblock marker plus one 9-bit
// superblock signature.
//
// Placement of fields inside the 27 bits, the layout of the metadata records
// at the end of the data line and the bit order inside a record are choices
// of this design, made so that fields line up with the figures of the paper.
package touche_pkg;

  localparam int unsigned TAG_W      = 29;   // full tag address bits
  localparam int unsigned LINE_W     = 512;  // 64-byte cacheline
  localparam int unsigned SIG_W      = 9;    // signature width
  localparam int unsigned MARK_W     = 16;   // superblock marker width
  localparam int unsigned NSLOT      = 3;    // signatures per tag entry
  localparam int unsigned COMP_W     = 3;    // compressibility code width
  localparam int unsigned REPL_W     = 3;    // replacement bits per entry
  localparam int unsigned OFFSET_W   = 6;    // byte offset in a line

  // Data-line layout for arbitrary compressed blocks: three 16-byte units at
  // the start of the line, three 34-bit metadata records at its end.
  localparam int unsigned UNIT_W     = 128;
  localparam int unsigned REC_W      = 34;
  localparam int unsigned REC_BASE   = LINE_W - NSLOT * REC_W;   // 410
  localparam int unsigned PAYLOAD_W  = 2 * UNIT_W;               // up to 32 B stored
  localparam int unsigned CPAY_W     = PAYLOAD_W;                // largest stored payload, 32 B

  // Superblock layout: four 15-byte blocks, the 29-bit tag of the first
  // block, then 3 metadata bits.
  localparam int unsigned SB_BLK_W   = 120;
  localparam int unsigned SB_TAG_LSB = 4 * SB_BLK_W;             // 480
  localparam int unsigned SB_META_LSB= SB_TAG_LSB + TAG_W;       // 509
  // Bits 511:510 of an arbitrary line are the valid/dirty bits of record 2;
  // "invalid but dirty" never occurs there, so 3'b010 identifies a superblock.
  localparam logic [2:0]  SB_META    = 3'b010;

  // Positions inside the tag field of a compressed line.
  localparam int unsigned LV_BIT     = 28;  // "1st bit": some block valid
  localparam int unsigned LD_BIT     = 27;  // "2nd bit": some block dirty
  localparam int unsigned MARK_LSB   = 11;  // marker at tag[26:11]

  // Compressibility codes: the form a stored block is kept in. Only blocks of
  // the 16- and 32-byte classes are stored compressed, so a block of the
  // 48-byte class keeps C_UNCOMP (the engine reports its class separately).
  // Code 7 is not used.
  typedef enum logic [COMP_W-1:0] {
    C_UNCOMP = 3'd0,  // stored as 64 B
    C_ZEROS  = 3'd1,  // all zero,             0 B payload
    C_B8D1   = 3'd2,  // BDI 8 B base + 7 x 1 B,   15 B
    C_B4D1   = 3'd3,  // BDI 4 B base + 15 x 1 B,  19 B
    C_B8D2   = 3'd4,  // BDI 8 B base + 7 x 2 B,   22 B
    C_FPC16  = 3'd5,  // FPC, at most 120 bits
    C_FPC32  = 3'd6   // FPC, at most 256 bits
  } comp_t;

  // Size classes the tag manager places by.
  typedef enum logic [1:0] {
    SZ_16 = 2'd0, SZ_32 = 2'd1, SZ_48 = 2'd2, SZ_64 = 2'd3
  } size_t_e;

  function automatic size_t_e size_of(comp_t c);
    case (c)
      C_ZEROS, C_B8D1:          return SZ_16;
      C_B4D1, C_B8D2:           return SZ_32;
      C_FPC16:                  return SZ_16;
      C_FPC32:                  return SZ_32;
      default:                  return SZ_64;
    endcase
  endfunction

  // Tag entry, field order as drawn in the paper: tag, dirty, valid, repl.
  typedef struct packed {
    logic [TAG_W-1:0]  tag;
    logic              dirty;
    logic              valid;
    logic [REPL_W-1:0] repl;
  } tag_entry_t;

  // How a way is interpreted (Table 1 of the paper).
  typedef enum logic [1:0] {
    L_INVALID = 2'd0, L_UNCOMP = 2'd1, L_ARB = 2'd2, L_SUPER = 2'd3
  } line_kind_t;

  // TADA metadata record appended for each compressed block.
  typedef struct packed {
    logic             valid;
    logic             dirty;
    logic [COMP_W-1:0] comp;
    logic [TAG_W-1:0] tag;
  } tada_rec_t;

  // Request from the private L2 side.
  typedef enum logic { REQ_READ = 1'b0, REQ_WRITE = 1'b1 } req_op_t;

  // Event counters of the controller.
  typedef struct packed {
    logic [31:0] reads;
    logic [31:0] writes;
    logic [31:0] hits_uncomp;
    logic [31:0] hits_comp;
    logic [31:0] hits_super;
    logic [31:0] misses;
    logic [31:0] sig_collisions;
    logic [31:0] marker_probes;
    logic [31:0] inst_uncomp;
    logic [31:0] inst_comp;
    logic [31:0] sb_formed;
    logic [31:0] sb_split;
    logic [31:0] block_evicts;
    logic [31:0] writebacks;
    logic [31:0] mode_switches;
  } llc_stats_t;

endpackage
