// tada: the Tag Appended Data mechanism, on one 512-bit data line.
//
// A line of arbitrary compressed blocks keeps up to three blocks in 16-byte
// units at its start (a 32-byte block takes two units, starting at its slot)
// and, at its end, one 34-bit record per slot: valid, dirty, 3-bit
// compressibility code and the 29-bit full tag (the paper gives these fields
// and their sizes; their order and fixed positions are this design's). A
// superblock line keeps four 15-byte blocks, then the 29-bit tag of its first
// block and 3 metadata bits; the metadata value 3'b010 cannot occur in an
// arbitrary line, so the line describes its own format.
//
// Parse side (always active): decodes the records, compares every valid
// full tag with `req_tag` and returns the hit, its slot, code, dirty bit and
// payload. This is how signature and marker collisions are detected. It also
// reports free space (first free 16-byte slot, first slot with two free
// units) and whether the line holds exactly the three other neighbours of
// `req_tag`, each in a 15-byte BDI form (B8D1 or all zero). Superblock
// blocks carry no code of their own and are read back as B8D1, which also
// decodes an all-zero payload.
//
// Modify side: `op` selects what `line_out` is.
//   OP_INSERT : write `ins_payload` at `slot` with record `ins_rec`
//   OP_REMOVE : clear the record of `slot`
//   OP_BUILD  : turn this line plus the new 15-byte block into a superblock
//   OP_SPLIT  : drop block `slot` of a superblock and rewrite the other three
//               as arbitrary 16-byte blocks with their own records
// Purely combinational.
module tada
  import touche_pkg::*;
(
  input  logic [LINE_W-1:0]    line_in,
  input  logic [TAG_W-1:0]     req_tag,
  input  logic                 line_dirty,   // tag-entry dirty summary (superblocks)
  // parse results
  output logic                 is_super,
  output tada_rec_t [NSLOT-1:0] rec,
  output logic [TAG_W-1:0]     sb_tag,
  output logic                 hit,
  output logic [1:0]           hit_slot,
  output comp_t                hit_comp,
  output logic                 hit_dirty,
  output logic [PAYLOAD_W-1:0] hit_payload,
  output logic                 free16_ok,
  output logic [1:0]           free16_slot,
  output logic                 free32_ok,
  output logic [1:0]           free32_slot,
  output logic                 sb_candidate,
  output logic [1:0]           nvalid,
  // modify side
  input  logic [2:0]           op,
  input  logic [1:0]           slot,
  input  logic [PAYLOAD_W-1:0] ins_payload,
  input  tada_rec_t            ins_rec,
  output logic [LINE_W-1:0]    line_out,
  output logic                 out_any_valid,
  output logic                 out_any_dirty,
  output logic [NSLOT-1:0][TAG_W-1:0] out_tags   // tags by slot, for signatures
);

  localparam logic [2:0] OP_NONE = 3'd0, OP_INSERT = 3'd1, OP_REMOVE = 3'd2,
                         OP_BUILD = 3'd3, OP_SPLIT = 3'd4;

  logic [NSLOT-1:0] unit_used;

  always_comb begin
    is_super = (line_in[SB_META_LSB +: 3] == SB_META);
    sb_tag   = line_in[SB_TAG_LSB +: TAG_W];
    for (int s = 0; s < NSLOT; s++)
      rec[s] = line_in[REC_BASE + s*REC_W +: REC_W];

    // units occupied by valid arbitrary blocks
    unit_used = '0;
    for (int s = 0; s < NSLOT; s++)
      if (rec[s].valid) begin
        unit_used[s] = 1'b1;
        if (size_of(comp_t'(rec[s].comp)) == SZ_32 && s < NSLOT-1)
          unit_used[s+1] = 1'b1;
      end

    free16_ok = 1'b0; free16_slot = 2'd0;
    for (int s = NSLOT-1; s >= 0; s--)
      if (!unit_used[s]) begin free16_ok = 1'b1; free16_slot = 2'(s); end
    free32_ok = 1'b0; free32_slot = 2'd0;
    for (int s = NSLOT-2; s >= 0; s--)
      if (!unit_used[s] && !unit_used[s+1]) begin
        free32_ok = 1'b1; free32_slot = 2'(s);
      end

    // full-tag check
    hit = 1'b0; hit_slot = 2'd0; hit_comp = C_UNCOMP; hit_dirty = 1'b0;
    hit_payload = '0;
    if (is_super) begin
      if (sb_tag[TAG_W-1:2] == req_tag[TAG_W-1:2]) begin
        hit       = 1'b1;
        hit_slot  = req_tag[1:0];
        hit_comp  = C_B8D1;
        hit_dirty = line_dirty;
        hit_payload[SB_BLK_W-1:0] = line_in[req_tag[1:0]*SB_BLK_W +: SB_BLK_W];
      end
    end else begin
      for (int s = 0; s < NSLOT; s++)
        if (rec[s].valid && rec[s].tag == req_tag) begin
          hit       = 1'b1;
          hit_slot  = 2'(s);
          hit_comp  = comp_t'(rec[s].comp);
          hit_dirty = rec[s].dirty;
          hit_payload = (s == NSLOT-1) ? PAYLOAD_W'(line_in[s*UNIT_W +: UNIT_W])
                                       : line_in[s*UNIT_W +: PAYLOAD_W];
        end
    end

    // superblock candidate: the three other neighbours, each B8D1 or zero
    nvalid = 2'd0;
    sb_candidate = !is_super;
    for (int s = 0; s < NSLOT; s++) begin
      if (rec[s].valid) nvalid = nvalid + 2'd1;
      if (!(rec[s].valid &&
            rec[s].tag[TAG_W-1:2] == req_tag[TAG_W-1:2] &&
            rec[s].tag[1:0] != req_tag[1:0] &&
            (comp_t'(rec[s].comp) == C_B8D1 || comp_t'(rec[s].comp) == C_ZEROS)))
        sb_candidate = 1'b0;
    end
  end

  // modify side
  always_comb begin
    tada_rec_t r;
    logic [1:0] k;
    r = '0;
    k = 2'd0;
    line_out = line_in;
    case (op)
      OP_INSERT: begin
        if (size_of(comp_t'(ins_rec.comp)) == SZ_32)
          line_out[slot*UNIT_W +: PAYLOAD_W] = ins_payload;
        else
          line_out[slot*UNIT_W +: UNIT_W] = ins_payload[UNIT_W-1:0];
        line_out[REC_BASE + slot*REC_W +: REC_W] = ins_rec;
      end
      OP_REMOVE:
        line_out[REC_BASE + slot*REC_W +: REC_W] = '0;
      OP_BUILD: begin
        line_out = '0;
        for (int j = 0; j < 4; j++) begin
          if (2'(j) == req_tag[1:0])
            line_out[j*SB_BLK_W +: SB_BLK_W] = ins_payload[SB_BLK_W-1:0];
          else
            for (int s = 0; s < NSLOT; s++)
              if (rec[s].valid && rec[s].tag[1:0] == 2'(j))
                line_out[j*SB_BLK_W +: SB_BLK_W] = line_in[s*UNIT_W +: SB_BLK_W];
        end
        line_out[SB_TAG_LSB +: TAG_W] = {req_tag[TAG_W-1:2], 2'b00};
        line_out[SB_META_LSB +: 3]    = SB_META;
      end
      OP_SPLIT: begin
        line_out = '0;
        k = 2'd0;
        for (int j = 0; j < 4; j++)
          if (2'(j) != slot) begin
            line_out[k*UNIT_W +: UNIT_W] =
              UNIT_W'(line_in[j*SB_BLK_W +: SB_BLK_W]);
            r.valid = 1'b1;
            r.dirty = line_dirty;
            r.comp  = C_B8D1;
            r.tag   = {sb_tag[TAG_W-1:2], 2'(j)};
            line_out[REC_BASE + k*REC_W +: REC_W] = r;
            k = k + 2'd1;
          end
      end
      default: ;
    endcase
  end

  // summary of the result, for the tag entry
  always_comb begin
    tada_rec_t r;
    out_any_valid = 1'b0;
    out_any_dirty = 1'b0;
    for (int s = 0; s < NSLOT; s++) begin
      r = line_out[REC_BASE + s*REC_W +: REC_W];
      out_tags[s] = r.tag;
      if (line_out[SB_META_LSB +: 3] != SB_META) begin
        out_any_valid |= r.valid;
        out_any_dirty |= r.valid & r.dirty;
      end
    end
    if (line_out[SB_META_LSB +: 3] == SB_META) begin
      out_any_valid = 1'b1;
      out_any_dirty = (op == OP_BUILD) ? (line_dirty | ins_rec.dirty |
                        (rec[0].valid & rec[0].dirty) | (rec[1].valid & rec[1].dirty) |
                        (rec[2].valid & rec[2].dirty)) : line_dirty;
    end
  end

endmodule
