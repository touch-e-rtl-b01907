// tag_manager: the lookup logic of the tag manager for one set.
//
// Each way's tag entry is classified by its valid and dirty bits as in Table 1
// of the paper: 0/0 invalid, 1/x uncompressed, 0/1 compressed. In a compressed
// line tag[28] says some block is valid (a compressed line with tag[28]=0 is
// treated as empty) and tag[27] says some block is dirty. A compressed line
// whose marker field equals the SMARK marker is taken as a superblock line.
//
// Uncompressed lines are matched on the full 29-bit tag. Compressed lines are
// candidates when one of the three 9-bit signature slots equals the access
// signature, or, for a marker-matching line, when slot 0 equals the superblock
// signature (the signature of the tag with its two low bits ignored). The
// paper's flowchart checks only the superblock signature once the marker
// matches; this design also checks the three slots of such a line, so that a
// marker collision on an arbitrary line cannot hide a block that is there.
// Candidates must then be confirmed by TADA against the full tag in the data
// line. Purely combinational.
module tag_manager
  import touche_pkg::*;
#(
  parameter int unsigned WAYS = 8
) (
  input  tag_entry_t [WAYS-1:0] entries,
  input  logic [TAG_W-1:0]      req_tag,
  input  logic [SIG_W-1:0]      sig,        // signature of req_tag
  input  logic [SIG_W-1:0]      sb_sig,     // superblock signature of req_tag
  input  logic [WAYS-1:0]       mark_match, // from smark
  output line_kind_t [WAYS-1:0] kind,
  output logic [WAYS-1:0]       uncomp_hit, // full tag match, uncompressed way
  output logic [WAYS-1:0]       cand,       // compressed way worth a TADA probe
  output logic [WAYS-1:0]       free_way    // invalid or empty way
);

  always_comb begin
    for (int w = 0; w < WAYS; w++) begin
      tag_entry_t e;
      logic comp, slot_hit;
      e    = entries[w];
      comp = !e.valid && e.dirty && e.tag[LV_BIT];
      if (e.valid)                  kind[w] = L_UNCOMP;
      else if (!comp)               kind[w] = L_INVALID;
      else if (mark_match[w])       kind[w] = L_SUPER;
      else                          kind[w] = L_ARB;

      uncomp_hit[w] = e.valid && (e.tag == req_tag);
      slot_hit = 1'b0;
      for (int s = 0; s < NSLOT; s++)
        if (e.tag[s*SIG_W +: SIG_W] == sig) slot_hit = 1'b1;
      cand[w] = comp && (slot_hit ||
                         (mark_match[w] && e.tag[SIG_W-1:0] == sb_sig));
      free_way[w] = (kind[w] == L_INVALID);
    end
  end

endmodule
