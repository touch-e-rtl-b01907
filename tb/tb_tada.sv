// tb_tada: takes one data line through the life the controller gives it and
// checks every step against the line layout (16-byte units at the start,
// 34-bit records {valid, dirty, code, tag} from bit 410, superblock blocks of
// 120 bits with the first block's tag at bit 480 and metadata 3'b010 at bit
// 509):
//   insert a 16-byte block and a 32-byte block, probe them by full tag (hit,
//   slot, code, dirty, payload) and with other tags (miss), check the
//   free-space report, remove a block;
//   fill a line with three neighbours of a fourth block, check the
//   superblock candidate flag, build the superblock and read all four
//   blocks; split it and read the remaining three as arbitrary blocks.
module tb_tada;
  import touche_pkg::*;
  logic [LINE_W-1:0] line_in, line_out;
  logic [TAG_W-1:0]  req_tag;
  logic line_dirty, is_super, hit, hit_dirty, f16, f32, sbc, ov, od;
  tada_rec_t [2:0] rec;
  logic [TAG_W-1:0] sb_tag;
  logic [1:0] hit_slot, f16s, f32s, nvalid, slot;
  comp_t hit_comp;
  logic [PAYLOAD_W-1:0] hit_payload, ins_payload;
  logic [2:0] op;
  tada_rec_t ins_rec;
  logic [2:0][TAG_W-1:0] out_tags;
  tada dut (.line_in, .req_tag, .line_dirty, .is_super, .rec, .sb_tag, .hit,
            .hit_slot, .hit_comp, .hit_dirty, .hit_payload, .free16_ok(f16),
            .free16_slot(f16s), .free32_ok(f32), .free32_slot(f32s),
            .sb_candidate(sbc), .nvalid, .op, .slot, .ins_payload, .ins_rec,
            .line_out, .out_any_valid(ov), .out_any_dirty(od), .out_tags);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  function automatic logic [PAYLOAD_W-1:0] rnd(int bits);
    logic [PAYLOAD_W-1:0] p;
    for (int w = 0; w < 8; w++) p[w*32 +: 32] = $urandom;
    return p & ((PAYLOAD_W'(1) << bits) - 1);
  endfunction
  task automatic insert(logic [1:0] s, logic [TAG_W-1:0] t, comp_t c, bit d,
                        logic [PAYLOAD_W-1:0] p);
    op = 3'd1; slot = s; ins_payload = p;
    ins_rec = '{valid: 1'b1, dirty: d, comp: c, tag: t}; #1;
    line_in = line_out; op = 3'd0; #1;
  endtask
  task automatic probe(logic [TAG_W-1:0] t, bit exp_hit, logic [1:0] s, comp_t c,
                       bit d, logic [PAYLOAD_W-1:0] p, string what);
    req_tag = t; #1;
    check(hit == exp_hit, {what, ": hit"});
    if (exp_hit) begin
      check(hit_slot == s, {what, ": slot"});
      check(hit_comp == c, {what, ": code"});
      check(hit_dirty == d, {what, ": dirty"});
      // a 16-byte block is read from its own unit; the unit above is not its
      if (size_of(c) == SZ_16) check(hit_payload[127:0] == p[127:0], {what, ": payload"});
      else                     check(hit_payload == p, {what, ": payload"});
    end
  endtask
  logic [PAYLOAD_W-1:0] pa, pb, pc, pn [4];
  logic [TAG_W-1:0] ta, tb, base;
  initial begin
    line_in = '0; req_tag = '0; line_dirty = 0; op = 0; slot = 0;
    ins_payload = '0; ins_rec = '0;
    for (int r = 0; r < 30; r++) begin
      line_in = '0; #1;
      check(!is_super && f16 && f16s == 0 && f32 && f32s == 0 && nvalid == 0, "empty line");
      ta = 29'({$urandom} % (1 << 29)); tb = ta ^ 29'h155;
      pa = rnd(120); pb = rnd(176);
      insert(f16s, ta, C_B8D1, 1, pa);
      check(line_in[0 +: 120] == pa[119:0], "16-byte block in unit 0");
      check(line_in[410 +: 34] == {1'b1, 1'b1, 3'(C_B8D1), ta}, "record 0 layout");
      check(ov && od, "summary valid/dirty");
      check(f32 && f32s == 1, "32 bytes free at unit 1");
      insert(f32s, tb, C_B8D2, 0, pb);
      check(line_in[128 +: 256] == pb, "32-byte block in units 1-2");
      check(!f16 && !f32 && nvalid == 2, "line full");
      probe(ta, 1, 0, C_B8D1, 1, pa, "block A");
      probe(tb, 1, 1, C_B8D2, 0, pb, "block B");
      probe(ta ^ 29'h1000, 0, 0, C_UNCOMP, 0, '0, "other tag");
      // remove A; B stays
      op = 3'd2; slot = 0; #1; line_in = line_out; op = 0; #1;
      probe(ta, 0, 0, C_UNCOMP, 0, '0, "removed block");
      probe(tb, 1, 1, C_B8D2, 0, pb, "block B after remove");
      check(f16 && f16s == 0 && !f32, "one unit free after remove");
      check(ov && !od, "summary after remove");
      // superblock: neighbours 1,3,0 of base, new block 2
      line_in = '0; #1;
      base = {29'({$urandom} % (1 << 27)), 2'b00};
      for (int j = 0; j < 4; j++) pn[j] = rnd(120);
      insert(0, base | 1, C_B8D1, 0, pn[1]);
      insert(1, base | 3, C_B8D1, 0, pn[3]);
      req_tag = base | 2; #1 check(!sbc, "two neighbours are not a superblock");
      insert(2, base | 0, C_B8D1, (r % 2) == 1, pn[0]);
      req_tag = base | 2; #1 check(sbc, "three neighbours form a candidate");
      req_tag = base ^ 29'h10; #1 check(!sbc, "unrelated tag is no candidate");
      req_tag = base | 2; op = 3'd3; ins_payload = pn[2];
      ins_rec = '{valid: 1'b1, dirty: 1'b0, comp: C_B8D1, tag: base | 2};
      line_dirty = 0; #1;
      check(od == ((r % 2) == 1), "superblock dirty summary");
      line_in = line_out; op = 0; #1;
      check(is_super && sb_tag == base, "superblock format and tag");
      check(line_in[509 +: 3] == 3'b010, "superblock metadata");
      line_dirty = 1;
      for (int j = 0; j < 4; j++) begin
        check(line_in[j*120 +: 120] == pn[j][119:0], "superblock block position");
        probe(base | 29'(j), 1, 2'(j), C_B8D1, 1, pn[j], "superblock member");
      end
      probe(base ^ 29'h4, 0, 0, C_UNCOMP, 0, '0, "superblock other tag");
      // split: drop block 1
      op = 3'd4; slot = 1; #1; line_in = line_out; op = 0; #1;
      check(!is_super && nvalid == 3, "split gives three arbitrary blocks");
      probe(base | 1, 0, 0, C_UNCOMP, 0, '0, "dropped block");
      probe(base | 0, 1, 0, C_B8D1, 1, pn[0], "split block 0");
      probe(base | 2, 1, 1, C_B8D1, 1, pn[2], "split block 2");
      probe(base | 3, 1, 2, C_B8D1, 1, pn[3], "split block 3");
      check(out_tags[0] == (base | 0) && out_tags[1] == (base | 2) &&
            out_tags[2] == (base | 3), "tags by slot");
      line_dirty = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
