// tb_tag_manager: drives random and hand-built sets of tag entries and checks
// the decode of each way against the Touché tag-entry encoding:
// valid/dirty = 1/x is an uncompressed line (full-tag compare), 0/1 with the
// line-valid bit (tag[28]) set is a compressed line, anything else is free.
// A compressed way is a probe candidate when one of its three signature
// slots equals the request's signature, or, for a marker line, when its
// superblock signature slot equals the request's superblock signature.
module tb_tag_manager;
  import touche_pkg::*;
  tag_entry_t [7:0] entries;
  logic [TAG_W-1:0] req_tag;
  logic [SIG_W-1:0] sig, sb_sig;
  logic [7:0] mm, uhit, cand, free;
  line_kind_t [7:0] kind;
  tag_manager #(.WAYS(8)) dut (.entries, .req_tag, .sig, .sb_sig, .mark_match(mm),
                               .kind, .uncomp_hit(uhit), .cand, .free_way(free));
  int checks = 0, failures = 0;
  int seen [4];
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    for (int n = 0; n < 2000; n++) begin
      req_tag = 29'({$urandom} % (1 << 29));
      sig = 9'($urandom); sb_sig = 9'($urandom);
      for (int w = 0; w < 8; w++) begin
        entries[w] = {$urandom, 2'($urandom)};
        mm[w] = $urandom % 2;
        case ($urandom % 6)
          0: entries[w].tag = req_tag;
          1: entries[w].tag[8:0] = sig;
          2: entries[w].tag[17:9] = sig;
          3: entries[w].tag[26:18] = sig;
          4: entries[w].tag[8:0] = sb_sig;
          default: ;
        endcase
        if ($urandom % 2) begin entries[w].valid = 0; entries[w].dirty = 1; end
      end
      #1;
      for (int w = 0; w < 8; w++) begin
        tag_entry_t e;
        bit is_u, is_c, sh;
        line_kind_t k;
        e = entries[w];
        is_u = e.valid;
        is_c = (e.valid == 0) && (e.dirty == 1) && e.tag[28];
        k = is_u ? L_UNCOMP : !is_c ? L_INVALID : mm[w] ? L_SUPER : L_ARB;
        sh = (e.tag[8:0] == sig) || (e.tag[17:9] == sig) || (e.tag[26:18] == sig) ||
             (mm[w] && e.tag[8:0] == sb_sig);
        seen[k]++;
        check(kind[w] == k, $sformatf("kind of way %0d", w));
        check(uhit[w] == (is_u && e.tag == req_tag), "uncompressed hit");
        check(cand[w] == (is_c && sh), $sformatf("candidate way %0d", w));
        check(free[w] == (k == L_INVALID), "free way");
      end
    end
    for (int k = 0; k < 4; k++) check(seen[k] > 0, $sformatf("line kind %0d covered", k));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
