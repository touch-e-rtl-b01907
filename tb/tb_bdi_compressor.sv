// tb_bdi_compressor: builds blocks whose best encoding is known by
// construction (all zero; 8-byte elements with 1-, 2- or 4-byte deltas;
// 4-byte elements with 1-byte deltas; 2-byte elements with 1-byte deltas;
// random data) and checks the chosen code, the reported size class (16, 32,
// 48 or 64 bytes) and that the payload decompresses to the original block.
// Deltas are pushed to the edges of their range (-2^(8d-1) and 2^(8d-1)-1)
// and one step beyond, where the next larger encoding must be picked.
// Blocks of the 48-byte class report that size but keep C_UNCOMP, since
// they are stored uncompressed.
module tb_bdi_compressor;
  import touche_pkg::*;
  logic [LINE_W-1:0] data, back;
  comp_t comp;
  size_t_e size;
  logic [CPAY_W-1:0] payload;
  bdi_compressor   dut (.data, .comp, .size, .payload);
  bdi_decompressor dec (.comp, .payload, .data(back));
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  // block of n = 64/eb elements: base + delta, delta in [lo, hi]
  function automatic logic [LINE_W-1:0] mk(int eb, longint lo, longint hi, bit edge_);
    logic [LINE_W-1:0] d;
    longint unsigned base, e, span;
    d = '0;
    base = {$urandom, $urandom};
    base[63] = 1'b0;
    base = base | 64'h0100_0000_0100_0000;   // keep 4-byte halves apart
    if (eb < 8) base = base & ((64'd1 << (8*eb)) - 1);
    span = longint'(hi - lo + 1);
    for (int k = 0; k < 64/eb; k++) begin
      longint dl;
      dl = (k == 0) ? 0 : (edge_ && k == 1) ? lo : (edge_ && k == 2) ? hi
                         : lo + longint'({$urandom, $urandom} % span);
      e = base + longint'(dl);
      for (int b = 0; b < 8*eb; b++) d[k*8*eb + b] = e[b];
    end
    return d;
  endfunction
  task automatic expect_code(logic [LINE_W-1:0] d, comp_t c, size_t_e s, string what);
    data = d; #1;
    check(comp == c, $sformatf("%s: code %0d expected %0d", what, comp, c));
    check(size == s, $sformatf("%s: size class", what));
    if (comp != C_UNCOMP) check(back == d, $sformatf("%s: round trip", what));
  endtask
  initial begin
    expect_code('0, C_ZEROS, SZ_16, "zeros");
    for (int r = 0; r < 40; r++) begin
      bit ed = (r % 2 == 0);
      expect_code(mk(8, -128, 127, ed), C_B8D1, SZ_16, "8B base, 1B deltas");
      expect_code(mk(8, 128, 32767, 0) | 0, C_B8D2, SZ_32, "8B base, 2B deltas");
      expect_code(mk(8, -32768, -129, 0), C_B8D2, SZ_32, "8B base, negative 2B deltas");
      expect_code(mk(8, 32768, 2147483647, 0), C_UNCOMP, SZ_48, "8B base, 4B deltas");
      expect_code(mk(8, -64'sd2147483648, -32769, 0), C_UNCOMP, SZ_48, "8B base, negative 4B deltas");
      expect_code(mk(4, -128, 127, ed), C_B4D1, SZ_32, "4B base, 1B deltas");
      expect_code(mk(2, -128, 127, ed), C_UNCOMP, SZ_48, "2B base, 1B deltas");
    end
    // one step past the 1-byte range: must not be B8D1
    data = mk(8, 0, 0, 0); data[64 +: 64] = data[63:0] + 64'd128; #1;
    check(comp == C_B8D2, "delta 128 needs 2 bytes");
    data[64 +: 64] = data[63:0] - 64'd129; #1;
    check(comp == C_B8D2, "delta -129 needs 2 bytes");
    data[64 +: 64] = data[63:0] - 64'd128; #1;
    check(comp == C_B8D1, "delta -128 fits 1 byte");
    for (int r = 0; r < 50; r++) begin
      for (int w = 0; w < 16; w++) data[w*32 +: 32] = $urandom;
      #1 check(comp == C_UNCOMP && size == SZ_64, "random data is incompressible");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
