// tb_compress_engine: checks the BDI + FPC compression engine.
// FPC blocks are built word by word from chosen patterns, so the expected
// prefixes, the compressed size (48 + data bits) and the size class are known
// by construction; the number of uncompressible words is varied so that all
// four classes occur. The engine must keep the smaller class (BDI on a tie),
// give C_FPC16 / C_FPC32 codes for stored FPC results and C_UNCOMP for the
// 48- and 64-byte classes, and every stored result must decompress back to
// the block. BDI-friendly blocks must stay BDI.
module tb_compress_engine;
  import touche_pkg::*;
  import fpc_tb_pkg::*;
  logic [LINE_W-1:0] data, back;
  comp_t comp;
  size_t_e size;
  logic [CPAY_W-1:0] payload;
  compress_engine   dut (.data, .comp, .size, .payload);
  decompress_engine dec (.comp, .payload, .data(back));
  int checks = 0, failures = 0;
  int seen_fpc [4];
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  function automatic size_t_e cls(int bits);
    return bits <= 120 ? SZ_16 : bits <= 256 ? SZ_32 : bits <= 384 ? SZ_48 : SZ_64;
  endfunction
  initial begin
    for (int n = 0; n < 3000; n++) begin
      logic [2:0] pre [16];
      int bits, nbig;
      size_t_e ecls;
      nbig = $urandom % 17;
      bits = 48;
      for (int i = 0; i < 16; i++) begin
        pre[i] = (i < nbig) ? 3'b111 : 3'($urandom % 7);
        if (pre[i] == 3'b111 && i >= nbig) pre[i] = 3'b000;
        // every fourth block: one full word, one small word, the rest zero
        if (n % 4 == 0) pre[i] = (i == 0) ? 3'b111 : (i == 1) ? 3'b010 : 3'b000;
      end
      // shuffle the word order
      for (int i = 15; i > 0; i--) begin
        int j; logic [2:0] t;
        j = $urandom % (i + 1); t = pre[i]; pre[i] = pre[j]; pre[j] = t;
      end
      for (int i = 0; i < 16; i++) begin
        data[32*i +: 32] = fpc_word(pre[i]);
        bits += fpc_len(pre[i]);
      end
      #1;
      ecls = cls(bits);
      check(dut.f_bits == 10'(bits), $sformatf("FPC size %0d expected %0d", dut.f_bits, bits));
      check(dut.f_size == ecls, "FPC size class");
      for (int i = 0; i < 16; i++)
        if (bits <= 256) check(dut.f_pay[3*i +: 3] == pre[i], "FPC prefix field");
      if (ecls < dut.b_size) begin
        seen_fpc[ecls]++;
        check(size == ecls, "engine keeps the FPC class");
        check(comp == (ecls == SZ_16 ? C_FPC16 : ecls == SZ_32 ? C_FPC32 : C_UNCOMP), "FPC code");
      end else begin
        check(size == dut.b_size && comp == dut.b_comp, "engine keeps BDI on a tie or when smaller");
      end
      if (comp != C_UNCOMP) check(back == data, "round trip");
      else check(size == SZ_48 || size == SZ_64, "uncompressed only for 48/64 classes");
    end
    for (int k = 0; k < 3; k++) check(seen_fpc[k] > 0, $sformatf("FPC class %0d chosen", k));
    // BDI-friendly: 8-byte elements with 1-byte deltas (FPC would need more)
    for (int n = 0; n < 50; n++) begin
      longint unsigned base;
      base = {$urandom | 32'h4000_0000, $urandom | 32'h4000_0000};
      for (int k = 0; k < 8; k++) data[64*k +: 64] = base + 64'(k * 3);
      #1 check(comp == C_B8D1 && size == SZ_16, "BDI block stays BDI");
      check(back == data, "BDI round trip");
    end
    data = '0; #1 check(comp == C_ZEROS && size == SZ_16, "zero block");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1_000_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
