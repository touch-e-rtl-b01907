// bdi_compressor: the compression side of the compression-decompression
// engine, which taps the data bus in front of the data array.
//
// The paper's engine runs BDI and FPC and keeps the better result, each with
// one cycle of latency; it reports whether the block compresses to 16, 32 or
// 48 bytes. This module implements the BDI half only: Base-Delta encodings in
// which the base is the first element of the block, so its delta (always
// zero) is not stored. Six base/delta configurations and the all-zero block
// are tried in parallel and the smallest one that fits is chosen:
//
//   code     base  delta  payload          size only (48-byte class)
//   ZEROS     -     -      0 B             B2D1      2 B   1 B   33 B
//   B8D1     8 B   1 B    15 B             B4D2      4 B   2 B   34 B
//   B4D1     4 B   1 B    19 B             B8D4      8 B   4 B   36 B
//   B8D2     8 B   2 B    22 B             UNCOMP   (no encoding fits)
//
// A delta fits when the difference (element - base), taken modulo the element
// width, is the sign extension of a delta-sized value. The payload keeps the
// base in its low bytes and delta k (of element k+1) above it. B8D1 is the
// 15-byte encoding that superblocks need (the paper compresses superblock
// members to 15 bytes). The three 48-byte-class encodings (B2D1, B4D2, B8D4)
// only set the reported size: such blocks are stored uncompressed, so `comp`
// stays C_UNCOMP and no payload is given for them. Purely combinational; a
// register in front of or behind it gives the paper's single cycle.
module bdi_compressor
  import touche_pkg::*;
(
  input  logic [LINE_W-1:0]  data,
  output comp_t              comp,
  output size_t_e            size,
  output logic [CPAY_W-1:0]  payload
);

  // Try one configuration: element size eb bytes, delta size db bytes.
  function automatic logic try_bdi(input logic [LINE_W-1:0] d, input int eb,
                                   input int db, output logic [CPAY_W-1:0] p);
    logic [63:0] emask, dmask, base, e, diff, lim;
    logic [CPAY_W-1:0] dfield;
    logic ok;
    int n;
    n     = 64 / eb;
    emask = (eb == 8) ? 64'hFFFF_FFFF_FFFF_FFFF : ((64'd1 << (8*eb)) - 64'd1);
    lim   = 64'd1 << (8*db - 1);               // half range of a delta
    dmask = (64'd1 << (8*db)) - 64'd1;
    base  = 64'(d) & emask;
    p     = '0;
    p[63:0] = base;
    ok    = 1'b1;
    for (int k = 1; k < 32; k++) begin
      if (k < n) begin
        e    = 64'(d >> (k*8*eb)) & emask;
        diff = (e - base) & emask;
        // fits if diff < lim, or diff >= (2^(8eb) - lim), both modulo emask
        if (!(diff < lim || diff >= ((emask - lim) + 64'd1))) ok = 1'b0;
        dfield = CPAY_W'(diff & dmask);
        p |= dfield << (8*eb + (k-1)*8*db);
      end
    end
    return ok;
  endfunction

  logic [CPAY_W-1:0] p_b8d1, p_b4d1, p_b8d2, p_b2d1, p_b4d2, p_b8d4;
  logic ok_b8d1, ok_b4d1, ok_b8d2, ok_b2d1, ok_b4d2, ok_b8d4, ok_zero;

  always_comb begin
    ok_zero = (data == '0);
    ok_b8d1 = try_bdi(data, 8, 1, p_b8d1);
    ok_b4d1 = try_bdi(data, 4, 1, p_b4d1);
    ok_b8d2 = try_bdi(data, 8, 2, p_b8d2);
    ok_b2d1 = try_bdi(data, 2, 1, p_b2d1);   // 48-byte class: size only
    ok_b4d2 = try_bdi(data, 4, 2, p_b4d2);
    ok_b8d4 = try_bdi(data, 8, 4, p_b8d4);

    payload = '0;
    size    = SZ_64;
    comp    = C_UNCOMP;
    if (ok_zero)      begin comp = C_ZEROS;                   end
    else if (ok_b8d1) begin comp = C_B8D1;  payload = p_b8d1; end
    else if (ok_b4d1) begin comp = C_B4D1;  payload = p_b4d1; end
    else if (ok_b8d2) begin comp = C_B8D2;  payload = p_b8d2; end
    else if (ok_b2d1 || ok_b4d2 || ok_b8d4) size = SZ_48;
    if (comp != C_UNCOMP) size = size_of(comp);
  end

endmodule
