// tb_bdi_decompressor: builds Base-Delta payloads by hand (base in the low
// bytes, delta k of element k+1 above it) for the stored encodings, with random
// bases and random signed deltas, and checks that the decompressor rebuilds
// element k as base + sign-extended delta, modulo the element width.
module tb_bdi_decompressor;
  import touche_pkg::*;
  comp_t comp;
  logic [CPAY_W-1:0] payload;
  logic [LINE_W-1:0] data;
  bdi_decompressor dut (.comp, .payload, .data);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic one(comp_t c, int eb, int db);
    longint unsigned base, dl, e, got;
    longint signed sd;
    int n, pos;
    n = 64 / eb;
    payload = '0;
    base = {$urandom, $urandom};
    if (eb < 8) base = base & ((64'd1 << (8*eb)) - 1);
    payload[63:0] = base;
    pos = 8*eb;
    for (int k = 1; k < n; k++) begin
      dl = {$urandom, $urandom};
      dl = dl & ((64'd1 << (8*db)) - 1);
      for (int b = 0; b < 8*db; b++) payload[pos+b] = dl[b];
      pos += 8*db;
    end
    comp = c; #1;
    pos = 8*eb;
    for (int k = 0; k < n; k++) begin
      if (k == 0) e = base;
      else begin
        dl = 0;
        for (int b = 0; b < 8*db; b++) dl[b] = payload[pos+b];
        pos += 8*db;
        sd = (db == 1) ? longint'($signed(dl[7:0])) :
             (db == 2) ? longint'($signed(dl[15:0])) : longint'($signed(dl[31:0]));
        e = base + longint'(sd);
      end
      if (eb < 8) e = e & ((64'd1 << (8*eb)) - 1);
      got = 0;
      for (int b = 0; b < 8*eb; b++) got[b] = data[k*8*eb + b];
      check(got == e, $sformatf("code %0d element %0d: %h expected %h", c, k, got, e));
    end
  endtask
  initial begin
    comp = C_ZEROS; payload = {9{$urandom}}; #1;
    check(data == '0, "zero block");
    for (int r = 0; r < 20; r++) begin
      one(C_B8D1, 8, 1); one(C_B4D1, 4, 1); one(C_B8D2, 8, 2);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100_000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
