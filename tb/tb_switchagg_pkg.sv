// tb_switchagg_pkg: checks the shared helpers of switchagg_pkg.
// key_group must map key lengths 1..64 onto groups 0..7 as ceil(L/8)-1,
// worked out here by a loop over group boundaries. key_hash must depend on
// every key byte and on the length, and spread random keys evenly over
// 16 buckets (each bucket within 2x of the mean over 4096 keys). rotl32 is
// compared with a bit-by-bit rotation.
module tb_switchagg_pkg;
  import switchagg_pkg::*;
  int checks = 0, failures = 0;
  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  initial begin
    int hist [16];
    logic [511:0] k;
    logic [31:0] h0, h1;
    for (int l = 1; l <= 64; l++) begin
      int g;
      g = 0;
      while (l > 8 * (g + 1)) g++;
      chk(int'(key_group(KLEN_W'(l))) == g, $sformatf("group of length %0d", l));
    end
    for (int n = 0; n < 200; n++) begin
      logic [31:0] x, r;
      int s;
      x = $urandom; s = $urandom % 32;
      for (int b = 0; b < 32; b++) r[(b + s) % 32] = x[b];
      chk(rotl32(x, s) == r, "rotl32");
    end
    for (int n = 0; n < 200; n++) begin
      int l, b;
      l = 1 + $urandom % 64;
      k = '0;
      for (int i = 0; i < l; i++) k[8*i +: 8] = 8'($urandom);
      h0 = key_hash(k, KLEN_W'(l));
      b = $urandom % l;
      k[8*b +: 8] = k[8*b +: 8] ^ 8'(1 + $urandom % 255);
      h1 = key_hash(k, KLEN_W'(l));
      chk(h0 != h1, "hash depends on each key byte");
      chk(key_hash(k, KLEN_W'(l)) != key_hash(k, KLEN_W'(l == 64 ? 63 : l + 1)), "hash depends on length");
    end
    foreach (hist[i]) hist[i] = 0;
    for (int n = 0; n < 4096; n++) begin
      k = '0;
      for (int i = 0; i < 16; i++) k[8*i +: 8] = 8'($urandom);
      hist[key_hash(k, 7'd16) % 16]++;
    end
    foreach (hist[i]) chk(hist[i] > 128 && hist[i] < 512, "hash spread");
    chk(N_GROUPS * KEY_BASE == KEY_MAX, "groups cover the key lengths");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
