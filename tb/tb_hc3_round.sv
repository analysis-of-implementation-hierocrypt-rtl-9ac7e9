// tb_hc3_round: self-checking test of one Hierocrypt-3 round (rho and XS + AK).
//
// The S-box table and MDS_H are not part of the design, so the testbench closes
// the round's S-layer and MDS_H ports with stand-in functions (an 8-bit
// permutation x*37+11 mod 256 and (a, b) -> (b, a ^ (b<<<8)) on 64-bit halves); they only have to be
// different enough to expose wiring faults. The expected values are computed in
// the testbench from the round's definition with its own GF(2^8) mds_L. The
// decryption round is checked by undoing encryption rounds: rho^-1(rho(X)) = X and
// XS^-1(XS(X) ^ AK) with the AK step merged = X.
module tb_hc3_round;
  logic [127:0] x, ak, sl1_in, sl1_out, sl2_in, sl2_out, mdsh_in, mdsh_out, y;
  logic [127:0] mdshi_in, mdshi_out;
  logic [255:0] rk;
  logic         last, first, dec, inv;
  int checks = 0, failures = 0;

  hc3_round dut (
    .x_i(x), .rk_i(rk), .ak_i(ak), .dec_i(dec), .last_i(last), .first_i(first), .inv_o(inv),
    .sl1_in_o(sl1_in), .sl1_out_i(sl1_out), .sl2_in_o(sl2_in), .sl2_out_i(sl2_out),
    .mdsh_in_o(mdsh_in), .mdsh_out_i(mdsh_out),
    .mdshi_in_o(mdshi_in), .mdshi_out_i(mdshi_out), .y_o(y)
  );

  function automatic logic [127:0] s_layer(input logic [127:0] v);
    logic [127:0] r;
    for (int i = 0; i < 16; i++) r[8 * i +: 8] = 8'(v[8 * i +: 8] * 8'd37 + 8'd11);
    return r;
  endfunction

  // inverse stand-in S layer: (y - 11) * 173 mod 256, as 37 * 173 = 1 mod 256
  function automatic logic [127:0] s_inv_layer(input logic [127:0] v);
    logic [127:0] r;
    for (int i = 0; i < 16; i++) r[8 * i +: 8] = 8'((v[8 * i +: 8] - 8'd11) * 8'd173);
    return r;
  endfunction

  // stand-in MDS_H: (a, b) -> (b, a ^ (b <<< 8)) on 64-bit halves, and its inverse
  function automatic logic [127:0] mdsh(input logic [127:0] v);
    return {v[63:0], v[127:64] ^ {v[55:0], v[63:56]}};
  endfunction

  function automatic logic [127:0] mdsh_inv(input logic [127:0] v);
    return {v[63:0] ^ {v[119:64], v[127:120]}, v[127:64]};
  endfunction

  function automatic logic [7:0] gmul(input logic [7:0] a, input logic [7:0] b);
    logic [15:0] p;
    p = '0;
    for (int i = 0; i < 8; i++) if (b[i]) p ^= 16'(a) << i;
    for (int i = 15; i >= 8; i--) if (p[i]) p ^= 16'h163 << (i - 8);
    return p[7:0];
  endfunction

  function automatic logic [127:0] mdsl(input logic [127:0] v);
    logic [127:0] r;
    logic [7:0] c [4];
    c = '{8'hC4, 8'h65, 8'hC8, 8'h8B};
    for (int w = 0; w < 4; w++)
      for (int i = 0; i < 4; i++) begin
        logic [7:0] acc;
        acc = '0;
        for (int j = 0; j < 4; j++) acc ^= gmul(c[(j - i + 4) % 4], v[127 - 32 * w - 8 * j -: 8]);
        r[127 - 32 * w - 8 * i -: 8] = acc;
      end
    return r;
  endfunction

  always_comb begin
    sl1_out  = inv ? s_inv_layer(sl1_in) : s_layer(sl1_in);
    sl2_out  = inv ? s_inv_layer(sl2_in) : s_layer(sl2_in);
    mdsh_out  = mdsh(mdsh_in);
    mdshi_out = mdsh_inv(mdshi_in);
  end

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  logic [127:0] mid, y_enc, x0;
  logic         was_last;

  initial begin
    for (int n = 0; n < 40; n++) begin
      x    = {$urandom, $urandom, $urandom, $urandom};
      rk   = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      ak   = {$urandom, $urandom, $urandom, $urandom};
      last = n[0]; dec = 1'b0; first = 1'b0;
      #1;
      mid = s_layer(mdsl(s_layer(x ^ rk[255:128])) ^ rk[127:0]);
      check(sl1_in == (x ^ rk[255:128]), "first key addition");
      check(sl2_in == (mdsl(s_layer(x ^ rk[255:128])) ^ rk[127:0]), "MDS_L and second key addition");
      if (!last) check(y == mdsh(mid), "rho output");
      else       check(y == (mid ^ ak), "XS + AK output");
      check(!inv, "inverse select low when encrypting");
      // decryption round undoes the encryption round with the same keys
      y_enc = y; x0 = x; was_last = last;
      x = y_enc; dec = 1'b1; first = was_last; last = 1'b0;
      #1;
      check(inv, "inverse select high when decrypting");
      if (was_last) check(y == x0, "AK + XS^-1 undoes XS + AK");
      else          check(y == x0, "rho^-1 undoes rho");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
