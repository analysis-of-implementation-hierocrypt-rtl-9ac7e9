// tb_hc3_unit: self-checking test of the Hierocrypt-3 encryption / decryption unit.
//
// The unit's external parts are closed with stand-ins: S-box layers (x*37+11 mod
// 256 per byte, inverse (y-11)*173, chosen by inv_o), MDS_H ((a, b) -> (b, a ^
// (b<<<8)) on 64-bit halves) and its inverse, and a key schedule that keeps the
// main key loaded on ks_key_load and answers a request for K^(t) with a fixed
// function of key and t. Encryption is compared with the testbench's own model of
// the 5 x rho + (XS + AK) sequence; decryption is checked by decrypting each
// ciphertext back and by re-encrypting (with the model) the decryption of a random
// block. It checks the timing too: READY 16 clocks after the SETUP edge (key load
// + 15 setup clocks), WORK high for 6 clocks, round-key requests K^(1)..K^(6) in
// order for encryption and K^(6)..K^(1) for decryption, result 7 clocks after the
// START edge, inv_o high only while decrypting.
module tb_hc3_unit;
  logic         clk = 1'b0;
  logic         rst, setup, start;
  logic [127:0] din, dout, ak, sl1_in, sl1_out, sl2_in, sl2_out, mdsh_in, mdsh_out;
  logic [255:0] rk;
  logic [127:0] mdshi_in, mdshi_out;
  logic         ready, work, ks_key_load, ks_setup, decrypt, inv, cur_dec;
  logic [3:0]   ks_setup_cyc;
  logic [2:0]   rk_idx;
  int checks = 0, failures = 0;

  hc3_unit dut (
    .clk, .rst, .setup_i(setup), .start_i(start), .decrypt_i(decrypt), .data_i(din), .data_o(dout),
    .ready_o(ready), .work_o(work), .ks_key_load_o(ks_key_load), .ks_setup_o(ks_setup),
    .ks_setup_cyc_o(ks_setup_cyc), .rk_idx_o(rk_idx), .rk_i(rk), .ak_i(ak), .inv_o(inv),
    .sl1_in_o(sl1_in), .sl1_out_i(sl1_out), .sl2_in_o(sl2_in), .sl2_out_i(sl2_out),
    .mdsh_in_o(mdsh_in), .mdsh_out_i(mdsh_out),
    .mdshi_in_o(mdshi_in), .mdshi_out_i(mdshi_out)
  );

  always #5 clk = ~clk;

  // ---- stand-ins for the parts outside the unit ----
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

  function automatic logic [255:0] rk_of(input logic [127:0] k, input int t);
    logic [127:0] r;
    r = (k << (8 * t)) | (k >> (128 - 8 * t));
    return {k ^ {16{8'(t * 17)}}, r ^ 128'h5a5a0f0f_3c3c_9696_a5a5_f0f0_c3c3_6969};
  endfunction

  logic [127:0] mk;
  logic [127:0] key;
  always_ff @(posedge clk) if (ks_key_load) mk <= key;
  always_comb begin
    sl1_out   = inv ? s_inv_layer(sl1_in) : s_layer(sl1_in);
    sl2_out   = inv ? s_inv_layer(sl2_in) : s_layer(sl2_in);
    mdsh_out  = mdsh(mdsh_in);
    mdshi_out = mdsh_inv(mdshi_in);
    rk       = rk_of(mk, int'(rk_idx));
    ak       = ~mk;
  end

  // ---- independent reference ----
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

  function automatic logic [127:0] ref_enc(input logic [127:0] k, input logic [127:0] p);
    logic [127:0] x;
    logic [255:0] kk;
    x = p;
    for (int t = 1; t <= 6; t++) begin
      kk = rk_of(k, t);
      x = s_layer(mdsl(s_layer(x ^ kk[255:128])) ^ kk[127:0]);
      if (t < 6) x = mdsh(x);
    end
    return x ^ ~k;
  endfunction

  initial begin : watchdog
    repeat (5000) @(posedge clk);
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

  int idx_err = 0, n_idx = 0, pos = 0;
  always @(negedge clk) begin
    if (work) begin
      if (int'(rk_idx) != (cur_dec ? 6 - pos : pos + 1)) idx_err++;
      if (inv != cur_dec) idx_err++;
      n_idx++;
      pos++;
    end else begin
      if (rk_idx != 3'd0) idx_err++;
      pos = 0;
    end
  end

  task automatic do_block(input logic [127:0] d, input logic dec, output logic [127:0] res,
                          output int wc, output int lat);
    @(negedge clk);
    din = d; decrypt = dec; cur_dec = dec; start = 1'b1; wc = 0; lat = 0;
    @(posedge clk);
    lat++;
    #1;
    @(negedge clk);
    start = 1'b0; din = '0; decrypt = ~dec;
    while (work && lat < 50) begin
      wc++;
      @(posedge clk);
      lat++;
      #1;
    end
    res = dout;
  endtask

  logic [127:0] res, p, c;
  int wc, lat, cyc;

  initial begin
    rst = 1'b1; setup = 1'b0; start = 1'b0; din = '0; key = '0; decrypt = 1'b0; cur_dec = 1'b0;
    repeat (2) @(negedge clk);
    rst = 1'b0;
    for (int r = 0; r < 4; r++) begin
      @(negedge clk);
      rst = 1'b1;
      @(negedge clk);
      rst = 1'b0;
      check(!ready, "READY low after reset");
      key = {$urandom, $urandom, $urandom, $urandom};
      setup = 1'b1;
      cyc = 0;
      do begin
        @(posedge clk);
        cyc++;
        #1;
      end while (!ready && cyc < 40);
      check(cyc == 16, $sformatf("READY after %0d clocks, expected 16", cyc));
      @(negedge clk);
      setup = 1'b0;
      for (int b = 0; b < 3; b++) begin
        p = {$urandom, $urandom, $urandom, $urandom};
        do_block(p, 1'b0, c, wc, lat);
        check(c == ref_enc(key, p), $sformatf("block %h -> %h", p, c));
        check(wc == 6 && lat == 7, $sformatf("WORK %0d clocks, latency %0d", wc, lat));
        do_block(c, 1'b1, res, wc, lat);
        check(res == p, $sformatf("decrypt %h -> %h, expected %h", c, res, p));
        check(wc == 6 && lat == 7, $sformatf("decrypt WORK %0d clocks, latency %0d", wc, lat));
      end
      c = {$urandom, $urandom, $urandom, $urandom};
      do_block(c, 1'b1, res, wc, lat);
      check(ref_enc(key, res) == c, $sformatf("decryption of random %h", c));
    end
    check(idx_err == 0 && n_idx == 168, $sformatf("round-key requests (%0d errors)", idx_err));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
