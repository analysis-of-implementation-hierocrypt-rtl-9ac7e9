// tb_crypto_top: end-to-end test of the top level with its default parameters.
//
// Camellia: key setup, the published known-answer vector in both directions,
// software-model vectors, random round trips, and blocks fed back to back.
// Hierocrypt-3: key setup, encryption and decryption through the top's external
// ports, closed with the same stand-ins as the unit test (S layer x*37+11 per byte
// and its inverse, MDS_H (a, b) -> (b, a ^ (b<<<8)) on 64-bit halves and its
// inverse, a key schedule computing K^(t) from the main key); encryption is
// compared with a reference model of 5 x rho + (XS + AK), decryption by round trip.
// Every mechanism of the design is counted and must occur at least once:
// key setup, pre-whitening, FL / FL^-1 layer, post-whitening, decryption, rho,
// merged XS + AK, Hierocrypt-3 decryption, START ignored while READY is 0, START ignored during WORK, SETUP
// ignored while READY, READY cleared by RESET. Block timing (7 clocks) is checked.
module tb_crypto_top;
  logic         clk = 1'b0;
  logic         rst;
  logic         cam_setup, cam_start, cam_decrypt, cam_ready, cam_work;
  logic [127:0] cam_main_key, cam_data_in, cam_data_out;
  logic         hc3_setup, hc3_start, hc3_decrypt, hc3_inv, hc3_ready, hc3_work, hc3_ks_key_load, hc3_ks_setup;
  logic [127:0] hc3_data_in, hc3_data_out, hc3_ak;
  logic [127:0] hc3_sl1_in, hc3_sl1_out, hc3_sl2_in, hc3_sl2_out, hc3_mdsh_in, hc3_mdsh_out;
  logic [127:0] hc3_mdshi_in, hc3_mdshi_out;
  logic [3:0]   hc3_ks_setup_cyc;
  logic [2:0]   hc3_rk_idx;
  logic [255:0] hc3_rk;
  int checks = 0, failures = 0;

  crypto_top dut (.*);

  always #5 clk = ~clk;

  // ---- stand-ins for the Hierocrypt-3 parts outside the design ----
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

  logic [127:0] hc3_key, mk;
  always_ff @(posedge clk) if (hc3_ks_key_load) mk <= hc3_key;
  always_comb begin
    hc3_sl1_out   = hc3_inv ? s_inv_layer(hc3_sl1_in) : s_layer(hc3_sl1_in);
    hc3_sl2_out   = hc3_inv ? s_inv_layer(hc3_sl2_in) : s_layer(hc3_sl2_in);
    hc3_mdsh_out  = mdsh(hc3_mdsh_in);
    hc3_mdshi_out = mdsh_inv(hc3_mdshi_in);
    hc3_rk       = rk_of(mk, int'(hc3_rk_idx));
    hc3_ak       = ~mk;
  end

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

  function automatic logic [127:0] hc3_ref(input logic [127:0] k, input logic [127:0] p);
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

  // ---- mechanism counters ----
  int n_cam_setup, n_prewhite, n_fl, n_postwhite, n_dec, n_hc3_setup, n_rho, n_xsak, n_hc3_dec;
  int n_start_ignored_notready, n_start_ignored_work, n_setup_ignored, n_reset_clear;

  always @(negedge clk) begin
    if (!rst) begin
      if (dut.u_cam.setup_en)                        n_cam_setup++;
      if (dut.u_cam.pre_en)                          n_prewhite++;
      if (dut.u_cam.fl_en)                           n_fl++;
      if (dut.u_cam.post_en)                         n_postwhite++;
      if (dut.u_cam.post_en && dut.u_cam.dec_q)      n_dec++;
      if (hc3_ks_setup)                              n_hc3_setup++;
      if (hc3_work && !dut.u_hc3.last)               n_rho++;
      if (dut.u_hc3.last)                            n_xsak++;
      if (hc3_work && hc3_inv)                       n_hc3_dec++;
    end
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
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

  task automatic pulse_reset();
    @(negedge clk);
    rst = 1'b1;
    @(negedge clk);
    rst = 1'b0;
  endtask

  task automatic cam_do_setup(input logic [127:0] k);
    @(negedge clk);
    cam_main_key = k; cam_setup = 1'b1;
    repeat (4) @(negedge clk);
    cam_setup = 1'b0;
  endtask

  task automatic cam_block(input logic [127:0] d, input logic dec, output logic [127:0] res,
                           output int lat);
    @(negedge clk);
    cam_data_in = d; cam_decrypt = dec; cam_start = 1'b1; lat = 0;
    @(negedge clk);
    cam_start = 1'b0;
    lat = 1;
    while (cam_work) begin
      @(negedge clk);
      lat++;
    end
    res = cam_data_out;
  endtask

  task automatic hc3_block(input logic [127:0] d, input logic dec, output logic [127:0] res,
                           output int lat);
    @(negedge clk);
    hc3_data_in = d; hc3_decrypt = dec; hc3_start = 1'b1;
    @(negedge clk);
    hc3_start = 1'b0;
    lat = 1;
    while (hc3_work) begin
      @(negedge clk);
      lat++;
    end
    res = hc3_data_out;
  endtask

  localparam logic [127:0] KAT_K = 128'h0123456789abcdeffedcba9876543210;
  localparam logic [127:0] KAT_C = 128'h67673138549669730857065648eabe43;
  localparam logic [127:0] VK = 128'h8d116ece1738f7d93d9c172411e20b8f;
  localparam logic [127:0] VP = 128'h90c192cfd3ac94af0f21ddb66cad4a26;
  localparam logic [127:0] VC = 128'h07c1c13d87fabe50e3df525a69a03841;

  logic [127:0] res, rc, rp;
  int lat;

  initial begin
    rst = 1'b1;
    cam_setup = 1'b0; cam_start = 1'b0; cam_decrypt = 1'b0; cam_main_key = '0; cam_data_in = '0;
    hc3_setup = 1'b0; hc3_start = 1'b0; hc3_decrypt = 1'b0; hc3_data_in = '0; hc3_key = '0;
    repeat (3) @(negedge clk);
    rst = 1'b0;

    // START before setup: both units must ignore it
    @(negedge clk);
    cam_start = 1'b1; hc3_start = 1'b1;
    repeat (2) @(negedge clk);
    if (!cam_work && !hc3_work) n_start_ignored_notready++;
    check(!cam_work && !hc3_work, "START ignored before READY");
    cam_start = 1'b0; hc3_start = 1'b0;

    // ---- Camellia ----
    cam_do_setup(KAT_K);
    check(cam_ready, "Camellia READY after setup");
    cam_block(KAT_K, 1'b0, res, lat);
    check(res == KAT_C, $sformatf("Camellia KAT encrypt %h", res));
    check(lat == 7, $sformatf("Camellia block %0d clocks", lat));
    cam_block(KAT_C, 1'b1, res, lat);
    check(res == KAT_K, "Camellia KAT decrypt");

    // SETUP while READY is ignored
    cam_do_setup(VK);
    cam_block(KAT_K, 1'b0, res, lat);
    if (res == KAT_C) n_setup_ignored++;
    check(res == KAT_C, "SETUP ignored while READY");

    // START edge during WORK is ignored
    @(negedge clk);
    cam_data_in = KAT_K; cam_decrypt = 1'b0; cam_start = 1'b1;
    @(negedge clk);
    cam_start = 1'b0;
    @(negedge clk);
    cam_start = 1'b1; cam_data_in = '0;
    @(negedge clk);
    cam_start = 1'b0;
    while (cam_work) @(negedge clk);
    @(negedge clk);
    if (!cam_work && cam_data_out == KAT_C) n_start_ignored_work++;
    check(!cam_work && cam_data_out == KAT_C, "START during WORK ignored");

    // RESET clears READY; new key
    pulse_reset();
    if (!cam_ready && !hc3_ready) n_reset_clear++;
    check(!cam_ready, "RESET clears READY");
    cam_do_setup(VK);
    cam_block(VP, 1'b0, res, lat);
    check(res == VC, "Camellia vector encrypt");
    cam_block(VC, 1'b1, res, lat);
    check(res == VP, "Camellia vector decrypt");
    for (int i = 0; i < 4; i++) begin
      rp = {$urandom, $urandom, $urandom, $urandom};
      cam_block(rp, 1'b0, rc, lat);
      cam_block(rc, 1'b1, res, lat);
      check(res == rp, "Camellia random round trip");
    end

    // ---- Hierocrypt-3 ----
    for (int k = 0; k < 2; k++) begin
      pulse_reset();
      @(negedge clk);
      hc3_key = {$urandom, $urandom, $urandom, $urandom};
      hc3_setup = 1'b1;
      repeat (17) @(negedge clk);
      hc3_setup = 1'b0;
      check(hc3_ready, "Hierocrypt-3 READY after setup");
      for (int b = 0; b < 3; b++) begin
        rp = {$urandom, $urandom, $urandom, $urandom};
        hc3_block(rp, 1'b0, rc, lat);
        check(rc == hc3_ref(hc3_key, rp), $sformatf("Hierocrypt-3 block %h", rc));
        check(lat == 7, $sformatf("Hierocrypt-3 block %0d clocks", lat));
        hc3_block(rc, 1'b1, res, lat);
        check(res == rp, $sformatf("Hierocrypt-3 decrypt %h", res));
        check(lat == 7, $sformatf("Hierocrypt-3 decrypt %0d clocks", lat));
      end
    end

    check(n_cam_setup > 0, "mechanism: Camellia key setup");
    check(n_prewhite > 0, "mechanism: pre-whitening");
    check(n_fl > 0, "mechanism: FL / FL^-1 layer");
    check(n_postwhite > 0, "mechanism: post-whitening");
    check(n_dec > 0, "mechanism: decryption");
    check(n_hc3_setup > 0, "mechanism: Hierocrypt-3 key setup");
    check(n_rho > 0, "mechanism: rho round");
    check(n_xsak > 0, "mechanism: merged XS + AK");
    check(n_hc3_dec > 0, "mechanism: Hierocrypt-3 decryption");
    check(n_start_ignored_notready > 0, "mechanism: START ignored before READY");
    check(n_start_ignored_work > 0, "mechanism: START ignored during WORK");
    check(n_setup_ignored > 0, "mechanism: SETUP ignored while READY");
    check(n_reset_clear > 0, "mechanism: RESET clears READY");
    $display("mechanisms: cam_setup=%0d prewhite=%0d fl=%0d postwhite=%0d decrypt=%0d hc3_setup=%0d rho=%0d xs_ak=%0d hc3_dec=%0d start_ign_notready=%0d start_ign_work=%0d setup_ign=%0d reset_clear=%0d",
             n_cam_setup, n_prewhite, n_fl, n_postwhite, n_dec, n_hc3_setup, n_rho, n_xsak, n_hc3_dec,
             n_start_ignored_notready, n_start_ignored_work, n_setup_ignored, n_reset_clear);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
