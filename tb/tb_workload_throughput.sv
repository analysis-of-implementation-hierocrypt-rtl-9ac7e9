// tb_workload_throughput: streaming throughput of both cipher units at default
// parameters, the workload behind the published throughput figures.
//
// Each unit is set up once and then fed NBLK blocks back to back: the next START
// edge is given in the first clock after WORK falls, which is the earliest the
// control unit accepts it. The testbench checks that consecutive load edges are 7
// clocks apart (1 load + 6 work) and counts the stream as the clocks from the first
// load to the end of the last block.
// From that count it prints the throughput at the clock frequencies reported for
// the two FPGA designs (Camellia 13.15 MHz, Hierocrypt-3 very long setup
// 15.64 MHz); the Camellia figure must come out at 240 Mb/s, the Hierocrypt-3 one
// at 286 Mb/s (7 clocks per 128-bit block at 15.64 MHz).
// Correctness of the streamed results: Camellia encrypts a stream and decrypts it
// back, and its first block is the Camellia known-answer vector; Hierocrypt-3 runs
// with the same stand-in S layer, MDS_H and key schedule as tb_crypto_top, its
// stream is compared with a software model and decrypted back.
module tb_workload_throughput;
  localparam int NBLK = 32;

  logic         clk = 1'b0;
  logic         rst;
  logic         cam_setup, cam_start, cam_decrypt, cam_ready, cam_work;
  logic [127:0] cam_main_key, cam_data_in, cam_data_out;
  logic         hc3_setup, hc3_start, hc3_decrypt, hc3_inv, hc3_ready, hc3_work;
  logic         hc3_ks_key_load, hc3_ks_setup;
  logic [127:0] hc3_data_in, hc3_data_out, hc3_ak;
  logic [127:0] hc3_sl1_in, hc3_sl1_out, hc3_sl2_in, hc3_sl2_out, hc3_mdsh_in, hc3_mdsh_out;
  logic [127:0] hc3_mdshi_in, hc3_mdshi_out;
  logic [3:0]   hc3_ks_setup_cyc;
  logic [2:0]   hc3_rk_idx;
  logic [255:0] hc3_rk;
  int checks = 0, failures = 0;

  crypto_top dut (.*);

  always #5 clk = ~clk;

  // ---- Hierocrypt-3 stand-ins (see tb_crypto_top) ----
  function automatic logic [127:0] s_layer(input logic [127:0] v);
    logic [127:0] r;
    for (int i = 0; i < 16; i++) r[8 * i +: 8] = 8'(v[8 * i +: 8] * 8'd37 + 8'd11);
    return r;
  endfunction

  function automatic logic [127:0] s_inv_layer(input logic [127:0] v);
    logic [127:0] r;
    for (int i = 0; i < 16; i++) r[8 * i +: 8] = 8'((v[8 * i +: 8] - 8'd11) * 8'd173);
    return r;
  endfunction

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
    hc3_rk        = rk_of(mk, int'(hc3_rk_idx));
    hc3_ak        = ~mk;
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

  // free-running clock counter
  longint cyc = 0;
  always @(posedge clk) cyc++;

  logic [127:0] pt [NBLK], ct [NBLK], back [NBLK];

  // Stream NBLK blocks through a unit. Load edges of consecutive blocks must be 7
  // clocks apart; the stream then takes (last load - first load) + 7 clocks.
  // clocks = -1 if any gap differs.
  task automatic cam_stream(input logic dec, input logic [127:0] din [NBLK],
                            output logic [127:0] dout [NBLK], output longint clocks);
    longint t0, first;
    int gaps;
    gaps = 0; t0 = 0; first = 0;
    for (int b = 0; b < NBLK; b++) begin
      cam_data_in = din[b]; cam_decrypt = dec; cam_start = 1'b1;
      @(posedge clk);
      #1;
      if (b == 0) first = cyc;
      else if (cyc - t0 != 7) gaps++;
      t0 = cyc;
      @(negedge clk);
      cam_start = 1'b0;
      while (cam_work) @(negedge clk);
      dout[b] = cam_data_out;
    end
    clocks = (gaps == 0) ? (t0 - first + 7) : -1;
  endtask

  task automatic hc3_stream(input logic dec, input logic [127:0] din [NBLK],
                            output logic [127:0] dout [NBLK], output longint clocks);
    longint t0, first;
    int gaps;
    gaps = 0; t0 = 0; first = 0;
    for (int b = 0; b < NBLK; b++) begin
      hc3_data_in = din[b]; hc3_decrypt = dec; hc3_start = 1'b1;
      @(posedge clk);
      #1;
      if (b == 0) first = cyc;
      else if (cyc - t0 != 7) gaps++;
      t0 = cyc;
      @(negedge clk);
      hc3_start = 1'b0;
      while (hc3_work) @(negedge clk);
      dout[b] = hc3_data_out;
    end
    clocks = (gaps == 0) ? (t0 - first + 7) : -1;
  endtask

  localparam logic [127:0] KAT_K = 128'h0123456789abcdeffedcba9876543210;
  localparam logic [127:0] KAT_C = 128'h67673138549669730857065648eabe43;

  longint clocks;
  real mbps;
  int bad;

  initial begin
    rst = 1'b1;
    cam_setup = 1'b0; cam_start = 1'b0; cam_decrypt = 1'b0; cam_main_key = '0; cam_data_in = '0;
    hc3_setup = 1'b0; hc3_start = 1'b0; hc3_decrypt = 1'b0; hc3_data_in = '0; hc3_key = '0;
    repeat (3) @(negedge clk);
    rst = 1'b0;

    // ---- Camellia: one setup, then streams ----
    @(negedge clk);
    cam_main_key = KAT_K; cam_setup = 1'b1;
    repeat (4) @(negedge clk);
    cam_setup = 1'b0;
    check(cam_ready, "Camellia READY");
    pt[0] = KAT_K;
    for (int b = 1; b < NBLK; b++) pt[b] = {$urandom, $urandom, $urandom, $urandom};
    cam_stream(1'b0, pt, ct, clocks);
    check(ct[0] == KAT_C, $sformatf("Camellia stream block 0 = %h", ct[0]));
    check(clocks == 7 * NBLK, $sformatf("Camellia %0d blocks in %0d clocks", NBLK, clocks));
    mbps = 128.0 * 13.15 * NBLK / real'(clocks);
    $display("Camellia: %0d blocks, %0d clocks, %0.1f Mb/s at 13.15 MHz", NBLK, clocks, mbps);
    check(mbps > 239.5 && mbps < 241.0, "Camellia throughput 240 Mb/s");
    cam_stream(1'b1, ct, back, clocks);
    bad = 0;
    for (int b = 0; b < NBLK; b++) if (back[b] != pt[b]) bad++;
    check(bad == 0, $sformatf("Camellia decrypted stream: %0d wrong blocks", bad));
    check(clocks == 7 * NBLK, $sformatf("Camellia decryption %0d clocks", clocks));

    // ---- Hierocrypt-3 ----
    @(negedge clk);
    hc3_key = {$urandom, $urandom, $urandom, $urandom};
    hc3_setup = 1'b1;
    repeat (17) @(negedge clk);
    hc3_setup = 1'b0;
    check(hc3_ready, "Hierocrypt-3 READY");
    for (int b = 0; b < NBLK; b++) pt[b] = {$urandom, $urandom, $urandom, $urandom};
    hc3_stream(1'b0, pt, ct, clocks);
    bad = 0;
    for (int b = 0; b < NBLK; b++) if (ct[b] != hc3_ref(hc3_key, pt[b])) bad++;
    check(bad == 0, $sformatf("Hierocrypt-3 stream: %0d wrong blocks", bad));
    check(clocks == 7 * NBLK, $sformatf("Hierocrypt-3 %0d blocks in %0d clocks", NBLK, clocks));
    mbps = 128.0 * 15.64 * NBLK / real'(clocks);
    $display("Hierocrypt-3: %0d blocks, %0d clocks, %0.1f Mb/s at 15.64 MHz (304 Mb/s published)",
             NBLK, clocks, mbps);
    check(mbps > 285.5 && mbps < 286.5, "Hierocrypt-3 throughput at 7 clocks per block");
    hc3_stream(1'b1, ct, back, clocks);
    bad = 0;
    for (int b = 0; b < NBLK; b++) if (back[b] != pt[b]) bad++;
    check(bad == 0, $sformatf("Hierocrypt-3 decrypted stream: %0d wrong blocks", bad));
    check(clocks == 7 * NBLK, $sformatf("Hierocrypt-3 decryption %0d clocks", clocks));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
