// tb_camellia_unit: self-checking test of the Camellia-128 unit.
//
// Checks the published Camellia known-answer vector (key = plaintext =
// 0123456789abcdeffedcba9876543210, ciphertext 67673138549669730857065648eabe43),
// its decryption, three further key/plaintext pairs whose ciphertexts come from an
// independent software model, and random encrypt/decrypt round trips. It also
// checks the protocol and timing: READY 3 clocks after the SETUP edge (key load +
// 2 setup clocks), WORK high for exactly 6 clocks, result valid 7 clocks after the
// START edge, START ignored before READY and during WORK, SETUP ignored while READY,
// and READY cleared by RESET.
module tb_camellia_unit;
  logic         clk = 1'b0;
  logic         rst, setup, start, decrypt;
  logic [127:0] key, din, dout;
  logic         ready, work;
  int           checks = 0, failures = 0;

  camellia_unit dut (
    .clk, .rst, .setup_i(setup), .start_i(start), .decrypt_i(decrypt),
    .main_key_i(key), .data_i(din), .data_o(dout), .ready_o(ready), .work_o(work)
  );

  always #5 clk = ~clk;

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

  // Raise SETUP with a key and count clocks until READY.
  task automatic do_setup(input logic [127:0] k, output int cycles);
    @(negedge clk);
    key   = k;
    setup = 1'b1;
    cycles = 0;
    do begin
      @(posedge clk);
      cycles++;
      #1;
    end while (!ready && cycles < 50);
    @(negedge clk);
    setup = 1'b0;
  endtask

  // One block: START edge, then wait for WORK to drop. Returns the result, the
  // number of clocks WORK was high and the clocks from START edge to result.
  task automatic do_block(input logic [127:0] d, input logic dec, output logic [127:0] res,
                          output int work_cycles, output int latency);
    @(negedge clk);
    din     = d;
    decrypt = dec;
    start   = 1'b1;
    work_cycles = 0;
    latency     = 0;
    @(posedge clk);
    latency++;
    #1;
    @(negedge clk);
    start = 1'b0;
    din   = '0;
    while (work && latency < 50) begin
      work_cycles++;
      @(posedge clk);
      latency++;
      #1;
    end
    res = dout;
  endtask

  logic [127:0] res;
  int           wc, lat, cyc;
  logic [127:0] rk, rp, rc;

  localparam logic [127:0] KAT_K = 128'h0123456789abcdeffedcba9876543210;
  localparam logic [127:0] KAT_C = 128'h67673138549669730857065648eabe43;
  localparam logic [127:0] VK [3] = '{128'h36f675cc81e74ef5e8e25d940ed90475,
                                      128'h8d116ece1738f7d93d9c172411e20b8f,
                                      128'ha170b33839263059f28c105d1fb17c23};
  localparam logic [127:0] VP [3] = '{128'h6b0d549b6f03675a1600a35a099950d8,
                                      128'h90c192cfd3ac94af0f21ddb66cad4a26,
                                      128'h0fd630f1f29d0da9953f48f1a09f76b5};
  localparam logic [127:0] VC [3] = '{128'h4741915a317b82c5f83f4b464747b15c,
                                      128'h07c1c13d87fabe50e3df525a69a03841,
                                      128'hfab084bfd6fb5e2cc9ee377b0dffe8ed};

  initial begin
    rst = 1'b1; setup = 1'b0; start = 1'b0; decrypt = 1'b0; key = '0; din = '0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst = 1'b0;
    @(negedge clk);
    check(!ready && !work, "idle after reset");

    // START before setup is ignored
    start = 1'b1;
    repeat (3) @(negedge clk);
    check(!work, "START ignored while READY is 0");
    start = 1'b0;
    @(negedge clk);

    do_setup(KAT_K, cyc);
    check(cyc == 3, $sformatf("READY after %0d clocks, expected 3", cyc));

    do_block(KAT_K, 1'b0, res, wc, lat);
    check(res == KAT_C, $sformatf("KAT encrypt %h", res));
    check(wc == 6, $sformatf("WORK high %0d clocks, expected 6", wc));
    check(lat == 7, $sformatf("block took %0d clocks, expected 7", lat));
    check(ready, "READY held after work");

    do_block(KAT_C, 1'b1, res, wc, lat);
    check(res == KAT_K, $sformatf("KAT decrypt %h", res));
    check(wc == 6, "decrypt WORK 6 clocks");

    // SETUP edge while READY must be ignored: the old key stays
    do_setup(128'h0, cyc);
    do_block(KAT_K, 1'b0, res, wc, lat);
    check(res == KAT_C, "SETUP ignored while READY");

    // START pulses during WORK are ignored (no restart, same result)
    @(negedge clk);
    din = KAT_K; decrypt = 1'b0; start = 1'b1;
    @(negedge clk);
    start = 1'b0; din = '0;
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    wc = 0;
    while (work) begin
      wc++;
      @(negedge clk);
    end
    check(wc == 4 && dout == KAT_C, $sformatf("START during WORK ignored (wc=%0d)", wc));
    @(negedge clk);
    check(!work, "no second block started by START during WORK");

    // RESET clears READY
    rst = 1'b1;
    @(negedge clk);
    rst = 1'b0;
    @(negedge clk);
    check(!ready, "READY cleared by RESET");

    for (int i = 0; i < 3; i++) begin
      @(negedge clk);
      rst = 1'b1;
      @(negedge clk);
      rst = 1'b0;
      do_setup(VK[i], cyc);
      do_block(VP[i], 1'b0, res, wc, lat);
      check(res == VC[i], $sformatf("vector %0d encrypt %h", i, res));
      do_block(VC[i], 1'b1, res, wc, lat);
      check(res == VP[i], $sformatf("vector %0d decrypt %h", i, res));
    end

    // random round trips
    for (int i = 0; i < 8; i++) begin
      rk = {$urandom, $urandom, $urandom, $urandom};
      rp = {$urandom, $urandom, $urandom, $urandom};
      @(negedge clk);
      rst = 1'b1;
      @(negedge clk);
      rst = 1'b0;
      do_setup(rk, cyc);
      do_block(rp, 1'b0, rc, wc, lat);
      do_block(rc, 1'b1, res, wc, lat);
      check(res == rp && rc != rp, "random round trip");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
