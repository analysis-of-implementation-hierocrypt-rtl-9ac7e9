// tb_cam_keysched: self-checking test of the Camellia key schedule block.
//
// Loads the key 0123456789abcdeffedcba9876543210, plays the datapath's part in the
// two setup cycles (returning the two-round results an independent software model
// gives), and then compares every subkey the block hands out in the six work
// cycles, for encryption and for decryption, with the subkeys of that model.
module tb_cam_keysched;
  import cam_pkg::*;

  logic       clk = 1'b0;
  logic       rst, key_we, setup_en, setup_cyc, decrypt;
  block_t     key, setup_res, setup_state, kw_pre, kw_post;
  logic [2:0] work_cyc;
  word64_t    k [3];
  word64_t    kl_fl, kl_flinv;
  int         checks = 0, failures = 0;

  cam_keysched dut (
    .clk, .rst, .key_we_i(key_we), .key_i(key), .setup_en_i(setup_en),
    .setup_cyc_i(setup_cyc), .setup_res_i(setup_res), .setup_state_o(setup_state),
    .work_cyc_i(work_cyc), .decrypt_i(decrypt), .k_o(k), .kw_pre_o(kw_pre),
    .kw_post_o(kw_post), .kl_fl_o(kl_fl), .kl_flinv_o(kl_flinv)
  );

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (1000) @(posedge clk);
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

  localparam block_t KEY = 128'h0123456789abcdeffedcba9876543210;
  localparam block_t MID = 128'h3e0a9979813dfcd2828787cc9eba002a;
  localparam block_t KA  = 128'hae71c3d55ba6bf1d169240a795f89256;
  localparam word64_t KU [18] = '{
    64'hae71c3d55ba6bf1d, 64'h169240a795f89256, 64'ha2b3c4d5e6f7ff6e, 64'h5d4c3b2a19080091,
    64'he1eaadd35f8e8b49, 64'h2053cafc492b5738, 64'h79bdffdb97530eca, 64'h8642002468acf135,
    64'hd7e3a2d24814f2bf, 64'h00123456789abcde, 64'hd169240a795f8925, 64'h6ae71c3d55ba6bf1,
    64'h1d950c840048d159, 64'he26af37bffb72ea6, 64'he57e2495ab9c70f5, 64'h56e9afc745a49029,
    64'h19080091a2b3c4d5, 64'he6f7ff6e5d4c3b2a};
  localparam word64_t KLL [4] = '{64'h56e9afc745a49029, 64'he57e2495ab9c70f5,
                                  64'h97530eca86420024, 64'h68acf13579bdffdb};
  localparam block_t KW12 = 128'h0123456789abcdeffedcba9876543210;
  localparam block_t KW34 = 128'h492b5738e1eaadd35f8e8b492053cafc;

  initial begin
    rst = 1'b1; key_we = 1'b0; setup_en = 1'b0; setup_cyc = 1'b0; decrypt = 1'b0;
    key = '0; setup_res = '0; work_cyc = '0;
    repeat (2) @(negedge clk);
    rst = 1'b0;
    key = KEY; key_we = 1'b1;
    @(negedge clk);
    key_we = 1'b0; key = '0;
    setup_en = 1'b1; setup_cyc = 1'b0;
    #1;
    check(setup_state == KEY, "setup cycle 1 feeds K_L");
    check(k[0] == SIGMA1 && k[1] == SIGMA2, "setup cycle 1 uses Sigma1, Sigma2");
    setup_res = MID ^ KEY;  // two-round result; the block XORs K_L itself
    @(negedge clk);
    setup_cyc = 1'b1;
    #1;
    check(setup_state == MID, "setup cycle 2 feeds the stored intermediate value");
    check(k[0] == SIGMA3 && k[1] == SIGMA4, "setup cycle 2 uses Sigma3, Sigma4");
    setup_res = KA;
    @(negedge clk);
    setup_en = 1'b0;
    for (int d = 0; d < 2; d++) begin
      decrypt = d[0];
      for (int c = 0; c < 6; c++) begin
        work_cyc = 3'(c);
        #1;
        for (int j = 0; j < 3; j++) begin
          int idx;
          idx = (d != 0) ? (17 - 3 * c - j) : (3 * c + j);
          check(k[j] == KU[idx], $sformatf("dec=%0d cycle %0d key %0d = %h", d, c, j, k[j]));
        end
        check(kw_pre == ((d != 0) ? KW34 : KW12), "pre-whitening key");
        check(kw_post == ((d != 0) ? KW12 : KW34), "post-whitening key");
        if (c == 1) check((d != 0) ? (kl_fl == KLL[3] && kl_flinv == KLL[2])
                            : (kl_fl == KLL[0] && kl_flinv == KLL[1]), "first FL keys");
        if (c == 3) check((d != 0) ? (kl_fl == KLL[1] && kl_flinv == KLL[0])
                            : (kl_fl == KLL[2] && kl_flinv == KLL[3]), "second FL keys");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
