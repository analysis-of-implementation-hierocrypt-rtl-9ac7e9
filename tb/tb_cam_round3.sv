// tb_cam_round3: self-checking test of the three-round Camellia datapath.
//
// Runs the known-answer vector through six passes of the datapath, supplying by
// hand the subkeys of the 128-bit key 0123456789abcdeffedcba9876543210 (taken from
// an independent software model), and compares the state after every pass and the
// final ciphertext. It also uses the two-round tap as the key schedule does and
// checks the intermediate value and K_A.
module tb_cam_round3;
  import cam_pkg::*;

  block_t  state_in, state_r2, state_out, kw_pre, kw_post;
  word64_t k0, k1, k2, kl_fl, kl_flinv;
  logic    prewhite_en, fl_en, postwhite_en;
  int      checks = 0, failures = 0;

  cam_round3 dut (.*);

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

  localparam block_t KEY = 128'h0123456789abcdeffedcba9876543210;
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
  localparam block_t TRACE [5] = '{128'hc5d1ae21947baea5d5bd24691d280080,
                                   128'h86b8f745aae24ad9ed007390a60dba29,
                                   128'h7fa0bf80384f8425c9de9b005dbb1bdc,
                                   128'h94f77e220730fdcbb47423e0208ab2a8,
                                   128'ha158df22cc8e3592a99f8827f7d70630};
  localparam block_t CT  = 128'h67673138549669730857065648eabe43;
  localparam block_t MID = 128'h3e0a9979813dfcd2828787cc9eba002a;
  localparam block_t KA  = 128'hae71c3d55ba6bf1d169240a795f89256;

  block_t st;

  initial begin
    kw_pre = KW12; kw_post = KW34;
    st = KEY;
    for (int c = 0; c < 6; c++) begin
      state_in     = st;
      k0 = KU[3 * c]; k1 = KU[3 * c + 1]; k2 = KU[3 * c + 2];
      prewhite_en  = (c == 0);
      fl_en        = (c == 1 || c == 3);
      postwhite_en = (c == 5);
      kl_fl        = (c < 3) ? KLL[0] : KLL[2];
      kl_flinv     = (c < 3) ? KLL[1] : KLL[3];
      #1;
      st = state_out;
      if (c < 5) check(st == TRACE[c], $sformatf("state after pass %0d: %h", c, st));
      else       check(st == CT, $sformatf("ciphertext %h", st));
    end
    // key-schedule use of the two-round tap
    prewhite_en = 1'b0; fl_en = 1'b0; postwhite_en = 1'b0;
    state_in = KEY; k0 = SIGMA1; k1 = SIGMA2; k2 = '0;
    #1;
    check((state_r2 ^ KEY) == MID, $sformatf("setup cycle 1: %h", state_r2 ^ KEY));
    state_in = MID; k0 = SIGMA3; k1 = SIGMA4;
    #1;
    check(state_r2 == KA, $sformatf("setup cycle 2: K_A = %h", state_r2));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
