// cam_keysched: Camellia key schedule for a 128-bit key, with its two registers.
//
// MAIN KEY REGISTER (K_L) is loaded from the main key when key setup starts. During
// the two setup cycles the datapath runs two Feistel rounds per cycle with the
// constants Sigma1, Sigma2 and then Sigma3, Sigma4 as round keys; the result of the
// first cycle is XORed with K_L and kept in the K_A register, the result of the
// second cycle is K_A itself (K_R is zero for a 128-bit key). The K_A register is
// the design's intermediate storage.
//
// In the work phase every subkey is a 64-bit half of K_L or K_A rotated left by a
// fixed amount (0, 15, 30, 45, 60, 77, 94 or 111), so the "key round" is only
// wiring and a multiplexer indexed by the work cycle (0..5): it hands out the three
// round keys, the whitening key and the FL / FL^-1 keys of that cycle. For
// decryption the same subkeys are handed out in reverse order (kw3||kw4 first,
// k18 down to k1, FL with kl4 then kl2, FL^-1 with kl3 then kl1), as the Camellia
// specification defines decryption. Subkey table and constants follow the paper;
// the reverse order for decryption and the sharing of the datapath for setup are
// this design's choices.
//
// Timing: key_we_i loads K_L at a clock edge; setup_en_i with setup_cyc_i = 0, 1
// writes K_A at the next two edges. Subkey outputs are combinational from K_L, K_A,
// work_cyc_i and decrypt_i.
module cam_keysched
  import cam_pkg::*;
(
  input  logic          clk,
  input  logic          rst,
  input  logic          key_we_i,      // load the main key register
  input  block_t        key_i,         // main key
  input  logic          setup_en_i,    // a setup cycle is running
  input  logic          setup_cyc_i,   // which setup cycle (0 or 1)
  input  block_t        setup_res_i,   // datapath state after two rounds
  output block_t        setup_state_o, // datapath input during setup
  input  logic [2:0]    work_cyc_i,    // work cycle 0..5
  input  logic          decrypt_i,
  output word64_t       k_o [3],       // round keys of this cycle
  output block_t        kw_pre_o,
  output block_t        kw_post_o,
  output word64_t       kl_fl_o,
  output word64_t       kl_flinv_o
);

  block_t kl_q, ka_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      kl_q <= '0;
      ka_q <= '0;
    end else begin
      if (key_we_i) kl_q <= key_i;
      if (setup_en_i) ka_q <= setup_cyc_i ? setup_res_i : (setup_res_i ^ kl_q);
    end
  end

  assign setup_state_o = setup_cyc_i ? ka_q : kl_q;

  // Subkeys of the 128-bit key schedule (index 1..18, 1..4; index 0 unused).
  word64_t ku  [19];
  word64_t kw  [5];
  word64_t kll [5];

  function automatic word64_t hi(input block_t x, input int unsigned n);
    block_t r;
    r = rol128(x, n);
    return r[127:64];
  endfunction

  function automatic word64_t lo(input block_t x, input int unsigned n);
    block_t r;
    r = rol128(x, n);
    return r[63:0];
  endfunction

  always_comb begin
    ku[0]   = '0;
    kw[0]   = '0;
    kll[0]  = '0;
    kw[1]   = hi(kl_q, 0);    kw[2]   = lo(kl_q, 0);
    ku[1]   = hi(ka_q, 0);    ku[2]   = lo(ka_q, 0);
    ku[3]   = hi(kl_q, 15);   ku[4]   = lo(kl_q, 15);
    ku[5]   = hi(ka_q, 15);   ku[6]   = lo(ka_q, 15);
    kll[1]  = hi(ka_q, 30);   kll[2]  = lo(ka_q, 30);
    ku[7]   = hi(kl_q, 45);   ku[8]   = lo(kl_q, 45);
    ku[9]   = hi(ka_q, 45);   ku[10]  = lo(kl_q, 60);
    ku[11]  = hi(ka_q, 60);   ku[12]  = lo(ka_q, 60);
    kll[3]  = hi(kl_q, 77);   kll[4]  = lo(kl_q, 77);
    ku[13]  = hi(kl_q, 94);   ku[14]  = lo(kl_q, 94);
    ku[15]  = hi(ka_q, 94);   ku[16]  = lo(ka_q, 94);
    ku[17]  = hi(kl_q, 111);  ku[18]  = lo(kl_q, 111);
    kw[3]   = hi(ka_q, 111);  kw[4]   = lo(ka_q, 111);
  end

  always_comb begin
    int unsigned c;
    c = 32'(work_cyc_i);
    if (c > 5) c = 5;
    if (setup_en_i) begin
      k_o[0] = setup_cyc_i ? SIGMA3 : SIGMA1;
      k_o[1] = setup_cyc_i ? SIGMA4 : SIGMA2;
      k_o[2] = '0;
    end else if (!decrypt_i) begin
      for (int j = 0; j < 3; j++) k_o[j] = ku[3 * c + 1 + j];
    end else begin
      for (int j = 0; j < 3; j++) k_o[j] = ku[18 - 3 * c - j];
    end
    if (!decrypt_i) begin
      kw_pre_o   = {kw[1], kw[2]};
      kw_post_o  = {kw[3], kw[4]};
      kl_fl_o    = (c < 3) ? kll[1] : kll[3];
      kl_flinv_o = (c < 3) ? kll[2] : kll[4];
    end else begin
      kw_pre_o   = {kw[3], kw[4]};
      kw_post_o  = {kw[1], kw[2]};
      kl_fl_o    = (c < 3) ? kll[4] : kll[2];
      kl_flinv_o = (c < 3) ? kll[3] : kll[1];
    end
  end

endmodule
