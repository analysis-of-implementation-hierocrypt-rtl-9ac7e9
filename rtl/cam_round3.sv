// cam_round3: the loop-unrolled Camellia datapath, three Feistel rounds per clock.
//
// The 128-bit state L || R passes, in order, through an optional pre-whitening XOR
// (kw_pre), three Feistel rounds L' = R ^ F(L, k), R' = L with round keys k0, k1, k2,
// an optional FL / FL^-1 layer (FL on L with kl_fl, FL^-1 on R with kl_flinv) and an
// optional post-whitening step that swaps the halves and XORs kw_post, giving
// (R || L) ^ kw_post. Six passes with the right subkeys make one 18-round block.
// The state after the second round is also given out (state_r2): the key schedule
// reuses the first two rounds during the two setup cycles, so that the whole design
// needs only the 24 boxes of these three F-functions.
//
// Three rounds per clock and where whitening and FL sit (cycles 1, 2/4 and 6) follow
// the paper's work schedule; the shared use for the key schedule is this design's
// reading of the paper's resource count (24 boxes, 49152 memory bits). Combinational.
module cam_round3
  import cam_pkg::*;
(
  input  block_t  state_in,
  input  word64_t k0,
  input  word64_t k1,
  input  word64_t k2,
  input  logic    prewhite_en,
  input  block_t  kw_pre,
  input  logic    fl_en,
  input  word64_t kl_fl,
  input  word64_t kl_flinv,
  input  logic    postwhite_en,
  input  block_t  kw_post,
  output block_t  state_r2,
  output block_t  state_out
);

  block_t  s0;
  word64_t f0, f1, f2;
  word64_t l1, r1, l2, r2, l3, r3;
  word64_t fl_o, flinv_o;

  assign s0 = prewhite_en ? (state_in ^ kw_pre) : state_in;

  cam_f u_f0 (.x(s0[127:64]), .k(k0), .y(f0));
  assign l1 = s0[63:0] ^ f0;
  assign r1 = s0[127:64];

  cam_f u_f1 (.x(l1), .k(k1), .y(f1));
  assign l2 = r1 ^ f1;
  assign r2 = l1;

  cam_f u_f2 (.x(l2), .k(k2), .y(f2));
  assign l3 = r2 ^ f2;
  assign r3 = l2;

  cam_fl u_fl (
    .fl_in(l3), .fl_key(kl_fl), .fl_out(fl_o),
    .flinv_in(r3), .flinv_key(kl_flinv), .flinv_out(flinv_o)
  );

  assign state_r2 = {l2, r2};

  always_comb begin
    if (postwhite_en)   state_out = {r3, l3} ^ kw_post;
    else if (fl_en)     state_out = {fl_o, flinv_o};
    else                state_out = {l3, r3};
  end

endmodule
