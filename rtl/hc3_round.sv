// hc3_round: one Hierocrypt-3 round, for encryption or decryption.
//
// Encryption (dec_i = 0):
//   rho(X, K1||K2) = MDS_H(S(MDS_L(S(X ^ K1)) ^ K2))
//   XS is the same without MDS_H, and in the very-long-setup schedule the final key
//   addition AK (XOR with K^(7)_1||K^(7)_2) is done in the same clock as XS, so with
//   last_i = 1 the output is S(MDS_L(S(X ^ K1)) ^ K2) ^ ak_i.
// Decryption (dec_i = 1) runs the inverse steps in reverse order:
//   rho^-1(Y, K1||K2) = S^-1(MDS_L^-1(S^-1(MDS_H^-1(Y)) ^ K2)) ^ K1
//   and with first_i = 1 the AK step and XS^-1 share one clock:
//   S^-1(MDS_L^-1(S^-1(Y ^ ak_i) ^ K2)) ^ K1.
//
// The S-box table and the MDS_H matrix are not available, so the two S-box layers
// and MDS_H are reached through ports: sl1_in_o / sl1_out_i and sl2_in_o /
// sl2_out_i carry the 16 bytes into and out of each S layer (inv_o = 1 asks for
// S^-1), mdsh_in_o / mdsh_out_i into and out of MDS_H and mdshi_in_o / mdshi_out_i
// into and out of MDS_H^-1. All of them must be combinational where they are
// connected. The S layers are used in the same order in both directions and MDS_H^-1
// has its own pair of ports, so no combinational path runs from a port back to
// itself through the outside functions.
// The order of the operations, the key positions and the merge of XS with AK follow
// the paper; the shape of the decryption round follows from the paper's definition
// of decryption as the inverse of encryption. Cutting the S layers and MDS_H out as
// ports is this design's answer to their missing definitions. Combinational.
module hc3_round
  import hc3_pkg::*;
(
  input  block_t x_i,
  input  rkey_t  rk_i,       // K^(t) = K1(128) || K2(128)
  input  block_t ak_i,       // K^(7)_1 || K^(7)_2, used when last_i / first_i = 1
  input  logic   dec_i,      // 0: encryption round, 1: decryption round
  input  logic   last_i,     // encryption: 1 = XS + AK, 0 = rho
  input  logic   first_i,    // decryption: 1 = AK + XS^-1, 0 = rho^-1
  output logic   inv_o,      // external S layers: 1 = inverse S-box (S^-1)
  output block_t sl1_in_o,
  input  block_t sl1_out_i,
  output block_t sl2_in_o,
  input  block_t sl2_out_i,
  output block_t mdsh_in_o,
  input  block_t mdsh_out_i,
  output block_t mdshi_in_o,
  input  block_t mdshi_out_i,
  output block_t y_o
);

  block_t mdsl_out, mdsl_inv_out;

  hc3_mds_l #(.INVERSE(1'b0)) u_mds_l     (.din(sl1_out_i), .dout(mdsl_out));
  hc3_mds_l #(.INVERSE(1'b1)) u_mds_l_inv (.din(sl1_out_i ^ rk_i[127:0]), .dout(mdsl_inv_out));

  assign inv_o      = dec_i;
  assign mdsh_in_o  = sl2_out_i;
  assign mdshi_in_o = x_i;

  always_comb begin
    if (!dec_i) begin
      sl1_in_o  = x_i ^ rk_i[255:128];
      sl2_in_o  = mdsl_out ^ rk_i[127:0];
      y_o       = last_i ? (sl2_out_i ^ ak_i) : mdsh_out_i;
    end else begin
      sl1_in_o  = first_i ? (x_i ^ ak_i) : mdshi_out_i;
      sl2_in_o  = mdsl_inv_out;
      y_o       = sl2_out_i ^ rk_i[255:128];
    end
  end

endmodule
