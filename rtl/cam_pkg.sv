// cam_pkg: constants and small helper functions shared by the Camellia modules.
//
// It holds the key-schedule constants Sigma1..Sigma6 (Sigma1..Sigma4 are used with a
// 128-bit key), the 256-entry table of the base substitution box s1, and a few
// rotation helpers. The s1 table is the one of the published Camellia specification;
// the other three boxes are derived from it (s2 = s1 <<< 1, s3 = s1 >>> 1,
// s4(x) = s1(x <<< 1)). Word and byte order: bit 127 (or 63) is the most significant
// bit, and byte 1 of a 64-bit word (x1 in the F-function drawing) is bits 63:56.
package cam_pkg;

  typedef logic [63:0]  word64_t;
  typedef logic [127:0] block_t;

  // Key-schedule constants Sigma1..Sigma6.
  localparam word64_t SIGMA1 = 64'hA09E667F3BCC908B;
  localparam word64_t SIGMA2 = 64'hB67AE8584CAA73B2;
  localparam word64_t SIGMA3 = 64'hC6EF372FE94F82BE;
  localparam word64_t SIGMA4 = 64'h54FF53A5F1D36F1C;
  localparam word64_t SIGMA5 = 64'h10E527FADE682D1D;
  localparam word64_t SIGMA6 = 64'hB05688C2B3E6C1FD;

  // Base substitution table s1, entry i at index i.
  localparam logic [7:0] SBOX1 [256] = '{
    8'h70, 8'h82, 8'h2c, 8'hec, 8'hb3, 8'h27, 8'hc0, 8'he5, 8'he4, 8'h85, 8'h57, 8'h35, 8'hea, 8'h0c, 8'hae, 8'h41,
    8'h23, 8'hef, 8'h6b, 8'h93, 8'h45, 8'h19, 8'ha5, 8'h21, 8'hed, 8'h0e, 8'h4f, 8'h4e, 8'h1d, 8'h65, 8'h92, 8'hbd,
    8'h86, 8'hb8, 8'haf, 8'h8f, 8'h7c, 8'heb, 8'h1f, 8'hce, 8'h3e, 8'h30, 8'hdc, 8'h5f, 8'h5e, 8'hc5, 8'h0b, 8'h1a,
    8'ha6, 8'he1, 8'h39, 8'hca, 8'hd5, 8'h47, 8'h5d, 8'h3d, 8'hd9, 8'h01, 8'h5a, 8'hd6, 8'h51, 8'h56, 8'h6c, 8'h4d,
    8'h8b, 8'h0d, 8'h9a, 8'h66, 8'hfb, 8'hcc, 8'hb0, 8'h2d, 8'h74, 8'h12, 8'h2b, 8'h20, 8'hf0, 8'hb1, 8'h84, 8'h99,
    8'hdf, 8'h4c, 8'hcb, 8'hc2, 8'h34, 8'h7e, 8'h76, 8'h05, 8'h6d, 8'hb7, 8'ha9, 8'h31, 8'hd1, 8'h17, 8'h04, 8'hd7,
    8'h14, 8'h58, 8'h3a, 8'h61, 8'hde, 8'h1b, 8'h11, 8'h1c, 8'h32, 8'h0f, 8'h9c, 8'h16, 8'h53, 8'h18, 8'hf2, 8'h22,
    8'hfe, 8'h44, 8'hcf, 8'hb2, 8'hc3, 8'hb5, 8'h7a, 8'h91, 8'h24, 8'h08, 8'he8, 8'ha8, 8'h60, 8'hfc, 8'h69, 8'h50,
    8'haa, 8'hd0, 8'ha0, 8'h7d, 8'ha1, 8'h89, 8'h62, 8'h97, 8'h54, 8'h5b, 8'h1e, 8'h95, 8'he0, 8'hff, 8'h64, 8'hd2,
    8'h10, 8'hc4, 8'h00, 8'h48, 8'ha3, 8'hf7, 8'h75, 8'hdb, 8'h8a, 8'h03, 8'he6, 8'hda, 8'h09, 8'h3f, 8'hdd, 8'h94,
    8'h87, 8'h5c, 8'h83, 8'h02, 8'hcd, 8'h4a, 8'h90, 8'h33, 8'h73, 8'h67, 8'hf6, 8'hf3, 8'h9d, 8'h7f, 8'hbf, 8'he2,
    8'h52, 8'h9b, 8'hd8, 8'h26, 8'hc8, 8'h37, 8'hc6, 8'h3b, 8'h81, 8'h96, 8'h6f, 8'h4b, 8'h13, 8'hbe, 8'h63, 8'h2e,
    8'he9, 8'h79, 8'ha7, 8'h8c, 8'h9f, 8'h6e, 8'hbc, 8'h8e, 8'h29, 8'hf5, 8'hf9, 8'hb6, 8'h2f, 8'hfd, 8'hb4, 8'h59,
    8'h78, 8'h98, 8'h06, 8'h6a, 8'he7, 8'h46, 8'h71, 8'hba, 8'hd4, 8'h25, 8'hab, 8'h42, 8'h88, 8'ha2, 8'h8d, 8'hfa,
    8'h72, 8'h07, 8'hb9, 8'h55, 8'hf8, 8'hee, 8'hac, 8'h0a, 8'h36, 8'h49, 8'h2a, 8'h68, 8'h3c, 8'h38, 8'hf1, 8'ha4,
    8'h40, 8'h28, 8'hd3, 8'h7b, 8'hbb, 8'hc9, 8'h43, 8'hc1, 8'h15, 8'he3, 8'had, 8'hf4, 8'h77, 8'hc7, 8'h80, 8'h9e
  };

  function automatic logic [7:0] rol8(input logic [7:0] x, input int unsigned n);
    return 8'((x << n) | (x >> (8 - n)));
  endfunction

  function automatic logic [31:0] rol32_1(input logic [31:0] x);
    return {x[30:0], x[31]};
  endfunction

  // Left rotation of a 128-bit value by a constant amount.
  function automatic block_t rol128(input block_t x, input int unsigned n);
    return (n == 0) ? x : ((x << n) | (x >> (128 - n)));
  endfunction

endpackage
