// hc3_mds_l: the Hierocrypt-3 MDS lower level, four mds_L units on a 128-bit block,
// or its inverse (parameter INVERSE = 1) for the decryption round.
//
// The block is cut into four 32-bit words X1..X4, each of four bytes x1..x4, and
// every word is multiplied by the circulant matrix
//   | C4 65 C8 8B |
//   | 8B C4 65 C8 |
//   | C8 8B C4 65 |
//   | 65 C8 8B C4 |
// over GF(2^8) with polynomial x^8+x^6+x^5+x+1: y1 = C4*x1 ^ 65*x2 ^ C8*x3 ^ 8B*x4
// and so on. Each constant multiplication is a fixed set of XORs, and the four
// products of a row are XORed bit by bit. Matrix, polynomial and the XOR form of the
// multipliers are the paper's; x1 being the most significant byte is this design's
// choice. The inverse of a circulant matrix is circulant too; for this matrix its
// first row is 82 C4 34 F6, worked out here from the matrix above (the paper does
// not print it). Purely combinational.
module hc3_mds_l
  import hc3_pkg::*;
#(
  parameter bit INVERSE = 1'b0
) (
  input  block_t din,
  output block_t dout
);

  localparam logic [7:0] FWD0 [4] = '{8'hC4, 8'h65, 8'hC8, 8'h8B};
  localparam logic [7:0] INV0 [4] = '{8'h82, 8'hC4, 8'h34, 8'hF6};
  localparam logic [7:0] ROW0 [4] = INVERSE ? INV0 : FWD0;

  always_comb begin
    for (int w = 0; w < 4; w++) begin
      for (int i = 0; i < 4; i++) begin
        logic [7:0] acc;
        acc = '0;
        // row i of a circulant matrix: entry (i, j) = ROW0[(j - i) mod 4]
        for (int j = 0; j < 4; j++)
          acc ^= gf_mul_const(din[127 - 32 * w - 8 * j -: 8], ROW0[(j - i + 4) % 4]);
        dout[127 - 32 * w - 8 * i -: 8] = acc;
      end
    end
  end

endmodule
