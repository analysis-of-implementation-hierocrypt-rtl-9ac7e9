// cam_f: the Camellia round function F (64-bit data, 64-bit round key).
//
// The key is XORed into the data, the eight bytes y1..y8 pass through the
// S-function (boxes s1 s2 s3 s4 s2 s3 s4 s1, y1 being the most significant byte),
// and the P-function mixes the eight box outputs z1..z8 with byte-wise XORs into
// z'1..z'8. The order of the boxes follows the F-function drawing; the XOR pattern
// of the P-function is the one of the Camellia specification (the drawing shows it,
// but not legibly enough to read every connection from it). Purely combinational.
module cam_f
  import cam_pkg::*;
(
  input  word64_t x,
  input  word64_t k,
  output word64_t y
);

  logic [7:0] t [8];  // S-function inputs y1..y8
  logic [7:0] z [8];  // S-function outputs z1..z8

  always_comb begin
    for (int i = 0; i < 8; i++) t[i] = 8'((x ^ k) >> (56 - 8 * i));
  end

  cam_sbox #(.WHICH(1)) u_s1a (.din(t[0]), .dout(z[0]));
  cam_sbox #(.WHICH(2)) u_s2a (.din(t[1]), .dout(z[1]));
  cam_sbox #(.WHICH(3)) u_s3a (.din(t[2]), .dout(z[2]));
  cam_sbox #(.WHICH(4)) u_s4a (.din(t[3]), .dout(z[3]));
  cam_sbox #(.WHICH(2)) u_s2b (.din(t[4]), .dout(z[4]));
  cam_sbox #(.WHICH(3)) u_s3b (.din(t[5]), .dout(z[5]));
  cam_sbox #(.WHICH(4)) u_s4b (.din(t[6]), .dout(z[6]));
  cam_sbox #(.WHICH(1)) u_s1b (.din(t[7]), .dout(z[7]));

  // P-function
  always_comb begin
    y[63:56] = z[0] ^ z[2] ^ z[3] ^ z[5] ^ z[6] ^ z[7];
    y[55:48] = z[0] ^ z[1] ^ z[3] ^ z[4] ^ z[6] ^ z[7];
    y[47:40] = z[0] ^ z[1] ^ z[2] ^ z[4] ^ z[5] ^ z[7];
    y[39:32] = z[1] ^ z[2] ^ z[3] ^ z[4] ^ z[5] ^ z[6];
    y[31:24] = z[0] ^ z[1] ^ z[5] ^ z[6] ^ z[7];
    y[23:16] = z[1] ^ z[2] ^ z[4] ^ z[6] ^ z[7];
    y[15:8]  = z[2] ^ z[3] ^ z[4] ^ z[5] ^ z[7];
    y[7:0]   = z[0] ^ z[3] ^ z[4] ^ z[5] ^ z[6];
  end

endmodule
