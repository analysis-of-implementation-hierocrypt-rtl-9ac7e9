// cam_fl: the Camellia FL layer, FL on one 64-bit half and FL^-1 on the other.
//
// FL:    YR = ((XL & klL) <<< 1) ^ XR,  YL = (YR | klR) ^ XL
// FL^-1: XL = (YR | klR) ^ YL,          XR = ((XL & klL) <<< 1) ^ YR
// Both are built from AND, OR, a 1-bit rotation and XOR, exactly as in the FL and
// FL^-1 drawings and equations. The two functions are independent and sit side by
// side, as they do between rounds 6/7 and 12/13. Purely combinational.
module cam_fl
  import cam_pkg::*;
(
  input  word64_t fl_in,      // X = XL || XR
  input  word64_t fl_key,     // kl = klL || klR
  output word64_t fl_out,     // Y = YL || YR
  input  word64_t flinv_in,   // Y = YL || YR
  input  word64_t flinv_key,  // kl = klL || klR
  output word64_t flinv_out   // X = XL || XR
);

  logic [31:0] yr, yl, xl, xr;

  always_comb begin
    // FL
    yr = rol32_1(fl_in[63:32] & fl_key[63:32]) ^ fl_in[31:0];
    yl = (yr | fl_key[31:0]) ^ fl_in[63:32];
    fl_out = {yl, yr};
    // FL^-1
    xl = (flinv_in[31:0] | flinv_key[31:0]) ^ flinv_in[63:32];
    xr = rol32_1(xl & flinv_key[63:32]) ^ flinv_in[31:0];
    flinv_out = {xl, xr};
  end

endmodule
