// tb_hc3_mds_l: self-checking test of the Hierocrypt-3 MDS lower level.
//
// The expected output is computed in the testbench with a bit-serial GF(2^8)
// multiplier (polynomial x^8+x^6+x^5+x+1) and the circulant matrix written out row
// by row. It also checks the bit equations given for multiplication by C4h on all
// 256 inputs (through a word holding x1 only), linearity, and zero in -> zero out.
// A second instance with INVERSE = 1 is fed from the first and must give back the
// original block; a third one (INVERSE = 1, fed directly) is compared for single
// bytes with the inverse circulant matrix, first row 82 C4 34 F6.
module tb_hc3_mds_l;
  logic [127:0] din, dout, d2, dinv, dinv2;
  int checks = 0, failures = 0;

  hc3_mds_l dut (.din, .dout);
  hc3_mds_l #(.INVERSE(1'b1)) dut_inv (.din(dout), .dout(dinv));
  hc3_mds_l #(.INVERSE(1'b1)) dut_inv2 (.din(din), .dout(dinv2));

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

  function automatic logic [7:0] gmul(input logic [7:0] a, input logic [7:0] b);
    logic [15:0] p;
    p = '0;
    for (int i = 0; i < 8; i++) if (b[i]) p ^= 16'(a) << i;
    for (int i = 15; i >= 8; i--) if (p[i]) p ^= 16'h163 << (i - 8);
    return p[7:0];
  endfunction

  localparam logic [7:0] M [4][4] = '{'{8'hC4, 8'h65, 8'hC8, 8'h8B},
                                      '{8'h8B, 8'hC4, 8'h65, 8'hC8},
                                      '{8'hC8, 8'h8B, 8'hC4, 8'h65},
                                      '{8'h65, 8'hC8, 8'h8B, 8'hC4}};

  function automatic logic [127:0] ref_mds(input logic [127:0] x);
    logic [127:0] y;
    for (int w = 0; w < 4; w++)
      for (int i = 0; i < 4; i++) begin
        logic [7:0] acc;
        acc = '0;
        for (int j = 0; j < 4; j++) acc ^= gmul(M[i][j], x[127 - 32 * w - 8 * j -: 8]);
        y[127 - 32 * w - 8 * i -: 8] = acc;
      end
    return y;
  endfunction

  function automatic logic [7:0] c4_eq(input logic [7:0] i);
    logic [7:0] o;
    o[7] = i[7] ^ i[2] ^ i[1] ^ i[0];
    o[6] = i[6] ^ i[1] ^ i[0];
    o[5] = i[5] ^ i[2] ^ i[1];
    o[4] = i[7] ^ i[4] ^ i[2];
    o[3] = i[6] ^ i[3] ^ i[1];
    o[2] = i[5] ^ i[2] ^ i[0];
    o[1] = i[4] ^ i[1];
    o[0] = i[3] ^ i[2] ^ i[1];
    return o;
  endfunction

  initial begin
    din = '0;
    #1;
    check(dout == '0, "zero maps to zero");
    for (int v = 0; v < 256; v++) begin
      din = {8'(v), 120'h0};
      #1;
      check(dout[127:120] == c4_eq(8'(v)), $sformatf("C4 * %h", v));
      check(dout[119:96] == {gmul(8'h8B, 8'(v)), gmul(8'hC8, 8'(v)), gmul(8'h65, 8'(v))},
            $sformatf("column 1 for %h", v));
    end
    // inverse alone, one byte in the first position of each word
    for (int v = 1; v < 256; v += 17) begin
      din = {4{8'(v), 24'h0}};
      #1;
      check(dinv2 == {4{gmul(8'h82, 8'(v)), gmul(8'hF6, 8'(v)),
                          gmul(8'h34, 8'(v)), gmul(8'hC4, 8'(v))}},
            $sformatf("inverse column 0 for %h", v));
    end
    for (int n = 0; n < 50; n++) begin
      din = {$urandom, $urandom, $urandom, $urandom};
      #1;
      check(dout == ref_mds(din), $sformatf("mds_L(%h) = %h", din, dout));
      check(dinv == din, $sformatf("inverse of mds_L(%h) gives %h", din, dinv));
      d2 = dout;
      din = din ^ 128'h0102030405060708090a0b0c0d0e0f10;
      #1;
      check((dout ^ d2) == ref_mds(128'h0102030405060708090a0b0c0d0e0f10), "linearity");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
