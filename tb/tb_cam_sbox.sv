// tb_cam_sbox: self-checking test of the four Camellia substitution boxes.
//
// Each box must be a permutation of the 256 byte values; s1 must give the
// published values at a handful of inputs (s1(00)=70, s1(01)=82, s1(80)=aa,
// s1(ff)=9e, s1(3a)=5a), and s2, s3, s4 must relate to those values by the
// rotations that define them (s2 = s1 <<< 1, s3 = s1 >>> 1, s4(x) = s1(x <<< 1)).
module tb_cam_sbox;
  logic [7:0] din;
  logic [7:0] o1, o2, o3, o4;
  int checks = 0, failures = 0;

  cam_sbox #(.WHICH(1)) u1 (.din, .dout(o1));
  cam_sbox #(.WHICH(2)) u2 (.din, .dout(o2));
  cam_sbox #(.WHICH(3)) u3 (.din, .dout(o3));
  cam_sbox #(.WHICH(4)) u4 (.din, .dout(o4));

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

  function automatic logic [7:0] r8(input logic [7:0] x, input int n);
    return 8'((x << n) | (x >> (8 - n)));
  endfunction

  localparam logic [7:0] KX [5] = '{8'h00, 8'h01, 8'h80, 8'hff, 8'h3a};
  localparam logic [7:0] KY [5] = '{8'h70, 8'h82, 8'haa, 8'h9e, 8'h5a};

  bit seen [4][256];

  initial begin
    for (int i = 0; i < 5; i++) begin
      din = KX[i];
      #1;
      check(o1 == KY[i], $sformatf("s1(%h) = %h", KX[i], o1));
      check(o2 == r8(KY[i], 1), $sformatf("s2(%h) = %h", KX[i], o2));
      check(o3 == r8(KY[i], 7), $sformatf("s3(%h) = %h", KX[i], o3));
    end
    // s4(x) = s1(x <<< 1): s4(x) at x = (KX >>> 1) gives KY
    for (int i = 0; i < 5; i++) begin
      din = r8(KX[i], 7);
      #1;
      check(o4 == KY[i], $sformatf("s4(%h) = %h", din, o4));
    end
    for (int v = 0; v < 256; v++) begin
      din = 8'(v);
      #1;
      seen[0][o1] = 1'b1; seen[1][o2] = 1'b1; seen[2][o3] = 1'b1; seen[3][o4] = 1'b1;
    end
    for (int b = 0; b < 4; b++) begin
      int n;
      n = 0;
      for (int v = 0; v < 256; v++) n += int'(seen[b][v]);
      check(n == 256, $sformatf("box s%0d is a permutation (%0d distinct outputs)", b + 1, n));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
