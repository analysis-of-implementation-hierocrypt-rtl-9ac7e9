// tb_cam_f: self-checking test of the Camellia F-function.
//
// Compares F(x, k) with values from an independent software model for three random
// pairs, and checks that F is keyed only through x ^ k (F(x ^ d, k ^ d) = F(x, k)
// for random d).
module tb_cam_f;
  logic [63:0] x, k, y, y2;
  int checks = 0, failures = 0;

  cam_f dut (.x, .k, .y);

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

  localparam logic [63:0] VX [3] = '{64'hf2a74de452e6b438, 64'h0c5c7fd0a6a3a450, 64'h1818e811892f902b};
  localparam logic [63:0] VK [3] = '{64'h6513270e269e0d37, 64'hd23f0824128b2f33, 64'h9531985d5d9dc9f8};
  localparam logic [63:0] VY [3] = '{64'h3278d0beababdcba, 64'h53d768ec10db6e6b, 64'hd46829ee41623c0e};

  initial begin
    for (int i = 0; i < 3; i++) begin
      x = VX[i]; k = VK[i];
      #1;
      check(y == VY[i], $sformatf("F(%h,%h) = %h, expected %h", x, k, y, VY[i]));
    end
    for (int i = 0; i < 20; i++) begin
      logic [63:0] d;
      d = {$urandom, $urandom};
      x = {$urandom, $urandom}; k = {$urandom, $urandom};
      #1;
      y2 = y;
      x = x ^ d; k = k ^ d;
      #1;
      check(y == y2, "F depends on x ^ k only");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
