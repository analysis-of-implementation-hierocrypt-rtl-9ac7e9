// tb_cam_fl: self-checking test of the Camellia FL / FL^-1 layer.
//
// The expected values are computed in the testbench from the defining equations
// (YR = ((XL & klL) <<< 1) ^ XR, YL = (YR | klR) ^ XL), and FL^-1 is checked to
// undo FL with the same key, for random data and keys and a few edge cases.
module tb_cam_fl;
  logic [63:0] fl_in, fl_key, fl_out, flinv_in, flinv_key, flinv_out;
  int checks = 0, failures = 0;

  cam_fl dut (.fl_in, .fl_key, .fl_out, .flinv_in, .flinv_key, .flinv_out);

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

  function automatic logic [63:0] ref_fl(input logic [63:0] x, input logic [63:0] k);
    logic [31:0] a, yr, yl;
    a  = x[63:32] & k[63:32];
    yr = {a[30:0], a[31]} ^ x[31:0];
    yl = (yr | k[31:0]) ^ x[63:32];
    return {yl, yr};
  endfunction

  initial begin
    for (int i = 0; i < 40; i++) begin
      fl_in  = (i == 0) ? '1 : {$urandom, $urandom};
      fl_key = (i == 1) ? '1 : {$urandom, $urandom};
      #1;
      check(fl_out == ref_fl(fl_in, fl_key), $sformatf("FL(%h,%h) = %h", fl_in, fl_key, fl_out));
      flinv_in  = fl_out;
      flinv_key = fl_key;
      #1;
      check(flinv_out == fl_in, "FL^-1(FL(x)) = x");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
