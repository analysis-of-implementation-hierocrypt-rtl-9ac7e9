// tb_ctrl_unit: self-checking test of the control unit (SETUP / START / READY / WORK).
//
// Two instances, one with the Camellia numbers (2 setup, 6 work clocks) and one with
// the Hierocrypt-3 numbers (15 setup, 6 work clocks), are driven through the same
// sequence. The testbench counts clocks and compares with the expected sequence:
// START ignored before READY, a one-clock key_load on the SETUP edge, SETUP_CYCLES
// setup clocks numbered from 0, READY held high, a one-clock data_load on the START
// edge, WORK_CYCLES work clocks numbered from 0 with last in the final one, SETUP
// ignored while READY, START needing a new rising edge, READY cleared by RESET.
module tb_ctrl_unit;
  logic clk = 1'b0;
  logic rst, setup, start;
  int   checks = 0, failures = 0;

  localparam int NU = 2;
  localparam int SC [NU] = '{2, 15};
  localparam int WC [NU] = '{6, 6};

  logic       ready [NU], work [NU], key_load [NU], setup_o [NU], data_load [NU], last [NU];
  logic [3:0] setup_cyc [NU], work_cyc [NU];

  for (genvar g = 0; g < NU; g++) begin : g_dut
    ctrl_unit #(.SETUP_CYCLES(SC[g]), .WORK_CYCLES(WC[g]), .CW(4)) dut (
      .clk, .rst, .setup_i(setup), .start_i(start),
      .ready_o(ready[g]), .work_o(work[g]), .key_load_o(key_load[g]), .setup_o(setup_o[g]),
      .setup_cyc_o(setup_cyc[g]), .data_load_o(data_load[g]), .work_cyc_o(work_cyc[g]),
      .last_o(last[g])
    );
  end

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (2000) @(posedge clk);
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

  // per-unit event counters, sampled just before each rising edge
  int n_keyload [NU], n_setup [NU], n_load [NU], n_work [NU], n_last [NU];
  int setup_seq_err [NU], work_seq_err [NU];

  always @(negedge clk) begin
    for (int u = 0; u < NU; u++) begin
      if (key_load[u]) n_keyload[u]++;
      if (setup_o[u]) begin
        if (int'(setup_cyc[u]) != n_setup[u] % SC[u]) setup_seq_err[u]++;
        n_setup[u]++;
      end
      if (data_load[u]) n_load[u]++;
      if (work[u]) begin
        if (int'(work_cyc[u]) != n_work[u] % WC[u]) work_seq_err[u]++;
        if (last[u] != (int'(work_cyc[u]) == WC[u] - 1)) work_seq_err[u]++;
        n_work[u]++;
      end
      if (last[u]) n_last[u]++;
    end
  end

  initial begin
    rst = 1'b1; setup = 1'b0; start = 1'b0;
    repeat (2) @(negedge clk);
    rst = 1'b0;
    @(negedge clk);
    start = 1'b1;                 // ignored: not READY
    repeat (3) @(negedge clk);
    start = 1'b0;
    for (int u = 0; u < NU; u++) check(!ready[u] && n_load[u] == 0, "START ignored before READY");
    setup = 1'b1;                 // SETUP edge
    repeat (20) @(negedge clk);
    for (int u = 0; u < NU; u++) begin
      check(n_keyload[u] == 1, $sformatf("unit %0d: one key load (%0d)", u, n_keyload[u]));
      check(n_setup[u] == SC[u], $sformatf("unit %0d: %0d setup clocks", u, n_setup[u]));
      check(ready[u], "READY after setup");
    end
    setup = 1'b0;
    @(negedge clk);
    setup = 1'b1;                 // SETUP edge while READY: ignored
    @(negedge clk);
    setup = 1'b0;
    start = 1'b1;                 // START edge, held high for 12 clocks
    repeat (12) @(negedge clk);
    for (int u = 0; u < NU; u++) begin
      check(n_keyload[u] == 1 && n_setup[u] == SC[u], "SETUP ignored while READY");
      check(n_load[u] == 1, "held START gives one block");
      check(n_work[u] == WC[u] && n_last[u] == 1, $sformatf("unit %0d: %0d work clocks", u, n_work[u]));
      check(ready[u] && !work[u], "READY stays, WORK drops");
    end
    start = 1'b0;
    @(negedge clk);
    start = 1'b1;                 // second block, back to back
    @(negedge clk);
    start = 1'b0;
    repeat (10) @(negedge clk);
    for (int u = 0; u < NU; u++) begin
      check(n_load[u] == 2 && n_work[u] == 2 * WC[u], "second block");
      check(setup_seq_err[u] == 0 && work_seq_err[u] == 0, "cycle numbering and last");
    end
    rst = 1'b1;
    @(negedge clk);
    rst = 1'b0;
    @(negedge clk);
    for (int u = 0; u < NU; u++) check(!ready[u] && !work[u], "RESET clears READY");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
