// ctrl_unit: the CONTROL UNIT shared by the Hierocrypt-3 and Camellia units.
//
// It implements the two-phase protocol of both units. After RESET the unit is idle
// and READY is 0. A rising edge on SETUP (sampled on the clock) makes the unit load
// the main key (key_load_o for one cycle) and run SETUP_CYCLES key-setup cycles
// (setup_o high, setup_cyc_o counting 0..SETUP_CYCLES-1). READY then goes to 1 and
// stays 1 until the next RESET. While READY is 0 every edge on START is ignored;
// while READY is 1 and the unit is not working, a rising edge on START loads the
// input register (data_load_o for one cycle) and starts WORK_CYCLES work cycles
// (WORK high, work_cyc_o counting 0..WORK_CYCLES-1, last_o in the last one, in which
// the result register is written). WORK then drops to 0.
//
// Timing: a block takes one clock to load plus WORK_CYCLES clocks, so a new START
// edge can be taken WORK_CYCLES+1 clocks after the previous one.
// From the paper: READY held until RESET, START ignored while READY is 0, WORK high
// while working. This design's choices: RESET is a synchronous active-high reset;
// SETUP is edge-triggered like START and is ignored once READY is 1; START edges
// during WORK are ignored.
module ctrl_unit #(
  parameter int unsigned SETUP_CYCLES = 2,
  parameter int unsigned WORK_CYCLES  = 6,
  parameter int unsigned CW           = 4   // counter width
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          setup_i,
  input  logic          start_i,
  output logic          ready_o,
  output logic          work_o,
  output logic          key_load_o,
  output logic          setup_o,
  output logic [CW-1:0] setup_cyc_o,
  output logic          data_load_o,
  output logic [CW-1:0] work_cyc_o,
  output logic          last_o
);

  typedef enum logic [1:0] {S_IDLE, S_SETUP, S_READY, S_WORK} state_t;

  state_t        state_q;
  logic          setup_q, start_q;
  logic [CW-1:0] cnt_q;
  logic          setup_rise, start_rise;

  assign setup_rise = setup_i & ~setup_q;
  assign start_rise = start_i & ~start_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      state_q <= S_IDLE;
      setup_q <= 1'b0;  // inputs count as low during reset: a level held high
      start_q <= 1'b0;  // through reset is seen as an edge in the first clock after it
      cnt_q   <= '0;
    end else begin
      setup_q <= setup_i;
      start_q <= start_i;
      unique case (state_q)
        S_IDLE: if (setup_rise) begin
          state_q <= S_SETUP;
          cnt_q   <= '0;
        end
        S_SETUP: begin
          if (cnt_q == CW'(SETUP_CYCLES - 1)) begin
            state_q <= S_READY;
            cnt_q   <= '0;
          end else cnt_q <= cnt_q + 1'b1;
        end
        S_READY: if (start_rise) begin
          state_q <= S_WORK;
          cnt_q   <= '0;
        end
        S_WORK: begin
          if (cnt_q == CW'(WORK_CYCLES - 1)) begin
            state_q <= S_READY;
            cnt_q   <= '0;
          end else cnt_q <= cnt_q + 1'b1;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assign ready_o     = (state_q == S_READY) || (state_q == S_WORK);
  assign work_o      = (state_q == S_WORK);
  assign setup_o     = (state_q == S_SETUP);
  assign key_load_o  = (state_q == S_IDLE) && setup_rise;
  assign data_load_o = (state_q == S_READY) && start_rise;
  assign setup_cyc_o = setup_o ? cnt_q : '0;
  assign work_cyc_o  = work_o ? cnt_q : '0;
  assign last_o      = work_o && (cnt_q == CW'(WORK_CYCLES - 1));

  // Protocol rules: WORK only after setup has finished; never both phases at once.
  a_work_needs_ready: assert property (@(posedge clk) disable iff (rst) work_o |-> ready_o);
  a_phases_exclusive: assert property (@(posedge clk) disable iff (rst) !(work_o && setup_o));

endmodule
