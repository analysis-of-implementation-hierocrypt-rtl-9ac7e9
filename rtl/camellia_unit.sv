// camellia_unit: Camellia-128 encryption (decryption) unit, loop-unrolled, three
// rounds per clock.
//
// Structure (same block diagram as the Hierocrypt-3 unit): a control unit, a main
// key register and K_A register (cam_keysched), an input register that also holds
// the state between cycles, the three-round datapath (cam_round3) and a result
// register.
//
// Setup phase, 2 clocks after the SETUP edge has loaded the main key:
//   1: two rounds on K_L with Sigma1, Sigma2, XOR K_L   -> K_A register
//   2: two rounds on that value with Sigma3, Sigma4      -> K_A register = K_A
// Work phase, 6 clocks after the START edge has loaded the input register:
//   1: pre-whitening + rounds 1-3     2: rounds 4-6 + FL / FL^-1
//   3: rounds 7-9                     4: rounds 10-12 + FL / FL^-1
//   5: rounds 13-15                   6: rounds 16-18 + post-whitening -> result
// READY rises after setup and stays high until RESET; WORK is high during the six
// work clocks; data_out is valid from the clock edge that drops WORK and holds until
// the next block ends. A block occupies 7 clocks (load + 6), which is the cycle
// count behind the paper's 240 Mb/s at 13.15 MHz.
// The schedule is the paper's. The decrypt input (sampled with START) and the
// reuse of the round datapath during setup are this design's choices.
module camellia_unit
  import cam_pkg::*;
#(
  parameter int unsigned SETUP_CYCLES = 2,
  parameter int unsigned WORK_CYCLES  = 6
) (
  input  logic   clk,
  input  logic   rst,
  input  logic   setup_i,
  input  logic   start_i,
  input  logic   decrypt_i,
  input  block_t main_key_i,
  input  block_t data_i,
  output block_t data_o,
  output logic   ready_o,
  output logic   work_o
);

  logic       key_load, setup_en, data_load, last;
  logic [3:0] setup_cyc, work_cyc;

  ctrl_unit #(.SETUP_CYCLES(SETUP_CYCLES), .WORK_CYCLES(WORK_CYCLES), .CW(4)) u_ctrl (
    .clk, .rst, .setup_i, .start_i,
    .ready_o, .work_o,
    .key_load_o(key_load), .setup_o(setup_en), .setup_cyc_o(setup_cyc),
    .data_load_o(data_load), .work_cyc_o(work_cyc), .last_o(last)
  );

  block_t  state_q, result_q;
  logic    dec_q;
  block_t  setup_state, round_in, round_out, round_r2;
  block_t  kw_pre, kw_post;
  word64_t rk [3];
  word64_t kl_fl, kl_flinv;
  logic    pre_en, fl_en, post_en;

  cam_keysched u_ks (
    .clk, .rst,
    .key_we_i(key_load), .key_i(main_key_i),
    .setup_en_i(setup_en), .setup_cyc_i(setup_cyc[0]),
    .setup_res_i(round_r2), .setup_state_o(setup_state),
    .work_cyc_i(work_cyc[2:0]), .decrypt_i(dec_q),
    .k_o(rk), .kw_pre_o(kw_pre), .kw_post_o(kw_post),
    .kl_fl_o(kl_fl), .kl_flinv_o(kl_flinv)
  );

  assign round_in = setup_en ? setup_state : state_q;
  assign pre_en   = work_o && (work_cyc == 4'd0);
  assign fl_en    = work_o && (work_cyc == 4'd1 || work_cyc == 4'd3);
  assign post_en  = last;

  cam_round3 u_round (
    .state_in(round_in), .k0(rk[0]), .k1(rk[1]), .k2(rk[2]),
    .prewhite_en(pre_en), .kw_pre(kw_pre),
    .fl_en(fl_en), .kl_fl(kl_fl), .kl_flinv(kl_flinv),
    .postwhite_en(post_en), .kw_post(kw_post),
    .state_r2(round_r2), .state_out(round_out)
  );

  always_ff @(posedge clk) begin
    if (rst) begin
      state_q  <= '0;
      result_q <= '0;
      dec_q    <= 1'b0;
    end else begin
      if (data_load) begin
        state_q <= data_i;
        dec_q   <= decrypt_i;
      end else if (work_o) begin
        state_q <= round_out;
      end
      if (last) result_q <= round_out;
    end
  end

  assign data_o = result_q;

endmodule
