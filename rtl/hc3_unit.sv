// hc3_unit: Hierocrypt-3 encryption (decryption) unit in the "very long setup"
// organisation.
//
// The unit holds the CONTROL UNIT, the INPUT REGISTER (which also keeps the state
// between rounds), one round datapath (hc3_round) and the RESULT REGISTER. A START
// edge loads the input block and samples decrypt_i; then six clocks follow:
//   encryption: work cycles 0..4 rho with K^(1)..K^(5); work cycle 5 XS with K^(6)
//               and the final key addition with K^(7)_1 at once
//   decryption: work cycle 0 key addition with K^(7)_1 and XS^-1 with K^(6);
//               work cycles 1..5 rho^-1 with K^(5)..K^(1)
// so a block occupies 7 clocks (load + 6), against 8 when XS and AK are separate.
//
// The key side of the block diagram (main key register, key precomputation,
// intermediate storage, key round, subkey buffer) cannot be built, because P^(n),
// M_5E, M_B3, the S-box and the constants G and H are not available; the unit
// therefore tells an external key schedule what it needs and takes the keys in:
//   ks_key_load_o      1 for the clock in which the main key is to be loaded
//   ks_setup_o         1 during the SETUP_CYCLES key-setup clocks,
//   ks_setup_cyc_o     numbered 0..SETUP_CYCLES-1
//   rk_idx_o           t of the round key K^(t) needed in this clock (0 when idle)
//   rk_i, ak_i         K^(t) (256 bits) and K^(7)_1 || K^(7)_2 (128 bits), same clock
// The S-box layers, MDS_H and MDS_H^-1 of the round are brought out as ports (see
// hc3_round).
// SETUP_CYCLES = 15 assumes five key-update steps (sigma_0 and four sigma) of three
// clocks each; the paper gives the three clocks per sigma step, not the total.
module hc3_unit
  import hc3_pkg::*;
#(
  parameter int unsigned SETUP_CYCLES = 15,
  parameter int unsigned WORK_CYCLES  = 6
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       setup_i,
  input  logic       start_i,
  input  logic       decrypt_i,
  input  block_t     data_i,
  output block_t     data_o,
  output logic       ready_o,
  output logic       work_o,
  // external key schedule
  output logic       ks_key_load_o,
  output logic       ks_setup_o,
  output logic [3:0] ks_setup_cyc_o,
  output logic [2:0] rk_idx_o,
  input  rkey_t      rk_i,
  input  block_t     ak_i,
  // external S-box layers and MDS_H
  output logic       inv_o,
  output block_t     sl1_in_o,
  input  block_t     sl1_out_i,
  output block_t     sl2_in_o,
  input  block_t     sl2_out_i,
  output block_t     mdsh_in_o,
  input  block_t     mdsh_out_i,
  output block_t     mdshi_in_o,
  input  block_t     mdshi_out_i
);

  logic       data_load, last;
  logic [3:0] work_cyc;
  block_t     state_q, result_q, round_out;
  logic       dec_q;

  ctrl_unit #(.SETUP_CYCLES(SETUP_CYCLES), .WORK_CYCLES(WORK_CYCLES), .CW(4)) u_ctrl (
    .clk, .rst, .setup_i, .start_i,
    .ready_o, .work_o,
    .key_load_o(ks_key_load_o), .setup_o(ks_setup_o), .setup_cyc_o(ks_setup_cyc_o),
    .data_load_o(data_load), .work_cyc_o(work_cyc), .last_o(last)
  );

  // round key index t: 1..6 for encryption, 6..1 for decryption
  assign rk_idx_o = !work_o ? 3'd0 : (dec_q ? 3'(4'd6 - work_cyc) : 3'(work_cyc + 4'd1));

  hc3_round u_round (
    .x_i(state_q), .rk_i(rk_i), .ak_i(ak_i), .dec_i(dec_q),
    .last_i(last), .first_i(work_cyc == 4'd0), .inv_o,
    .sl1_in_o, .sl1_out_i, .sl2_in_o, .sl2_out_i, .mdsh_in_o, .mdsh_out_i, .mdshi_in_o, .mdshi_out_i,
    .y_o(round_out)
  );

  always_ff @(posedge clk) begin
    if (rst) begin
      state_q  <= '0;
      result_q <= '0;
      dec_q    <= 1'b0;
    end else begin
      if (data_load)   dec_q   <= decrypt_i;
      if (data_load)   state_q <= data_i;
      else if (work_o) state_q <= round_out;
      if (last)        result_q <= round_out;
    end
  end

  assign data_o = result_q;

endmodule
