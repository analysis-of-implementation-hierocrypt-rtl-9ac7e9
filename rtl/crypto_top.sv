// crypto_top: the two cipher units side by side, Hierocrypt-3 and Camellia-128.
//
// Both are iterative 128-bit block cipher units with the same outside behaviour:
// a SETUP edge loads the main key and runs key setup, READY then stays high until
// RESET, a START edge loads one block and WORK is high while it is processed.
//   cam_*  Camellia-128, complete: 2 setup clocks, 7 clocks per block
//          (load + 6 work clocks of three rounds each).
//   hc3_*  Hierocrypt-3 with the very-long-setup schedule: 7 clocks per block
//          (load + 5 rho + XS merged with the final key addition, or the inverse
//          steps for decryption). Its key schedule, S-box layers, MDS_H and
//          MDS_H^-1 are outside this module and connect through the hc3_ks_*,
//          hc3_rk*, hc3_ak, hc3_inv, hc3_sl*, hc3_mdsh_* and hc3_mdshi_* ports.
// The two units share the clock and the synchronous active-high reset and are
// otherwise independent; in the original work they are separate FPGA designs.
module crypto_top (
  input  logic           clk,
  input  logic           rst,
  // Camellia unit
  input  logic           cam_setup,
  input  logic           cam_start,
  input  logic           cam_decrypt,
  input  logic [127:0]   cam_main_key,
  input  logic [127:0]   cam_data_in,
  output logic [127:0]   cam_data_out,
  output logic           cam_ready,
  output logic           cam_work,
  // Hierocrypt-3 unit
  input  logic           hc3_setup,
  input  logic           hc3_start,
  input  logic           hc3_decrypt,
  input  logic [127:0]   hc3_data_in,
  output logic [127:0]   hc3_data_out,
  output logic           hc3_ready,
  output logic           hc3_work,
  output logic           hc3_ks_key_load,
  output logic           hc3_ks_setup,
  output logic [3:0]     hc3_ks_setup_cyc,
  output logic [2:0]     hc3_rk_idx,
  input  logic [255:0]   hc3_rk,
  input  logic [127:0]   hc3_ak,
  output logic           hc3_inv,
  output logic [127:0]   hc3_sl1_in,
  input  logic [127:0]   hc3_sl1_out,
  output logic [127:0]   hc3_sl2_in,
  input  logic [127:0]   hc3_sl2_out,
  output logic [127:0]   hc3_mdsh_in,
  input  logic [127:0]   hc3_mdsh_out,
  output logic [127:0]   hc3_mdshi_in,
  input  logic [127:0]   hc3_mdshi_out
);

  camellia_unit u_cam (
    .clk, .rst,
    .setup_i(cam_setup), .start_i(cam_start), .decrypt_i(cam_decrypt),
    .main_key_i(cam_main_key), .data_i(cam_data_in), .data_o(cam_data_out),
    .ready_o(cam_ready), .work_o(cam_work)
  );

  hc3_unit u_hc3 (
    .clk, .rst,
    .setup_i(hc3_setup), .start_i(hc3_start), .decrypt_i(hc3_decrypt),
    .data_i(hc3_data_in), .data_o(hc3_data_out),
    .ready_o(hc3_ready), .work_o(hc3_work),
    .ks_key_load_o(hc3_ks_key_load), .ks_setup_o(hc3_ks_setup),
    .ks_setup_cyc_o(hc3_ks_setup_cyc), .rk_idx_o(hc3_rk_idx),
    .rk_i(hc3_rk), .ak_i(hc3_ak),
    .inv_o(hc3_inv), .sl1_in_o(hc3_sl1_in), .sl1_out_i(hc3_sl1_out),
    .sl2_in_o(hc3_sl2_in), .sl2_out_i(hc3_sl2_out),
    .mdsh_in_o(hc3_mdsh_in), .mdsh_out_i(hc3_mdsh_out),
    .mdshi_in_o(hc3_mdshi_in), .mdshi_out_i(hc3_mdshi_out)
  );

endmodule
