// hash_ed_top: the two error-detecting hash engines, ECHO-256 and
// Fugue-256, side by side.
//
// The engines are independent: each has its own command interface and its
// own error flags, and both may run at the same time.  The only shared
// inputs are the clock, the reset and the fault-injection test hook
// (fi_site_i selects the engine and the point; FI_NONE in normal use).
// alarm_o is the OR of all error indications of both engines, for a
// system that only wants one "result is not trustworthy" signal.
// See echo_compress_ed and fugue_core_ed for the timing of each engine.
module hash_ed_top
  import hash_ed_pkg::*;
#(
  parameter int ECHO_LANES  = 4,
  parameter int ECHO_FLAG_W = 32,
  parameter int ECHO_PAR_W  = 1,
  parameter int ECHO_HSIZE  = 256
) (
  input  logic          clk,
  input  logic          rst_n,
  // ECHO-256
  input  logic          echo_start_i,
  input  logic          echo_first_i,
  input  eword_t        echo_salt_i,
  input  eword_t        echo_counter_i,
  input  eword_t        echo_msg_i   [12],
  output logic          echo_busy_o,
  output logic          echo_done_o,
  output eword_t        echo_chain_o [4],
  output logic [255:0]  echo_hash_o,
  output logic          echo_err_aes_o,
  output logic          echo_err_bmc_o,
  output logic          echo_err_fin_o,
  // Fugue-256
  input  logic          fugue_init_i,
  input  logic          fugue_m_valid_i,
  output logic          fugue_m_ready_o,
  input  fword_t        fugue_m_i,
  input  logic          fugue_final_i,
  output logic          fugue_busy_o,
  output logic          fugue_done_o,
  output logic [255:0]  fugue_hash_o,
  output logic          fugue_err_trc_o,
  output logic          fugue_err_sm_o,
  // combined alarm
  output logic          alarm_o,
  // fault-injection test hook
  input  fault_site_e   fi_site_i,
  input  logic [4:0]    fi_word_i,
  input  logic [127:0]  fi_mask_i
);
  logic echo_err, fugue_err;

  echo_compress_ed #(.LANES(ECHO_LANES), .FLAG_W(ECHO_FLAG_W), .PAR_W(ECHO_PAR_W), .HSIZE(ECHO_HSIZE)) u_echo (
    .clk, .rst_n,
    .start_i(echo_start_i), .first_i(echo_first_i), .salt_i(echo_salt_i),
    .counter_i(echo_counter_i), .msg_i(echo_msg_i),
    .busy_o(echo_busy_o), .done_o(echo_done_o), .chain_o(echo_chain_o),
    .hash_o(echo_hash_o), .err_o(echo_err), .err_aes_o(echo_err_aes_o),
    .err_bmc_o(echo_err_bmc_o), .err_fin_o(echo_err_fin_o),
    .fi_site_i(fi_site_i), .fi_word_i(fi_word_i[3:0]), .fi_mask_i(fi_mask_i));

  fugue_core_ed u_fugue (
    .clk, .rst_n,
    .init_i(fugue_init_i), .m_valid_i(fugue_m_valid_i), .m_ready_o(fugue_m_ready_o),
    .m_i(fugue_m_i), .final_i(fugue_final_i), .busy_o(fugue_busy_o),
    .done_o(fugue_done_o), .hash_o(fugue_hash_o), .err_o(fugue_err),
    .err_trc_o(fugue_err_trc_o), .err_sm_o(fugue_err_sm_o),
    .fi_site_i(fi_site_i), .fi_word_i(fi_word_i), .fi_mask_i(fi_mask_i));

  assign alarm_o = echo_err | fugue_err;
endmodule
