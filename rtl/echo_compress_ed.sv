// echo_compress_ed: iterative ECHO-256 (Compress512) engine with concurrent
// error detection.
//
// One call compresses a 1536-bit message block (twelve 128-bit words
// m^0..m^11) into the 512-bit chaining value (v^0..v^3).  The 2048-bit state
// (word 4*col + row; column 0 = chaining value, columns 1..3 = message) goes
// through eight BIG rounds of BIG.SubWords, BIG.ShiftRows and BIG.MixColumns,
// then BIG.Final XORs it with the input state.  BIG.SubWords applies two AES
// rounds to each word, the first keyed by the running counter k, the second
// by the salt; k starts at the block's bit counter C_i and grows by one per
// word (16 per BIG round).  The counter enters the AES key as a little-endian
// 128-bit integer.  HSIZE (128..256, default 256) selects the output size
// of the ECHO variants that share Compress512: it sets the IV (HSIZE as a
// little-endian 128-bit number in each v^j) and the truncation T, which
// keeps the first HSIZE bits of v^0 || v^1 in the top of hash_o (the
// remaining low bits read zero).
//
// Schedule (this design's choice; the paper gives no cycle schedule):
// LANES AES-round units work on LANES words at a time.  A group takes two
// cycles (counter-keyed round, then salt-keyed round), so BIG.SubWords takes
// 2*16/LANES cycles; BIG.ShiftRows+BIG.MixColumns take one more cycle; 
// BIG.Final one cycle at the end; loading the state takes the start cycle.
// done_o is high 2 + 8*(32/LANES + 1) cycles after the cycle in which
// start_i was taken (74 with LANES = 4), and start_i may be raised again in
// the done_o cycle, so back-to-back blocks take 74 cycles each.
//
// Interface: start_i is taken when busy_o is low.  first_i selects the
// IV as the previous chaining value (first block), otherwise the
// chain_o held from the previous call is used.  salt_i, counter_i and msg_i
// are sampled with start_i.  done_o pulses for one cycle when chain_o and
// hash_o are valid.
//
// Error detection (the paper's schemes): every AES-round unit checks
// MixColumns/AddRoundKey (aes_round_ed), BIG.MixColumns checks its 64 column
// signatures (echo_big_mix_ed) and BIG.Final compares predicted parities
// (echo_big_final_ed).  ShiftRows and BIG.ShiftRows are wiring.  The three
// err_*_o outputs are sticky from start_i until the next start_i; err_o is
// their OR.  fi_site_i / fi_word_i / fi_mask_i form a fault-injection test
// hook (FI_NONE or a zero mask in normal use).
module echo_compress_ed
  import hash_ed_pkg::*;
#(
  parameter int LANES  = 4,   // AES-round units; must divide 16
  parameter int FLAG_W = 32,  // width of each AES-round error flag
  parameter int PAR_W  = 1,   // parity bits per chaining word in BIG.Final
  parameter int HSIZE  = 256  // hash length, 128..256 (all use Compress512)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start_i,
  input  logic          first_i,
  input  eword_t        salt_i,
  input  eword_t        counter_i,
  input  eword_t        msg_i   [12],
  output logic          busy_o,
  output logic          done_o,
  output eword_t        chain_o [4],
  output logic [255:0]  hash_o,
  output logic          err_o,
  output logic          err_aes_o,
  output logic          err_bmc_o,
  output logic          err_fin_o,
  input  fault_site_e   fi_site_i,
  input  logic [3:0]    fi_word_i,
  input  eword_t        fi_mask_i
);
  localparam int GROUPS = 16 / LANES;
  // IV: HSIZE as a 128-bit little-endian integer in each chaining word.
  localparam eword_t IV = {8'(HSIZE % 256), 8'(HSIZE / 256), 112'h0};
  localparam logic [255:0] HASH_MASK = ~(256'(0)) << (256 - HSIZE);

  typedef enum logic [1:0] {S_IDLE, S_SUB, S_MIX, S_FINAL} state_e;

  state_e  st;
  eword_t  w    [16];        // working state
  eword_t  win  [16];        // state that entered this compression
  eword_t  kreg;             // counter value of the first word of the group
  eword_t  salt_q;
  logic [2:0]                 round_q;
  logic [$clog2(GROUPS+1)-1:0] grp_q;
  logic                       phase_q;

  // ---------------- BIG.SubWords lanes (word grp_q*LANES + l in lane l)
  eword_t             lane_in  [LANES];
  eword_t             lane_key [LANES];
  eword_t             lane_out [LANES];
  eword_t             lane_flt [LANES];
  logic [FLAG_W-1:0]  lane_err [LANES];
  logic               aes_err;

  function automatic eword_t bswap128(eword_t x);
    eword_t y;
    for (int i = 0; i < 16; i++) y[127-8*i -: 8] = x[8*i +: 8];
    return y;
  endfunction

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    always_comb begin
      lane_in[l]  = w[int'(grp_q) * LANES + l];
      lane_key[l] = phase_q ? salt_q : bswap128(kreg + eword_t'(l));
      lane_flt[l] = (l == 0 && fi_site_i == FI_AES_MC) ? fi_mask_i : '0;
    end
    aes_round_ed #(.FLAG_W(FLAG_W)) u_aes (
      .state_i(lane_in[l]), .key_i(lane_key[l]), .fault_i(lane_flt[l]),
      .state_o(lane_out[l]), .err_o(lane_err[l]));
  end

  always_comb begin
    aes_err = 1'b0;
    for (int l = 0; l < LANES; l++) aes_err |= |lane_err[l];
  end

  // ---------------- BIG.ShiftRows + BIG.MixColumns
  eword_t      bmc_out [16];
  eword_t      bmc_flt [16];
  logic [63:0] bmc_err;

  always_comb
    for (int i = 0; i < 16; i++)
      bmc_flt[i] = (fi_site_i == FI_BIG_MC && fi_word_i == 4'(i)) ? fi_mask_i : '0;

  echo_big_mix_ed u_bmc (.w_i(w), .fault_i(bmc_flt), .w_o(bmc_out), .err_o(bmc_err));

  // ---------------- BIG.Final
  eword_t     fin_out [4];
  eword_t     fin_flt [4];
  logic [3:0] fin_err;

  always_comb
    for (int j = 0; j < 4; j++)
      fin_flt[j] = (fi_site_i == FI_BIG_FINAL && fi_word_i[1:0] == 2'(j)) ? fi_mask_i : '0;

  echo_big_final_ed #(.PAR_W(PAR_W)) u_fin (
    .in_i(win), .a_i(w), .fault_i(fin_flt), .v_o(fin_out), .err_o(fin_err));

  // ---------------- control and state
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= S_IDLE;
      done_o    <= 1'b0;
      round_q   <= '0;
      grp_q     <= '0;
      phase_q   <= 1'b0;
      kreg      <= '0;
      salt_q    <= '0;
      err_aes_o <= 1'b0;
      err_bmc_o <= 1'b0;
      err_fin_o <= 1'b0;
      for (int i = 0; i < 16; i++) begin w[i] <= '0; win[i] <= '0; end
      for (int j = 0; j < 4; j++) chain_o[j] <= '0;
    end else begin
      done_o <= 1'b0;
      unique case (st)
        S_IDLE: if (start_i) begin
          for (int j = 0; j < 4; j++) begin
            w[j]   <= first_i ? IV : chain_o[j];
            win[j] <= first_i ? IV : chain_o[j];
          end
          for (int k = 0; k < 12; k++) begin
            w[k+4]   <= msg_i[k];
            win[k+4] <= msg_i[k];
          end
          kreg      <= counter_i;
          salt_q    <= salt_i;
          round_q   <= '0;
          grp_q     <= '0;
          phase_q   <= 1'b0;
          err_aes_o <= 1'b0;
          err_bmc_o <= 1'b0;
          err_fin_o <= 1'b0;
          st        <= S_SUB;
        end
        S_SUB: begin
          for (int l = 0; l < LANES; l++) w[int'(grp_q) * LANES + l] <= lane_out[l];
          err_aes_o <= err_aes_o | aes_err;
          phase_q   <= ~phase_q;
          if (phase_q) begin
            kreg <= kreg + eword_t'(LANES);
            if (int'(grp_q) == GROUPS - 1) begin
              grp_q <= '0;
              st    <= S_MIX;
            end else begin
              grp_q <= grp_q + 1'b1;
            end
          end
        end
        S_MIX: begin
          w         <= bmc_out;
          err_bmc_o <= err_bmc_o | (|bmc_err);
          round_q   <= round_q + 1'b1;
          st        <= (round_q == 3'(ECHO_ROUNDS - 1)) ? S_FINAL : S_SUB;
        end
        S_FINAL: begin
          chain_o   <= fin_out;
          err_fin_o <= err_fin_o | (|fin_err);
          done_o    <= 1'b1;
          st        <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  assign busy_o = (st != S_IDLE);
  assign hash_o = {chain_o[0], chain_o[1]} & HASH_MASK;
  assign err_o  = err_aes_o | err_bmc_o | err_fin_o;

  // LANES must divide the 16 words of the state.
  initial assert (16 % LANES == 0 && LANES >= 1)
    else $fatal(1, "echo_compress_ed: LANES must divide 16");
  initial assert (HSIZE >= 128 && HSIZE <= 256)
    else $fatal(1, "echo_compress_ed: HSIZE must be 128..256");
endmodule
