// fugue_core_ed: Fugue-256 engine with concurrent error detection.
//
// State: thirty 32-bit words S_0..S_29.  Every cycle one "step" passes the
// state through the linear unit (fugue_trc_ed) and, except in the very last
// step, through SMIX on S_0..S_3 (fugue_smix_ed).
//   message word m_i : cycle 1  TIX(m_i), ROR3, CMIX, SMIX
//                      cycle 2  ROR3, CMIX, SMIX
//   final stage G    : 5 cycles  ROR3, CMIX, SMIX
//                      13 x (S4+=S0, S15+=S0, ROR15, SMIX;
//                            S4+=S0, S16+=S0, ROR14, SMIX)  = 26 cycles
//                      1 cycle   S4+=S0, S15+=S0
//   hash = S1 S2 S3 S4 S15 S16 S17 S18 (S1 in the top bits).
// Two cycles per 32-bit word is the rate behind the paper's throughput
// figure (32 bits x 547 MHz / 8.77 Gbps = 2.0 cycles); the final-stage
// sequence, the output words and the initial value come from the Fugue-256
// definition, which the paper refers to but does not restate.
//
// Interface: init_i loads the initial value (S_0..S_21 = 0, S_22..S_29 =
// the Fugue-256 IV) and clears the error flags; it is taken when the engine
// is idle or waiting for a word.  Message words use a valid/ready
// handshake (m_valid_i, m_ready_o); m_ready_o is high only between words.
// The caller pads the message (zeros to a word boundary, then the 64-bit
// bit length as two words) before sending it.  final_i, taken when
// m_ready_o is high and m_valid_i is low, runs the 32-step final stage,
// the first step in the request cycle itself; done_o pulses 32 cycles
// after the request cycle, with hash_o valid.  A word taken in cycle t
// makes m_ready_o high again in cycle t+2.
//
// Error detection: err_trc_o (signature of the linear steps) and err_sm_o
// (Super-Mix parity) are sticky until the next init_i; err_o is their OR.
// fi_site_i / fi_word_i / fi_mask_i form a fault-injection test hook
// (FI_NONE or a zero mask in normal use).
module fugue_core_ed
  import hash_ed_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          init_i,
  input  logic          m_valid_i,
  output logic          m_ready_o,
  input  fword_t        m_i,
  input  logic          final_i,
  output logic          busy_o,
  output logic          done_o,
  output logic [255:0]  hash_o,
  output logic          err_o,
  output logic          err_trc_o,
  output logic          err_sm_o,
  input  fault_site_e   fi_site_i,
  input  logic [4:0]    fi_word_i,
  input  logic [127:0]  fi_mask_i
);
  typedef enum logic [2:0] {S_IDLE, S_WAIT, S_SUB2, S_G1, S_G2, S_FIN} state_e;

  state_e     st;
  fword_t     s [30];
  logic [4:0] cnt;

  fugue_op_e  op;
  logic       smix_en;
  logic       step;       // the state is updated this cycle
  fword_t     lin   [30];
  fword_t     lin_f [30];
  fword_t     sm    [4];
  logic       trc_err, sm_err;

  always_comb begin
    op      = F_RC;
    smix_en = 1'b1;
    step    = 1'b0;
    unique case (st)
      S_WAIT: begin
        // a word starts a round; a final request starts the final stage
        op   = m_valid_i ? F_TRC : F_RC;
        step = m_valid_i | final_i;
      end
      S_SUB2: begin op = F_RC;  step = 1'b1; end
      S_G1:   begin op = F_RC;  step = 1'b1; end
      S_G2:   begin op = cnt[0] ? F_G14 : F_G15; step = 1'b1; end
      S_FIN:  begin op = F_FIN; smix_en = 1'b0; step = 1'b1; end
      default: ;
    endcase
    for (int i = 0; i < 30; i++)
      lin_f[i] = (fi_site_i == FI_CMIX && fi_word_i == 5'(i)) ? fi_mask_i[31:0] : '0;
  end

  fugue_trc_ed u_trc (.s_i(s), .m_i(m_i), .op_i(op), .fault_i(lin_f),
                      .s_o(lin), .err_o(trc_err));

  fugue_smix_ed u_smix (.x_i(lin[0:3]),
                        .fault_i(fi_site_i == FI_SUPERMIX ? fi_mask_i : '0),
                        .y_o(sm), .err_o(sm_err));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= S_IDLE;
      cnt       <= '0;
      done_o    <= 1'b0;
      hash_o    <= '0;
      err_trc_o <= 1'b0;
      err_sm_o  <= 1'b0;
      for (int i = 0; i < 30; i++) s[i] <= '0;
    end else begin
      done_o <= 1'b0;
      if (init_i && (st == S_IDLE || st == S_WAIT)) begin
        for (int i = 0; i < 22; i++) s[i] <= '0;
        for (int i = 0; i < 8; i++) s[22+i] <= FUGUE256_IV[i];
        err_trc_o <= 1'b0;
        err_sm_o  <= 1'b0;
        st        <= S_WAIT;
      end else begin
        if (step) begin
          s <= lin;
          if (smix_en) s[0:3] <= sm;
          err_trc_o <= err_trc_o | trc_err;
          err_sm_o  <= err_sm_o | (smix_en & sm_err);
        end
        unique case (st)
          S_WAIT:
            if (m_valid_i) st <= S_SUB2;
            else if (final_i) begin st <= S_G1; cnt <= 5'd1; end
          S_SUB2: st <= S_WAIT;
          S_G1: begin
            cnt <= cnt + 1'b1;
            if (cnt == 5'd4) begin st <= S_G2; cnt <= '0; end
          end
          S_G2: begin
            cnt <= cnt + 1'b1;
            if (cnt == 5'd25) st <= S_FIN;
          end
          S_FIN: begin
            hash_o <= {lin[1], lin[2], lin[3], lin[4], lin[15], lin[16], lin[17], lin[18]};
            done_o <= 1'b1;
            st     <= S_IDLE;
          end
          default: ;
        endcase
      end
    end
  end

  assign m_ready_o = (st == S_WAIT);
  assign busy_o    = (st != S_IDLE) && (st != S_WAIT);
  assign err_o     = err_trc_o | err_sm_o;
endmodule
