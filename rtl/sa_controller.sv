// sa_controller: sample counter and state machine of the select-and-average
// block.
//
// Counting the beats of the radio stream (two samples each), it walks
// through one channel snapshot after another:
//   SKIP_P   P samples are discarded (propagation delay plus one extra
//            sounding signal so that the captured ones are circular
//            convolutions of the channel with the sounding signal),
//   CAPTURE  M sounding signals of L samples are tagged for the averager:
//            the first as IN, the middle ones as ADD_IN, the last as
//            ADD_OUT (IN_OUT when M = 1),
//   SKIP_R   R samples are discarded until the next snapshot,
// and then starts again with SKIP_P.  This sequence, and the three averager
// states, are the paper's; the phase encoding, the repetition of snapshots
// while enabled and the handling of odd settings are this design's.
//
// Settings are latched at the start of every snapshot, so a host write only
// takes effect at the next one.  Lengths are given in samples and must be
// even (two samples per clock); the low bit is ignored.  L/2 is clamped to
// [2, DEPTH] words and M = 0 is treated as 1.  A zero-length skip phase is
// left out.  When enable falls the controller returns to IDLE at once;
// in IDLE every beat is discarded.  Counting starts with the first beat
// after enable rises; the paper starts the stream at a PPS edge, which the
// radio does upstream of this block.
//
// Interface: the radio stream enters on in_*; beats of a skip phase are
// consumed here (in_ready_o = 1) and never reach the averager; captured
// beats go out on cap_* with their mode, word address and last flag, and
// are handshaken with the averager.  Purely a tag-and-forward stage: no
// added latency.
module sa_controller
  import sa_pkg::*;
#(
  parameter int unsigned DEPTH = 512,          // BRAM words (MAX_L / 2)
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             rst,
  input  sa_cfg_t          cfg_i,

  input  logic             in_valid_i,
  output logic             in_ready_o,
  input  beat_t            in_data_i,

  output logic             cap_valid_o,
  input  logic             cap_ready_i,
  output beat_t            cap_data_o,
  output sa_mode_e         cap_mode_o,
  output logic [AW-1:0]    cap_addr_o,
  output logic             cap_last_o,
  output logic [4:0]       k_o,          // K latched for the snapshot

  output logic [1:0]       phase_o,      // 0 idle, 1 skip P, 2 capture, 3 skip R
  output logic [REG_W-1:0] snapshots_o   // completed snapshots since enable
);

  typedef enum logic [1:0] {
    PH_IDLE    = 2'd0,
    PH_SKIP_P  = 2'd1,
    PH_CAPTURE = 2'd2,
    PH_SKIP_R  = 2'd3
  } phase_e;

  phase_e            phase;
  logic [REG_W-1:0]  cnt;       // beat index within the phase
  logic [REG_W-1:0]  sig;       // sounding signal index within CAPTURE
  logic [REG_W-1:0]  lw_q, pw_q, rw_q, m_q;
  logic [4:0]        k_q;

  // Settings of the next snapshot, in beats.
  logic [REG_W-1:0]  lw_n, pw_n, rw_n, m_n;
  phase_e            first_ph;

  sa_mode_e          mode;
  logic              fire;
  logic              cnt_end;

  always_comb begin
    lw_n = cfg_i.l_len >> 1;
    if (lw_n < 2)     lw_n = 2;
    if (lw_n > DEPTH) lw_n = DEPTH;
    pw_n = cfg_i.p_len >> 1;
    rw_n = cfg_i.r_len >> 1;
    m_n  = (cfg_i.m_num == 0) ? 1 : cfg_i.m_num;
    first_ph = (pw_n != 0) ? PH_SKIP_P : PH_CAPTURE;
  end

  always_comb begin
    mode = MODE_SKIP;
    if (phase == PH_CAPTURE) begin
      if (m_q == 1)            mode = MODE_IN_OUT;
      else if (sig == 0)       mode = MODE_IN;
      else if (sig == m_q - 1) mode = MODE_ADD_OUT;
      else                     mode = MODE_ADD_IN;
    end
  end

  assign cap_valid_o = in_valid_i && (mode != MODE_SKIP);
  assign in_ready_o  = (mode == MODE_SKIP) ? 1'b1 : cap_ready_i;
  assign cap_data_o  = in_data_i;
  assign cap_mode_o  = mode;
  assign cap_addr_o  = cnt[AW-1:0];
  assign cap_last_o  = (cnt == lw_q - 1);
  assign k_o         = k_q;
  assign phase_o     = phase;

  assign fire = in_valid_i && in_ready_o;

  always_comb begin
    unique case (phase)
      PH_SKIP_P:  cnt_end = (cnt == pw_q - 1);
      PH_CAPTURE: cnt_end = (cnt == lw_q - 1);
      PH_SKIP_R:  cnt_end = (cnt == rw_q - 1);
      default:    cnt_end = 1'b0;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      phase       <= PH_IDLE;
      cnt         <= '0;
      sig         <= '0;
      lw_q        <= 2;
      pw_q        <= '0;
      rw_q        <= '0;
      m_q         <= 1;
      k_q         <= '0;
      snapshots_o <= '0;
    end else if (!cfg_i.enable) begin
      phase <= PH_IDLE;
      cnt   <= '0;
      sig   <= '0;
    end else if (phase == PH_IDLE) begin
      // Start of the first snapshot.
      lw_q        <= lw_n;
      pw_q        <= pw_n;
      rw_q        <= rw_n;
      m_q         <= m_n;
      k_q         <= cfg_i.k_shift;
      phase       <= first_ph;
      cnt         <= '0;
      sig         <= '0;
      snapshots_o <= '0;
    end else if (fire) begin
      if (!cnt_end) begin
        cnt <= cnt + 1;
      end else begin
        cnt <= '0;
        unique case (phase)
          PH_SKIP_P: phase <= PH_CAPTURE;
          PH_CAPTURE: begin
            if (sig != m_q - 1) begin
              sig <= sig + 1;
            end else begin
              sig         <= '0;
              snapshots_o <= snapshots_o + 1;
              if (rw_q != 0) begin
                phase <= PH_SKIP_R;
              end else begin
                // Next snapshot follows at once: latch the settings now.
                lw_q  <= lw_n;
                pw_q  <= pw_n;
                rw_q  <= rw_n;
                m_q   <= m_n;
                k_q   <= cfg_i.k_shift;
                phase <= first_ph;
              end
            end
          end
          PH_SKIP_R: begin
            lw_q  <= lw_n;
            pw_q  <= pw_n;
            rw_q  <= rw_n;
            m_q   <= m_n;
            k_q   <= cfg_i.k_shift;
            phase <= first_ph;
          end
          default: phase <= PH_IDLE;
        endcase
      end
    end
  end

  // A captured beat must not be dropped: the averager has to take it.
  a_cap_hold: assert property (@(posedge clk) disable iff (rst || !cfg_i.enable)
    (cap_valid_o && !cap_ready_i) |=> (cap_valid_o && cap_addr_o == $past(cap_addr_o)))
    else $error("sa_controller: captured beat withdrawn");

endmodule
