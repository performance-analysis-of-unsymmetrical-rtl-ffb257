// fsmd_scheduler: FSMD that turns a sorted window into the filter output.
//
// It reads the sorted window ro[0..8] (rank order, from the memory array),
// the centre pixel and the window median, and walks the paper's eight states:
//   IDLE           clear the counters F, L and the sum; wait for a window
//   DAT1           count the 0s (F) and the 255s (L) of the window and
//                  their total t_noise. All 0 -> output 0; all 255 -> output
//                  255; both cases return to IDLE.
//   INDEX          if every pixel is 0 or 255 (both present), output the
//                  window mean from the table floor((9-F)*255/9) and return
//                  to IDLE. Otherwise pick the rank indices of the median of
//                  the trimmed array ro[F .. 8-L]: with m = 9-F-L non-noisy
//                  pixels, odd m -> odd = F+(m-1)/2, even m ->
//                  even_u = F+m/2-1 and even_v = F+m/2.
//   DECISION       fetch the indexed pixels: sum = ro[even_u]+ro[even_v]
//                  (m even) or ro[odd] (m odd)
//   OUT_EVEN       UTMED = sum/2 (rounded down)
//   OUT_ODD        UTMED = ro[odd]
//   FINAL          latch centre, UTMED and median together
//   OUTPUT_FINAL   the decision unit compares |centre-UTMED| with T and
//                  |median-UTMED| with T1 and the chosen pixel is
//                  registered on op_o. The state is held for three cycles
//                  (getcnt 0,1,2) and then returns to IDLE.
// The state list, the counters, the 0/255 table and the 40/20 thresholds are
// the paper's. The paper builds the trimmed-median index as a prefixed lookup
// table; here the same indices are computed with small adders. Counting all
// nine pixels is done in the single DAT1 cycle.
//
// Interface: mem_valid_i says ro/centre_i/median_i hold a window and must stay
// stable until mem_clear_o, which is high in the cycle the FSM goes back to
// IDLE. op_valid_o pulses for one cycle with the new op_o; op_o then holds.
// Timing: from the clock edge at which mem_valid_i is first seen in IDLE, op_o
// is registered 6 edges later for a window that reaches OUTPUT_FINAL (IDLE,
// DAT1, INDEX, DECISION, OUT_x, FINAL, OUTPUT_FINAL), 1 edge after DAT1 or
// INDEX for the all-impulse shortcuts. The FSM is back in IDLE 2 edges after
// op_valid_o on the long path and together with op_valid_o on the short ones.
module fsmd_scheduler
  import utmf_pkg::*;
#(
  parameter pixel_t T  = T_DEFAULT,
  parameter pixel_t T1 = T1_DEFAULT
) (
  input  logic      clk,
  input  logic      rst,
  input  logic      mem_valid_i,
  input  pixel_t    ro        [WIN_N],
  input  pixel_t    centre_i,
  input  pixel_t    median_i,
  output logic      mem_clear_o,
  output pixel_t    op_o,
  output logic      op_valid_o,
  output out_kind_t kind_o,
  output pixel_t    utmed_o,
  output count_t    f_o,
  output count_t    l_o,
  output state_t    state_o
);

  state_t         state, state_n;
  count_t         f_cnt, l_cnt, t_noise;   // zeros, 255s, both
  count_t         odd_idx, even_u, even_v;
  logic           m_even;                  // non-noisy count is even
  logic [PIX_W:0] sum;
  pixel_t         utmed;
  pixel_t         centre_f, utmed_f, med_f;
  logic [1:0]     getcnt;

  // DAT1: count 0s and 255s of the whole window
  count_t nz, nl;
  always_comb begin
    nz = '0;
    nl = '0;
    for (int i = 0; i < WIN_N; i++) begin
      if (ro[i] == PIX_MIN) nz = nz + 1'b1;
      if (ro[i] == PIX_MAX) nl = nl + 1'b1;
    end
  end

  // INDEX: rank indices of the trimmed median
  count_t m_cnt, half;
  always_comb begin
    m_cnt = count_t'(WIN_N) - f_cnt - l_cnt;
    half  = m_cnt >> 1;
  end

  // OUTPUT_FINAL: detection and correction
  pixel_t    dec_out;
  out_kind_t dec_kind;

  decision_unit #(.T(T), .T1(T1)) u_decision (
    .centre_i      (centre_f),
    .median_i      (med_f),
    .utmed_i       (utmed_f),
    .out_o         (dec_out),
    .noisy_pixel_o (),
    .noisy_median_o(),
    .kind_o        (dec_kind)
  );

  // next state
  always_comb begin
    state_n = state;
    unique case (state)
      S_IDLE:         if (mem_valid_i) state_n = S_DAT1;
      S_DAT1:         state_n = (nz == count_t'(WIN_N) || nl == count_t'(WIN_N))
                                ? S_IDLE : S_INDEX;
      S_INDEX:        state_n = (t_noise == count_t'(WIN_N)) ? S_IDLE : S_DECISION;
      S_DECISION:     state_n = m_even ? S_OUT_EVEN : S_OUT_ODD;
      S_OUT_EVEN,
      S_OUT_ODD:      state_n = S_FINAL;
      S_FINAL:        state_n = S_OUTPUT_FINAL;
      S_OUTPUT_FINAL: if (getcnt == 2'd2) state_n = S_IDLE;
      default:        state_n = S_IDLE;
    endcase
  end

  assign mem_clear_o = (state != S_IDLE) && (state_n == S_IDLE);

  always_ff @(posedge clk) begin
    if (rst) begin
      state      <= S_IDLE;
      f_cnt      <= '0;
      l_cnt      <= '0;
      t_noise    <= '0;
      odd_idx    <= '0;
      even_u     <= '0;
      even_v     <= '0;
      m_even     <= 1'b0;
      sum        <= '0;
      utmed      <= '0;
      centre_f   <= '0;
      utmed_f    <= '0;
      med_f      <= '0;
      getcnt     <= '0;
      op_o       <= '0;
      op_valid_o <= 1'b0;
      kind_o     <= OUT_KEEP;
    end else begin
      state      <= state_n;
      op_valid_o <= 1'b0;
      unique case (state)
        S_IDLE: begin
          f_cnt   <= '0;
          l_cnt   <= '0;
          t_noise <= '0;
          sum     <= '0;
          getcnt  <= '0;
        end
        S_DAT1: begin
          f_cnt   <= nz;
          l_cnt   <= nl;
          t_noise <= nz + nl;
          if (nz == count_t'(WIN_N)) begin
            op_o       <= PIX_MIN;
            kind_o     <= OUT_ALL0;
            op_valid_o <= 1'b1;
          end else if (nl == count_t'(WIN_N)) begin
            op_o       <= PIX_MAX;
            kind_o     <= OUT_ALL255;
            op_valid_o <= 1'b1;
          end
        end
        S_INDEX: begin
          if (t_noise == count_t'(WIN_N)) begin
            op_o       <= mix_mean(f_cnt);
            kind_o     <= OUT_MIXLUT;
            op_valid_o <= 1'b1;
          end
          m_even  <= ~m_cnt[0];
          odd_idx <= f_cnt + half;
          even_u  <= f_cnt + half - 1'b1;
          even_v  <= f_cnt + half;
        end
        S_DECISION: begin
          if (m_even) sum <= {1'b0, ro[even_u]} + {1'b0, ro[even_v]};
          else        sum <= {1'b0, ro[odd_idx]};
        end
        S_OUT_EVEN: utmed <= sum[PIX_W:1];
        S_OUT_ODD:  utmed <= sum[PIX_W-1:0];
        S_FINAL: begin
          centre_f <= centre_i;
          utmed_f  <= utmed;
          med_f    <= median_i;
        end
        S_OUTPUT_FINAL: begin
          if (getcnt == 2'd0) begin
            op_o       <= dec_out;
            kind_o     <= dec_kind;
            op_valid_o <= 1'b1;
          end
          getcnt <= getcnt + 1'b1;
        end
        default: ;
      endcase
    end
  end

  assign utmed_o = utmed;
  assign f_o     = f_cnt;
  assign l_o     = l_cnt;
  assign state_o = state;

  // The window must stay in the memory array while it is being processed.
  a_mem_held: assert property (@(posedge clk) disable iff (rst)
    (state != S_IDLE) |-> mem_valid_i);

endmodule
