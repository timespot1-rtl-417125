// tdc_calib: in-pixel calibration of the two Vernier DCOs.
//
// A period is measured by running a DCO for a window of W cycles of the
// 160 MHz clock and counting its rising edges N; the period estimate is
// T = 2*W*6250 / (2N+1) ps (the edges fall at T, 2T, ..., so N = floor(W*6250/T)
// and window/(N+1/2) is the unbiased estimate), computed by an 11-step
// restoring divider.
//
// Step 1: DCO_0 starts at its slowest setting (longest coarse tap, weakest fine
//   buffers).  While its period is above T0_MAX_PS the coarse tap is shortened
//   and the measure repeated.
// Step 2: DCO_1 gets the same coarse tap; its fine code is raised one step at a
//   time (each step enables a stronger buffer in one stage) until
//   T0 - T1 >= res_target_ps, or the fine code is at its maximum.
// Final: both DCOs are measured together over the longer window W_FINAL and
//   the two periods are stored for the TA computation.
//
// With the default windows the whole procedure takes about 3.5 us
// (the text's bound is 4 us).  Interface: cal_start (one clk160 cycle) starts
// it; cal_busy is high until the end; cal_done stays high afterwards until the
// next cal_start.  ck_0/ck_1 are the DCO outputs; the edge counters live in
// those clock domains and are cleared asynchronously by the FSM, and read only
// after the DCOs have been stopped for a settling cycle.
module tdc_calib
  import ts1_pkg::*;
#(
  parameter int unsigned W_TRY     = 24,    // 160 MHz cycles per trial measure
  parameter int unsigned W_FINAL   = 256,   // 160 MHz cycles for the stored periods
  parameter int unsigned T0_MAX_PS = 1100,  // "much higher than 1000 ps"
  parameter int unsigned TCLK_PS   = 6250   // 160 MHz period
) (
  input  logic                clk160,
  input  logic                rst_n,
  input  logic                cal_start,
  input  logic [7:0]          res_target_ps,
  input  logic                ck_0,
  input  logic                ck_1,
  output logic                cal_en0,
  output logic                cal_en1,
  output logic [COARSE_W-1:0] coarse0,
  output logic [COARSE_W-1:0] coarse1,
  output logic [3:0]          fine_code0,
  output logic [3:0]          fine_code1,
  output logic [PERIOD_W-1:0] t0_ps,
  output logic [PERIOD_W-1:0] t1_ps,
  output logic                cal_busy,
  output logic                cal_done
);
  timeunit 1ps;
  timeprecision 1ps;

  localparam int NW = 12;   // edge counter width
  localparam int DW = 24;   // dividend width

  typedef enum logic [2:0] {S_IDLE, S_CLR, S_RUN, S_SETTLE, S_DIV, S_EVAL} state_t;
  typedef enum logic [1:0] {P_STEP1, P_STEP2, P_FINAL0, P_FINAL1} phase_t;

  state_t  state;
  phase_t  phase;
  logic    cnt_clr;
  logic [NW-1:0] n0, n1;
  logic [8:0]    win;
  logic [3:0]    bitidx;
  logic [DW-1:0] rem;
  logic [DW-1:0] div_d;
  logic [PERIOD_W-1:0] q;
  logic [PERIOD_W-1:0] t_try0;

  // Edge counters in the DCO clock domains.
  always_ff @(posedge ck_0 or posedge cnt_clr) begin
    if (cnt_clr)       n0 <= '0;
    else if (cal_en0 && n0 != '1) n0 <= n0 + 1'b1;
  end
  always_ff @(posedge ck_1 or posedge cnt_clr) begin
    if (cnt_clr)       n1 <= '0;
    else if (cal_en1 && n1 != '1) n1 <= n1 + 1'b1;
  end

  function automatic logic [DW-1:0] window_ps2(input logic [8:0] w);
    return DW'(2 * TCLK_PS) * DW'(w);
  endfunction

  logic [DW-1:0] shifted;
  assign shifted = div_d << bitidx;

  always_ff @(posedge clk160 or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      phase      <= P_STEP1;
      cnt_clr    <= 1'b0;     // low so that the first start gives an edge
      cal_en0    <= 1'b0;
      cal_en1    <= 1'b0;
      coarse0    <= '1;
      coarse1    <= '1;
      fine_code0 <= '0;
      fine_code1 <= '0;
      t0_ps      <= '0;
      t1_ps      <= '0;
      t_try0     <= '0;
      cal_busy   <= 1'b0;
      cal_done   <= 1'b0;
      win        <= '0;
      bitidx     <= '0;
      rem        <= '0;
      div_d      <= '0;
      q          <= '0;
    end else begin
      case (state)
        S_IDLE: if (cal_start) begin
          cal_busy   <= 1'b1;
          cal_done   <= 1'b0;
          coarse0    <= '1;          // slowest settings
          fine_code0 <= '0;
          coarse1    <= '1;
          fine_code1 <= '0;
          phase      <= P_STEP1;
          cnt_clr    <= 1'b1;
          state      <= S_CLR;
        end
        S_CLR: begin
          cnt_clr <= 1'b0;
          win     <= (phase == P_FINAL0) ? 9'(W_FINAL) : 9'(W_TRY);
          cal_en0 <= (phase == P_STEP1) || (phase == P_FINAL0);
          cal_en1 <= (phase == P_STEP2) || (phase == P_FINAL0);
          state   <= S_RUN;
        end
        S_RUN: begin
          win <= win - 1'b1;
          if (win == 9'd1) begin
            cal_en0 <= 1'b0;
            cal_en1 <= 1'b0;
            state   <= S_SETTLE;
          end
        end
        S_SETTLE: begin
          // DCOs stopped; counters are stable.  Set up T = 2W*Tclk / (2N+1).
          logic [NW:0] n;
          n      = (phase == P_STEP2 || phase == P_FINAL1) ? {n1, 1'b1} : {n0, 1'b1};
          div_d  <= DW'(n);
          rem    <= window_ps2((phase == P_STEP1 || phase == P_STEP2) ? 9'(W_TRY) : 9'(W_FINAL))
                    + DW'(n >> 1);                      // round to nearest
          bitidx <= 4'(PERIOD_W - 1);
          q      <= '0;
          state  <= S_DIV;
        end
        S_DIV: begin
          if (rem >= shifted) begin
            rem       <= rem - shifted;
            q[bitidx] <= 1'b1;
          end
          if (bitidx == 0) state <= S_EVAL;
          else             bitidx <= bitidx - 1'b1;
        end
        S_EVAL: begin
          // rem still at least (d << PERIOD_W) means overflow: saturate.
          logic [PERIOD_W-1:0] t;
          t = (rem >= (div_d << PERIOD_W)) ? '1 : q;
          case (phase)
            P_STEP1: begin
              t_try0 <= t;
              if (t > PERIOD_W'(T0_MAX_PS) && coarse0 != '0) begin
                coarse0 <= coarse0 - 1'b1;
              end else begin
                coarse1    <= coarse0;
                fine_code1 <= 4'd1;
                phase      <= P_STEP2;
              end
              cnt_clr <= 1'b1;
              state   <= S_CLR;
            end
            P_STEP2: begin
              if ((t_try0 < t || (t_try0 - t) < PERIOD_W'(res_target_ps)) && fine_code1 != 4'd8)
                fine_code1 <= fine_code1 + 1'b1;
              else
                phase <= P_FINAL0;
              cnt_clr <= 1'b1;
              state   <= S_CLR;
            end
            P_FINAL0: begin
              // Both counters were run together; divide the second one now.
              t0_ps <= t;
              phase <= P_FINAL1;
              state <= S_SETTLE;
            end
            default: begin
              t1_ps    <= t;
              cal_busy <= 1'b0;
              cal_done <= 1'b1;
              phase    <= P_STEP1;
              state    <= S_IDLE;
            end
          endcase
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
