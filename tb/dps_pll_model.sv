// dps_pll_model: behavioural stand-in for the Cyclone V PLL with dynamic phase
// shift, for testbenches only.
//
// outclk0 is the capture clock C (default 200 MHz, rising edges at multiples of
// its period). outclk1 is the calibration output: a pulse train of period
// CAL_PERIOD_FS and high time CAL_HIGH_FS whose rising edges fall at
// m x CAL_PERIOD_FS + phase_fs. phase_fs starts at 0, so at zero shift the
// calibration pulses line up with edges of C.
//
// Phase-shift handshake, sampled on rising edges of scanclk (the 50 MHz
// reference): once phasestep has been seen high on two consecutive edges, the
// model drops phasedone, waits a random RELOCK_MIN .. RELOCK_MAX reference
// cycles (the re-lock time is device dependent), moves the selected output
// by STEP_FS in the direction of updn and raises phasedone again. phasestep
// must return low before the next shift is armed. Only counter 1 (outclk1) is
// shiftable in this model; a shift of another counter is counted but moves
// nothing.
module dps_pll_model #(
  parameter longint      C_PERIOD_FS   = 5000000,
  parameter longint      CAL_PERIOD_FS = 10000000,
  parameter longint      CAL_HIGH_FS   = 2500000,
  parameter longint      STEP_FS       = 78125,
  parameter int unsigned RELOCK_MIN    = 2,
  parameter int unsigned RELOCK_MAX    = 30
) (
  input  logic       scanclk,
  input  logic       phasestep,
  input  logic       updn,
  input  logic [4:0] cntsel,
  output logic       phasedone,
  output logic       outclk0,
  output logic       outclk1,
  output longint     phase_fs,     // present shift of outclk1, for checking
  output int         shifts,       // shifts performed
  output int         long_relocks  // shifts that took more than RELOCK_MIN cycles
);
  timeunit 1ps;
  timeprecision 1fs;

  function automatic longint now_fs();
    return longint'($realtime * 1000.0);
  endfunction

  initial begin
    outclk0 = 1'b1;
    forever #(real'(C_PERIOD_FS) / 2000.0) outclk0 = ~outclk0;
  end

  initial begin
    longint m, t_r;
    outclk1 = 1'b0;
    m = 0;
    forever begin
      t_r = m * CAL_PERIOD_FS + phase_fs;
      if (t_r >= now_fs()) begin
        // Wait in steps of at most 1 ns so that a shift made meanwhile moves
        // the next rising edge too.
        while (now_fs() < m * CAL_PERIOD_FS + phase_fs) begin
          t_r = m * CAL_PERIOD_FS + phase_fs - now_fs();
          #(real'((t_r < 1000000) ? t_r : 1000000) / 1000.0);
        end
        outclk1 = 1'b1;
        #(real'(CAL_HIGH_FS) / 1000.0);
        outclk1 = 1'b0;
      end
      m++;
    end
  end

  initial begin
    int seen, relock;
    phasedone    = 1'b1;
    phase_fs     = 0;
    shifts       = 0;
    long_relocks = 0;
    seen = 0;
    forever begin
      @(posedge scanclk);
      if (phasestep) seen++;
      else seen = 0;
      if (seen == 2) begin
        phasedone = 1'b0;
        relock = int'($urandom_range(RELOCK_MAX, RELOCK_MIN));
        repeat (relock) @(posedge scanclk);
        if (cntsel == 5'd1) phase_fs = updn ? phase_fs + STEP_FS : phase_fs - STEP_FS;
        shifts++;
        if (relock > int'(RELOCK_MIN)) long_relocks++;
        phasedone = 1'b1;
        while (phasestep) @(posedge scanclk);
        seen = 0;
      end
    end
  end
endmodule
