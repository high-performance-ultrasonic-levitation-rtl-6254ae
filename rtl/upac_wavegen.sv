// upac_wavegen: the signal generator of the Ultrasonic Phased Array
// Controller. It produces NUM_CH square waves of one common period, each
// delayed by its own number of clock cycles.
//
// How it works: one counter runs from 0 to period-1 and wraps. Channel i is
// high while (count - delay_i) mod period lies in the first half of the
// period, so its rising edge falls at count == delay_i and its duty cycle is
// floor(period/2)/period. With a 100 MHz clock a period of 2500 gives the
// 40 kHz drive of the main array; 4000 gives 25 kHz. The delays and the
// period are sampled only when the counter wraps (and when run rises), so a
// new phase pattern always takes effect on a period boundary, never in the
// middle of a pulse that has already started in this period; frame_tick
// marks those boundaries. A delay change from d to d' lengthens or shortens
// the one pulse that spans the boundary by the difference.
// A delay of period or more is reduced by one period (valid up to 2*period-1).
//
// Interface: run starts the counter from 0 (outputs low while run is 0);
// ch_en masks individual channels low, e.g. those wired as echo receivers.
// Timing: frame_tick is high for the one cycle in which the counter is 0;
// channel i rises delay_i+1 cycles after frame_tick rises, in every period.
//
// The square-wave drive, the 40 kHz tone, the 64 channels and the
// delay-in-clock-cycles encoding follow the published platform. The shared
// counter, the sampling at the period boundary and the channel mask are this
// design's choices.
module upac_wavegen
  import lev_pkg::*;
#(
  parameter int unsigned NUM_CH = lev_pkg::ARRAY_CH
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              run,
  input  phase_t            period,
  input  phase_t            delay [NUM_CH],
  input  logic [NUM_CH-1:0] ch_en,
  output logic [NUM_CH-1:0] drive,
  output logic              frame_tick
);

  phase_t cnt_q;
  phase_t period_q;
  phase_t half_q;
  phase_t delay_q [NUM_CH];
  logic   run_q;
  logic   load;

  // Load a new pattern on the first cycle of run and on every wrap.
  assign load = run && (!run_q || (cnt_q == period_q - phase_t'(1)));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      run_q      <= 1'b0;
      cnt_q      <= '0;
      period_q   <= phase_t'(DEFAULT_PERIOD);
      half_q     <= phase_t'(DEFAULT_PERIOD / 2);
      frame_tick <= 1'b0;
      for (int i = 0; i < NUM_CH; i++) delay_q[i] <= '0;
    end else begin
      run_q      <= run;
      frame_tick <= load;
      if (!run) begin
        cnt_q <= '0;
      end else if (load) begin
        cnt_q    <= '0;
        period_q <= period;
        half_q   <= period >> 1;
        for (int i = 0; i < NUM_CH; i++)
          delay_q[i] <= (delay[i] >= period) ? delay[i] - period : delay[i];
      end else begin
        cnt_q <= cnt_q + phase_t'(1);
      end
    end
  end

  // The counter value seen by the comparators is the one of the cycle
  // after a load (0), so compare against the registered state.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      drive <= '0;
    end else begin
      for (int i = 0; i < NUM_CH; i++) begin
        phase_t pos;
        pos = (cnt_q >= delay_q[i]) ? cnt_q - delay_q[i]
                                    : cnt_q + period_q - delay_q[i];
        drive[i] <= run_q && run && ch_en[i] && (pos < half_q);
      end
    end
  end

endmodule
