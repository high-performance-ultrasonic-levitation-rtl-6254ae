// tb_upac_wavegen: self-checking test of the phased square-wave generator.
// A reference model works out, for every channel and every cycle of a
// period, whether the output must be high: with frame_tick at cycle 0 of a
// period, the output at cycle k (1 <= k < period) shows counter value k-1, so
// it is high when ((k - 1 - delay) mod period) < period/2. The test checks
// random patterns at 40 kHz (2500 cycles) and 25 kHz (4000 cycles), a
// pattern changed in mid period (which must wait for the next period),
// masked channels, frame_tick spacing and stopping.
module tb_upac_wavegen;
  import lev_pkg::*;

  localparam int unsigned NCH = 64;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic run = 1'b0;
  phase_t period = phase_t'(2500);
  phase_t delay [NCH];
  logic [NCH-1:0] ch_en = '1;
  logic [NCH-1:0] drive;
  logic frame_tick;

  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  upac_wavegen dut (.*);

  initial begin
    repeat (200_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL at %0t: %s", $time, what);
    end
  endtask

  // Wait for the start of a period and check one whole period against the
  // pattern ref_d / ref_en / ref_p. Sampling on falling edges.
  task automatic check_period(input phase_t ref_d [NCH], input logic [NCH-1:0] ref_en,
                              input int ref_p);
    int k;
    do @(negedge clk); while (!frame_tick);
    for (k = 1; k < ref_p; k++) begin
      @(negedge clk);
      check(!frame_tick, "frame_tick inside a period");
      for (int i = 0; i < NCH; i++) begin
        int pos;
        logic exp;
        pos = ((k - 1 - int'(ref_d[i])) % ref_p + ref_p) % ref_p;
        exp = ref_en[i] && (pos < ref_p / 2);
        if (drive[i] !== exp) begin
          check(1'b0, $sformatf("ch %0d k %0d exp %0b got %0b (d=%0d p=%0d)",
                                i, k, exp, drive[i], ref_d[i], ref_p));
        end else checks++;
      end
    end
    @(negedge clk);
    check(frame_tick == 1'b1, $sformatf("period not %0d cycles", ref_p));
  endtask

  phase_t d0 [NCH], d1 [NCH];
  int     ticks;

  initial begin
    for (int i = 0; i < NCH; i++) begin
      d0[i] = phase_t'($urandom_range(2499, 0));
      d1[i] = phase_t'($urandom_range(3999, 0));
    end
    d0[0] = 0; d0[1] = 2499; d0[2] = 1250; d0[3] = 1249;
    delay = d0;
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    // outputs stay low while stopped
    repeat (10) @(negedge clk);
    check(drive == '0, "outputs not low before run");
    run <= 1'b1;
    check_period(d0, '1, 2500);
    // the cycle that closes a period shows counter value period-1
    // change the pattern in mid period: the running period keeps d0
    do @(negedge clk); while (!frame_tick);
    repeat (1000) @(negedge clk);
    delay  = d1;
    period = phase_t'(4000);
    ch_en  = {{(NCH-2){1'b1}}, 2'b00} ^ (64'h1 << 40);  // two receivers + ch 40 masked
    // remaining 1500 cycles of the current period must still follow d0
    for (int k = 1001; k < 2500; k++) begin
      @(negedge clk);
      for (int i = 2; i < NCH; i++) begin
        int pos;
        logic exp;
        if (i == 40) continue;
        pos = ((k - 1 - int'(d0[i])) % 2500 + 2500) % 2500;
        exp = pos < 1250;
        check(drive[i] == exp, $sformatf("old pattern not kept, ch %0d k %0d", i, k));
      end
    end
    // frame boundary: new pattern, 25 kHz period, masked channels
    check_period(d1, ch_en, 4000);
    check_period(d1, ch_en, 4000);
    // frame_tick spacing over several periods
    ticks = 0;
    repeat (4000 * 3) begin
      @(negedge clk);
      if (frame_tick) ticks++;
    end
    check(ticks == 3, $sformatf("%0d frame ticks in 3 periods", ticks));
    // stop: outputs go low
    run <= 1'b0;
    repeat (3) @(negedge clk);
    check(drive == '0, "outputs not low after stop");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
