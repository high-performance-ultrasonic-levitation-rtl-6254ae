// tb_phase_cu: self-checking test of one phase compute unit. It streams one
// operand per cycle (random transducer and focal positions across the
// coordinate range, random wavelengths and both drive periods, plus corner
// cases: focal point on a transducer, exact multiples of the wavelength) and
// compares every result with the reference model of phase_ref_pkg. It also
// checks the 60-cycle latency and that results come out back to back.
module tb_phase_cu;
  import lev_pkg::*;
  import phase_ref_pkg::*;

  localparam int LAT = 60;
  localparam int N   = 400;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic in_valid = 1'b0;
  point_t in_tpos, focal;
  logic [7:0] in_tag;
  wavelength_t wavelength;
  phase_t period;
  logic out_valid;
  phase_t out_delay;
  logic [7:0] out_tag;

  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  phase_cu dut (.*);

  initial begin
    repeat (20_000) @(posedge clk);
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

  int exp_q [$];
  int tag_q [$];
  int in_cycle [256];
  int cycle = 0;
  int got = 0;
  int last_out_cycle = -1;
  int gaps = 0;

  always @(posedge clk) cycle <= cycle + 1;

  // output checker
  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      int e, t;
      e = exp_q.pop_front();
      t = tag_q.pop_front();
      check(out_tag == 8'(t), $sformatf("tag %0d, expected %0d", out_tag, t));
      check(int'(out_delay) == e, $sformatf("tag %0d delay %0d, expected %0d", t, out_delay, e));
      check(cycle - in_cycle[out_tag] == LAT,
            $sformatf("latency %0d", cycle - in_cycle[out_tag]));
      if (last_out_cycle >= 0 && cycle != last_out_cycle + 1) gaps++;
      last_out_cycle = cycle;
      got++;
    end
  end

  // per-run constants: wavelength and period fixed during a run
  task automatic run(input int wl, input int p, input int n, input int corner);
    wavelength = wavelength_t'(wl);
    period     = phase_t'(p);
    @(posedge clk);
    #1;
    for (int k = 0; k < n; k++) begin
      int fx, fy, fz, tx, ty, tz;
      if (corner == 1) begin
        // transducer on a grid point, focal point anywhere in range
        tx = $urandom_range(66000, 0) - 33000;
        ty = $urandom_range(66000, 0) - 33000;
        tz = 0;
        fx = $urandom_range(200000, 0) - 100000;
        fy = $urandom_range(200000, 0) - 100000;
        fz = $urandom_range(300000, 0);
      end else if (corner == 2) begin
        // extremes of the coordinate range
        tx = ($urandom_range(1, 0) != 0) ? 524287 : -524288;
        ty = ($urandom_range(1, 0) != 0) ? 524287 : -524288;
        tz = ($urandom_range(1, 0) != 0) ? 524287 : -524288;
        fx = -tx; fy = -ty; fz = -tz;
        if (fx == 524288) fx = 524287;
        if (fy == 524288) fy = 524287;
        if (fz == 524288) fz = 524287;
      end else begin
        // focal point on the transducer, or on its axis at k wavelengths
        tx = $urandom_range(66000, 0) - 33000;
        ty = 1000; tz = 0;
        fx = tx; fy = ty; fz = (k % 2 == 0) ? 0 : wl * (k % 17);
      end
      in_tpos.x = coord_t'(tx); in_tpos.y = coord_t'(ty); in_tpos.z = coord_t'(tz);
      focal.x   = coord_t'(fx); focal.y   = coord_t'(fy); focal.z   = coord_t'(fz);
      in_tag    = 8'(k);
      in_valid  = 1'b1;
      in_cycle[k % 256] = cycle;
      exp_q.push_back(ref_delay(fx, fy, fz, tx, ty, tz, wl, p));
      tag_q.push_back(k % 256);
      @(posedge clk);
      #1;
    end
    in_valid = 1'b0;
    repeat (LAT + 5) @(posedge clk);
    #1;
  endtask

  initial begin
    in_tpos = '0; focal = '0; in_tag = '0;
    wavelength = wavelength_t'(8575); period = phase_t'(2500);
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    #1;
    run(8575, 2500, 200, 1);
    run(13720, 4000, 100, 1);
    run(8400 + $urandom_range(400, 0), 2500, 40, 2);
    run(8575, 2500, 60, 3);
    check(got == N, $sformatf("%0d results, expected %0d", got, N));
    check(exp_q.size() == 0, "results missing");
    check(gaps == 3, $sformatf("%0d gaps in the output stream, expected 3 (between runs)", gaps));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
