// tb_orbit_workload: the circular-orbit speed test as the levitator runs it,
// and a 160-frame batch on a four-unit accelerator.
//
// Orbit: the focal point moves round a circle of radius 30 mm, 100 mm above
// the array centre, in steps of 0.0304 mm (the step size used for the
// hardware-accelerated orbit). For each of 160 steps the testbench, acting
// as the processor, starts the accelerator right after a frame_tick, checks
// all 64 delays against the reference model, copies them into the drive
// controller and checks that the whole update (compute, 64 reads, 64
// writes) fits in one 2500-cycle drive period, so the pattern can change
// every period (40 kHz). In the period that follows, every channel must rise
// at its new delay + 1 (with small steps the delays change little, so no
// pulse is cut where the new pattern starts).
//
// Batch: the same 160 focal points run on a separate accelerator with four
// compute units; each run must take ceil(64/4) + 60 = 76 cycles and give the
// same delays as the reference.
module tb_orbit_workload;
  import lev_pkg::*;
  import phase_ref_pkg::*;

  localparam int    NCH    = 64;
  localparam int    FRAMES = 160;
  localparam int    P      = 2500;
  localparam int    WL     = 8575;
  localparam real   RADIUS = 30000.0;   // um
  localparam real   STEP   = 30.4;      // um
  localparam int    HEIGHT = 100000;    // um

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  axil_req_t  phase_req, upac_req, batch_req;
  axil_resp_t phase_resp, upac_resp, batch_resp;
  logic phase_irq, batch_irq;
  logic [NCH-1:0] fmc_drive;
  logic frame_tick;

  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  axil_master_bfm bfm_p (.clk, .req(phase_req), .resp(phase_resp));
  axil_master_bfm bfm_u (.clk, .req(upac_req),  .resp(upac_resp));
  axil_master_bfm bfm_b (.clk, .req(batch_req), .resp(batch_resp));

  levitation_pl_top dut (
    .clk, .rst_n,
    .s_phase_req (phase_req), .s_phase_resp (phase_resp),
    .s_upac_req  (upac_req),  .s_upac_resp  (upac_resp),
    .phase_irq, .fmc_drive, .frame_tick
  );

  phase_calculate #(.NUM_CU(4)) batch (
    .clk, .rst_n, .s_axil_req(batch_req), .s_axil_resp(batch_resp), .irq(batch_irq));

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL at %0t: %s", $time, what);
    end
  endtask

  task automatic wr(input int which, input int a, input int d);
    axi_resp_e r;
    case (which)
      0: bfm_p.write(axil_addr_t'(a), axil_data_t'(d), r);
      1: bfm_u.write(axil_addr_t'(a), axil_data_t'(d), r);
      default: bfm_b.write(axil_addr_t'(a), axil_data_t'(d), r);
    endcase
    check(r == AXI_RESP_OKAY, "write answered an error");
  endtask

  task automatic rd(input int which, input int a, output int d);
    axi_resp_e r;
    axil_data_t v;
    if (which == 0) bfm_p.read(axil_addr_t'(a), v, r);
    else            bfm_b.read(axil_addr_t'(a), v, r);
    check(r == AXI_RESP_OKAY, "read answered an error");
    d = int'(v);
  endtask

  int fx [FRAMES], fy [FRAMES];
  int delays [NCH];

  function automatic int expected(input int f, input int i);
    int tx, ty;
    grid_pos(i, 8, 8, 16500, tx, ty);
    return ref_delay(fx[f], fy[f], HEIGHT, tx, ty, 0, WL, P);
  endfunction

  int worst_update = 0;
  int batch_total = 0;

  initial begin
    for (int f = 0; f < FRAMES; f++) begin
      real a;
      a = real'(f) * STEP / RADIUS;
      fx[f] = int'(RADIUS * $cos(a));
      fy[f] = int'(RADIUS * $sin(a));
    end
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    wr(0, 12'h00C, HEIGHT);
    wr(1, 12'h000, 1);

    // ---- orbit on the levitator, one update per drive period
    for (int f = 0; f < FRAMES; f++) begin
      int t0, upd;
      logic [NCH-1:0] prev, first;
      logic [NCH-1:0] at_exp, other;
      do @(negedge clk); while (!frame_tick);
      t0 = cycle;
      wr(0, 12'h004, fx[f]);
      wr(0, 12'h008, fy[f]);
      wr(0, 12'h000, 1);
      while (!phase_irq) @(posedge clk);
      for (int i = 0; i < NCH; i++) begin
        rd(0, 12'h100 + 4 * i, delays[i]);
        check(delays[i] == expected(f, i),
              $sformatf("frame %0d T%0d delay %0d expected %0d", f, i, delays[i], expected(f, i)));
      end
      wr(0, 12'h000, 2);
      for (int i = 0; i < NCH; i++) wr(1, 12'h100 + 4 * i, delays[i]);
      upd = cycle - t0;
      if (upd > worst_update) worst_update = upd;
      check(upd < P, $sformatf("frame %0d update took %0d cycles, more than a period", f, upd));
      // the next period plays the new frame; the jump from the all-zero
      // reset pattern to frame 0 cuts pulses that wrap round the boundary,
      // so that first change is watched one period later
      // Each channel must rise at delay + 1. Where the pattern changes, the
      // pulse spanning the boundary may be lengthened (no edge at k = 1 for
      // a delay of 0) or shortened (an extra edge at k = 1); any other edge
      // is an error.
      at_exp = '0; other = '0;
      do @(negedge clk); while (!frame_tick);
      if (f == 0) do @(negedge clk); while (!frame_tick);
      prev = fmc_drive;
      for (int k = 1; k <= P; k++) begin
        @(negedge clk);
        if (k == 1) first = fmc_drive;
        for (int i = 0; i < NCH; i++)
          if (fmc_drive[i] && !prev[i]) begin
            if (k == delays[i] + 1) at_exp[i] = 1'b1;
            else if (k != 1)        other[i]  = 1'b1;
          end
        prev = fmc_drive;
      end
      for (int i = 0; i < NCH; i++) begin
        check(at_exp[i] || (delays[i] == 0 && first[i]),
              $sformatf("frame %0d ch %0d: no edge at delay %0d + 1", f, i, delays[i]));
        check(!other[i], $sformatf("frame %0d ch %0d: stray edge", f, i));
      end
    end

    // ---- the same frames as a batch on four compute units
    wr(2, 12'h00C, HEIGHT);
    for (int f = 0; f < FRAMES; f++) begin
      int v;
      wr(2, 12'h004, fx[f]);
      wr(2, 12'h008, fy[f]);
      wr(2, 12'h000, 1);
      while (!batch_irq) @(posedge clk);
      rd(2, 12'h020, v);
      check(v == 64 / 4 + 60, $sformatf("batch frame %0d took %0d cycles", f, v));
      batch_total += v;
      for (int i = 0; i < NCH; i += 7) begin
        rd(2, 12'h100 + 4 * i, v);
        check(v == expected(f, i), $sformatf("batch frame %0d T%0d", f, i));
      end
      wr(2, 12'h000, 2);
    end

    $display("orbit: %0d frames, worst update %0d cycles (%0.2f us), one frame per %0d-cycle period",
             FRAMES, worst_update, real'(worst_update) / 100.0, P);
    $display("batch: %0d frames in %0d accelerator cycles on 4 units (1 unit: %0d)",
             FRAMES, batch_total, FRAMES * (64 + 60));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
