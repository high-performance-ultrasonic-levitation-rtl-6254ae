// tb_levitation_pl_top: end-to-end test of the levitator's programmable
// logic at its default size (64 channels, one compute unit, 40 kHz from a
// 100 MHz clock). The testbench plays the processor: it masks two channels
// as echo receivers, asks the accelerator for the delays of a focal point,
// copies them into the drive controller and then watches the 64 drive pins.
// For every driven channel it checks the rising edge against the delay, and,
// independently of both blocks, that the edges reach the focal point in step:
// (edge time + path length / speed of sound) is the same, modulo one period,
// for all channels to within the rounding of the path length and of the
// delay (a spread of at most 2 cycles). Then it moves the focus (time-division
// multiplexing between two points), switches to the 25 kHz drive and stops.
// Each mechanism is counted and a failure is counted for one that never ran.
module tb_levitation_pl_top;
  import lev_pkg::*;
  import phase_ref_pkg::*;

  localparam int NCH = 64;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  axil_req_t  phase_req, upac_req;
  axil_resp_t phase_resp, upac_resp;
  logic phase_irq;
  logic [NCH-1:0] fmc_drive;
  logic frame_tick;

  int checks = 0, failures = 0;
  int n_runs = 0, n_irq = 0, n_switch = 0, n_mode = 0, n_masked = 0, n_focus = 0, n_stop = 0;

  always #5 clk = ~clk;

  axil_master_bfm bfm_p (.clk, .req(phase_req), .resp(phase_resp));
  axil_master_bfm bfm_u (.clk, .req(upac_req),  .resp(upac_resp));

  levitation_pl_top dut (
    .clk, .rst_n,
    .s_phase_req (phase_req), .s_phase_resp (phase_resp),
    .s_upac_req  (upac_req),  .s_upac_resp  (upac_resp),
    .phase_irq, .fmc_drive, .frame_tick
  );

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

  task automatic pw(input int a, input int d);
    axi_resp_e r;
    bfm_p.write(axil_addr_t'(a), axil_data_t'(d), r);
    check(r == AXI_RESP_OKAY, "accelerator write");
  endtask
  task automatic uw(input int a, input int d);
    axi_resp_e r;
    bfm_u.write(axil_addr_t'(a), axil_data_t'(d), r);
    check(r == AXI_RESP_OKAY, "controller write");
  endtask
  task automatic prd(input int a, output int d);
    axi_resp_e r;
    axil_data_t v;
    bfm_p.read(axil_addr_t'(a), v, r);
    check(r == AXI_RESP_OKAY, "accelerator read");
    d = int'(v);
  endtask

  int delays [NCH];
  logic [NCH-1:0] en;

  // Processor side of one focal update: compute, wait, copy to the driver.
  task automatic focus(input int fx, fy, fz, wl, p);
    pw(12'h004, fx); pw(12'h008, fy); pw(12'h00C, fz);
    pw(12'h010, wl); pw(12'h014, p);
    pw(12'h000, 1);
    n_runs++;
    while (!phase_irq) @(posedge clk);
    n_irq++;
    for (int i = 0; i < NCH; i++) begin
      int tx, ty;
      prd(12'h100 + 4 * i, delays[i]);
      grid_pos(i, 8, 8, 16500, tx, ty);
      check(delays[i] == ref_delay(fx, fy, fz, tx, ty, 0, wl, p),
            $sformatf("T%0d delay %0d", i, delays[i]));
    end
    pw(12'h000, 2);
    for (int i = 0; i < NCH; i++) uw(12'h100 + 4 * i, delays[i]);
  endtask

  // Watch one whole period from a frame_tick; check edges and focusing.
  task automatic observe(input int fx, fy, fz, wl, p);
    int rise [NCH];
    logic [NCH-1:0] prev;
    real ph [NCH];
    real lo, hi, c;
    for (int i = 0; i < NCH; i++) rise[i] = -1;
    do @(negedge clk); while (!frame_tick);
    prev = fmc_drive;
    for (int k = 1; k <= p; k++) begin
      @(negedge clk);
      for (int i = 0; i < NCH; i++)
        if (fmc_drive[i] && !prev[i] && rise[i] < 0) rise[i] = k;
      prev = fmc_drive;
    end
    // arrival phase at the focus, in cycles, centred on the first channel
    c = -1.0;
    lo = 0.0; hi = 0.0;
    for (int i = 0; i < NCH; i++) begin
      int tx, ty;
      real lp, a;
      if (!en[i]) begin
        check(rise[i] < 0, $sformatf("receiver channel %0d driven", i));
        n_masked++;
        continue;
      end
      check(rise[i] == delays[i] + 1,
            $sformatf("ch %0d rises at %0d, delay %0d", i, rise[i], delays[i]));
      grid_pos(i, 8, 8, 16500, tx, ty);
      lp = $sqrt(real'(fx - tx) ** 2 + real'(fy - ty) ** 2 + real'(fz) ** 2);
      a  = real'(rise[i]) + lp / real'(wl) * real'(p);
      if (c < 0.0) c = a;
      // wrap a - c into (-p/2, p/2]
      a = a - c;
      a = a - real'(p) * $floor(a / real'(p) + 0.5);
      if (a < lo) lo = a;
      if (a > hi) hi = a;
    end
    check(hi - lo <= 2.0, $sformatf("arrival spread %0f cycles at the focus", hi - lo));
    n_focus++;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    // two channels of the bottom row wired to the ADC as echo receivers
    en = '1; en[48] = 1'b0; en[55] = 1'b0;
    uw(12'h008, int'(en[31:0]));
    uw(12'h00C, int'(en[63:32]));
    // focal point A, 100 mm above the centre; start the drive
    focus(0, 0, 100000, 8575, 2500);
    uw(12'h000, 1);
    // in the first period, pulses that wrap round start late; skip it
    do @(negedge clk); while (!frame_tick);
    observe(0, 0, 100000, 8575, 2500);
    // time-division multiplexing: point B, then back to A
    focus(20000, -15000, 80000, 8575, 2500);
    // the period in which the copy finished may be mixed; the next is whole
    do @(negedge clk); while (!frame_tick);
    n_switch++;
    observe(20000, -15000, 80000, 8575, 2500);
    focus(0, 0, 100000, 8575, 2500);
    do @(negedge clk); while (!frame_tick);
    n_switch++;
    observe(0, 0, 100000, 8575, 2500);
    // 25 kHz levitation transducers: longer wavelength and period
    focus(0, 10000, 110000, 13720, 4000);
    uw(12'h004, 4000);
    do @(negedge clk); while (!frame_tick);
    observe(0, 10000, 110000, 13720, 4000);
    n_mode++;
    // stop the drive
    uw(12'h000, 0);
    repeat (3) @(negedge clk);
    check(fmc_drive == '0, "drive not low after stop");
    n_stop++;
    // every mechanism must have happened
    check(n_runs > 0 && n_irq == n_runs, "accelerator runs / interrupts");
    check(n_switch >= 2, "focal point switching");
    check(n_mode > 0, "40 kHz to 25 kHz switch");
    check(n_masked > 0, "receiver masking");
    check(n_focus >= 4, "focusing checks");
    check(n_stop > 0, "stop");
    $display("mechanisms: runs=%0d irq=%0d switches=%0d mode=%0d masked=%0d focus=%0d stop=%0d",
             n_runs, n_irq, n_switch, n_mode, n_masked, n_focus, n_stop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
