// tb_phase_calculate: self-checking test of the phase-delay accelerator over
// AXI4-Lite. Two instances run side by side, one with a single compute unit
// (the default) and one with four. For several focal points, wavelengths and
// periods the test starts a run, waits for the interrupt, checks the cycle
// count (ceil(n/units) + 60), reads back all 64 results and compares them
// with the reference model applied to the flat 8x8 grid. It also checks
// partial runs selected by OFFSET/COUNT (other results untouched), a START
// while busy (ignored), clearing DONE and the register read-back.
module tb_phase_calculate;
  import lev_pkg::*;
  import phase_ref_pkg::*;

  localparam int NT  = 64;
  localparam int LAT = 60;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  axil_req_t  req  [2];
  axil_resp_t resp [2];
  logic       irq  [2];

  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  axil_master_bfm bfm0 (.clk, .req(req[0]), .resp(resp[0]));
  axil_master_bfm bfm1 (.clk, .req(req[1]), .resp(resp[1]));

  phase_calculate #(.NUM_T(NT), .NUM_CU(1)) dut1 (
    .clk, .rst_n, .s_axil_req(req[0]), .s_axil_resp(resp[0]), .irq(irq[0]));
  phase_calculate #(.NUM_T(NT), .NUM_CU(4)) dut4 (
    .clk, .rst_n, .s_axil_req(req[1]), .s_axil_resp(resp[1]), .irq(irq[1]));

  initial begin
    repeat (60_000) @(posedge clk);
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

  task automatic wr(input int u, input int a, input int d);
    axi_resp_e r;
    if (u == 0) bfm0.write(axil_addr_t'(a), axil_data_t'(d), r);
    else        bfm1.write(axil_addr_t'(a), axil_data_t'(d), r);
    check(r == AXI_RESP_OKAY, $sformatf("unit %0d write 0x%0h answered %0d", u, a, r));
  endtask

  task automatic rd(input int u, input int a, output int d);
    axi_resp_e  r;
    axil_data_t v;
    if (u == 0) bfm0.read(axil_addr_t'(a), v, r);
    else        bfm1.read(axil_addr_t'(a), v, r);
    check(r == AXI_RESP_OKAY, $sformatf("unit %0d read 0x%0h answered %0d", u, a, r));
    d = int'(v);
  endtask

  int expected [2][NT];

  // One run on instance u; checks interrupt, cycle count and all results.
  task automatic run(input int u, input int fx, fy, fz, wl, p, off, cnt);
    int ncu, v, last, n;
    ncu = (u == 0) ? 1 : 4;
    wr(u, 12'h004, fx); wr(u, 12'h008, fy); wr(u, 12'h00C, fz);
    wr(u, 12'h010, wl); wr(u, 12'h014, p);
    wr(u, 12'h018, off); wr(u, 12'h01C, cnt);
    rd(u, 12'h004, v); check(v == fx, "FX read-back");
    rd(u, 12'h00C, v); check(v == fz, "FZ read-back");
    last = (off + cnt > NT) ? NT : off + cnt;
    n = (last > off) ? last - off : 0;
    for (int i = off; i < last; i++) begin
      int tx, ty;
      grid_pos(i, 8, 8, 16500, tx, ty);
      expected[u][i] = ref_delay(fx, fy, fz, tx, ty, 0, wl, p);
    end
    wr(u, 12'h000, 1);
    // a second START while busy is ignored
    wr(u, 12'h000, 1);
    fork
      begin
        while (!irq[u]) @(posedge clk);
      end
    join
    rd(u, 12'h000, v); check(v == 2, $sformatf("CTRL after run = %0d", v));
    rd(u, 12'h020, v);
    check(v == (n + ncu - 1) / ncu + LAT,
          $sformatf("unit %0d: %0d cycles for %0d transducers, expected %0d",
                    u, v, n, (n + ncu - 1) / ncu + LAT));
    for (int i = 0; i < NT; i++) begin
      rd(u, 12'h100 + 4 * i, v);
      check(v == expected[u][i], $sformatf("unit %0d T%0d delay %0d expected %0d",
                                           u, i, v, expected[u][i]));
    end
    wr(u, 12'h000, 2);
    check(irq[u] == 1'b0, "irq not cleared");
  endtask

  initial begin
    for (int u = 0; u < 2; u++) for (int i = 0; i < NT; i++) expected[u][i] = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    begin
      int v;
      rd(0, 12'h010, v); check(v == 8575, "WAVELENGTH reset value");
      rd(0, 12'h014, v); check(v == 2500, "PERIOD reset value");
      rd(1, 12'h01C, v); check(v == 64, "COUNT reset value");
    end
    for (int u = 0; u < 2; u++) begin
      // centre, 100 mm above the array (the paper's focal length)
      run(u, 0, 0, 100000, 8575, 2500, 0, 64);
      // off-centre points, one with a temperature-corrected wavelength
      run(u, 25000, -12000, 60000, 8690, 2500, 0, 64);
      run(u, -66000, 66000, 100000, 8490, 2500, 0, 64);
      // 25 kHz transducers: longer wavelength, 4000-cycle period
      run(u, 10000, 5000, 120000, 13720, 4000, 0, 64);
      // partial runs: transducers 10..22, then a count that runs past the end
      run(u, 3000, 3000, 80000, 8575, 2500, 10, 13);
      run(u, -3000, 7000, 90000, 8575, 2500, 50, 40);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
