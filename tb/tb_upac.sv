// tb_upac: self-checking test of the phased-array drive controller through
// its AXI4-Lite port. It checks the reset values of the registers, writes
// and reads back every delay, the period and the channel enables, checks the
// SLVERR answer for unmapped or misaligned addresses, then runs the drive and
// measures, for every channel, the cycle of its rising edge after frame_tick
// (expected delay+1), its high time (period/2) and that masked channels stay
// low. Expected values come from the written register values only.
module tb_upac;
  import lev_pkg::*;

  localparam int unsigned NCH = 64;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  axil_req_t  req;
  axil_resp_t resp;
  logic [NCH-1:0] drive;
  logic frame_tick;

  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  axil_master_bfm bfm (.clk, .req, .resp);
  upac dut (.clk, .rst_n, .s_axil_req(req), .s_axil_resp(resp),
                            .drive, .frame_tick);

  initial begin
    repeat (100_000) @(posedge clk);
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

  task automatic wr(input int a, input int d);
    axi_resp_e r;
    bfm.write(axil_addr_t'(a), axil_data_t'(d), r);
    check(r == AXI_RESP_OKAY, $sformatf("write 0x%0h answered %0d", a, r));
  endtask

  task automatic rd_expect(input int a, input int exp);
    axi_resp_e  r;
    axil_data_t d;
    bfm.read(axil_addr_t'(a), d, r);
    check(r == AXI_RESP_OKAY && d == axil_data_t'(exp),
          $sformatf("read 0x%0h = 0x%0h resp %0d, expected 0x%0h", a, d, r, exp));
  endtask

  // Measure one period: per channel, rising-edge cycle and high time.
  task automatic measure(input int p, input int dly [NCH], input logic [NCH-1:0] en);
    int rise [NCH];
    int high [NCH];
    int k;
    for (int i = 0; i < NCH; i++) begin rise[i] = -1; high[i] = 0; end
    do @(negedge clk); while (!frame_tick);
    // k = 0 is the frame_tick cycle; a delay-0 channel rises at k = 1
    for (k = 1; k <= p; k++) begin
      @(negedge clk);
      for (int i = 0; i < NCH; i++) begin
        if (drive[i]) high[i]++;
        // first high cycle of the window; a pulse that wraps round the
        // period boundary is already high at k = 1
        if (drive[i] && rise[i] < 0) rise[i] = k;
      end
    end
    for (int i = 0; i < NCH; i++) begin
      int exp_first;
      // first high cycle in k = 1..p: pulse occupies k-1-dly mod p in [0, p/2)
      exp_first = (dly[i] + p / 2 > p) ? 1 : dly[i] + 1;
      if (!en[i]) begin
        check(high[i] == 0, $sformatf("masked ch %0d driven", i));
      end else begin
        check(high[i] == p / 2, $sformatf("ch %0d high for %0d of %0d", i, high[i], p));
        check(rise[i] == exp_first,
              $sformatf("ch %0d first high at %0d, expected %0d", i, rise[i], exp_first));
      end
    end
  endtask

  int dly [NCH];
  logic [NCH-1:0] en;

  initial begin
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    // reset values
    rd_expect(12'h000, 0);
    rd_expect(12'h004, 2500);
    rd_expect(12'h008, -1);
    rd_expect(12'h00C, -1);
    rd_expect(12'h100, 0);
    // unmapped and misaligned addresses
    begin
      axi_resp_e r;
      axil_data_t d;
      bfm.write(12'h080, 32'h1, r);  check(r == AXI_RESP_SLVERR, "no SLVERR on bad write");
      bfm.read(12'h102, d, r);       check(r == AXI_RESP_SLVERR, "no SLVERR on misaligned read");
      bfm.read(12'h200, d, r);       check(r == AXI_RESP_SLVERR, "no SLVERR past last channel");
    end
    // delays: ch i gets a random value, with a few corner values
    for (int i = 0; i < NCH; i++) dly[i] = $urandom_range(2499, 0);
    dly[0] = 0; dly[1] = 2499; dly[2] = 1250; dly[3] = 1249; dly[4] = 1;
    for (int i = 0; i < NCH; i++) wr(12'h100 + 4 * i, dly[i]);
    for (int i = 0; i < NCH; i++) rd_expect(12'h100 + 4 * i, dly[i]);
    // receivers on channels 7 and 56 masked
    en = '1; en[7] = 1'b0; en[56] = 1'b0;
    wr(12'h008, int'(en[31:0]));
    wr(12'h00C, int'(en[63:32]));
    rd_expect(12'h008, int'(en[31:0]));
    rd_expect(12'h00C, int'(en[63:32]));
    wr(12'h000, 1);
    rd_expect(12'h000, 1);
    measure(2500, dly, en);
    measure(2500, dly, en);
    // 25 kHz drive with a new pattern
    for (int i = 0; i < NCH; i++) begin
      dly[i] = $urandom_range(3999, 0);
      wr(12'h100 + 4 * i, dly[i]);
    end
    wr(12'h004, 4000);
    rd_expect(12'h004, 4000);
    // skip the period in which the writes happened
    do @(negedge clk); while (!frame_tick);
    measure(4000, dly, en);
    // stop
    wr(12'h000, 0);
    repeat (3) @(negedge clk);
    check(drive == '0, "drive not low after stop");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
