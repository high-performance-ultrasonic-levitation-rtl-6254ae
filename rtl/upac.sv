// upac: Ultrasonic Phased Array Controller. The processor writes one phase
// delay per transducer into its registers over AXI4-Lite and the controller
// turns them into NUM_CH phase-shifted square waves for the MOSFET drivers.
//
// How it works: an axil_slave front end decodes the register map below into
// flops; upac_wavegen reads those flops continuously and applies a changed
// pattern at the next period boundary, so a pattern written channel by
// channel during one period appears whole in a later one.
//
// Register map (byte addresses, 32-bit registers, all readable):
//   0x000 CTRL     bit 0 RUN: 1 starts the drive counter, 0 holds all outputs low
//   0x004 PERIOD   drive period in clock cycles (reset 2500 = 40 kHz at 100 MHz;
//                  4000 gives the 25 kHz of the levitation transducers)
//   0x008 + 4k     CH_EN[k]: enables for channels 32k..32k+31 (reset all 1);
//                  clear a bit to keep a channel low, e.g. an echo receiver
//   0x100 + 4i     DELAY[i]: delay of channel i in clock cycles (reset 0),
//                  0 <= DELAY < PERIOD
// Other addresses answer SLVERR. Byte strobes are ignored: every write
// replaces the whole register.
//
// Timing: a register changes the cycle after its write is accepted; the
// outputs follow from the next period boundary (frame_tick).
//
// The register-per-channel delay in clock cycles, written over AXI, is how
// the published platform describes its controller. The run bit, the period
// register and the channel-enable registers, and the address map, are this
// design's choices.
module upac
  import lev_pkg::*;
#(
  parameter int unsigned NUM_CH = lev_pkg::ARRAY_CH
) (
  input  logic              clk,
  input  logic              rst_n,
  input  axil_req_t         s_axil_req,
  output axil_resp_t        s_axil_resp,
  output logic [NUM_CH-1:0] drive,
  output logic              frame_tick
);

  localparam int unsigned NUM_EN = (NUM_CH + 31) / 32;
  localparam axil_addr_t  A_CTRL   = 12'h000;
  localparam axil_addr_t  A_PERIOD = 12'h004;
  localparam axil_addr_t  A_EN     = 12'h008;
  localparam axil_addr_t  A_DELAY  = 12'h100;

  logic       wr_en, rd_en, wr_err, rd_err;
  axil_addr_t wr_addr, rd_addr;
  axil_data_t wr_data, rd_data;
  logic [3:0] wr_strb;

  logic                  run_q;
  phase_t                period_q;
  logic [NUM_EN*32-1:0]  en_q;
  phase_t                delay_q [NUM_CH];

  axil_slave u_axil (
    .clk, .rst_n,
    .req     (s_axil_req),
    .resp    (s_axil_resp),
    .wr_en, .wr_addr, .wr_data, .wr_strb, .wr_err,
    .rd_en, .rd_addr, .rd_data, .rd_err
  );

  // Address decode shared by reads and writes.
  typedef enum logic [2:0] {R_NONE, R_CTRL, R_PERIOD, R_EN, R_DELAY} reg_e;

  function automatic reg_e decode(input axil_addr_t a, output int unsigned idx);
    idx = 0;
    if (a[1:0] != 2'b00)                                   return R_NONE;
    if (a == A_CTRL)                                       return R_CTRL;
    if (a == A_PERIOD)                                     return R_PERIOD;
    if (a >= A_EN && a < A_EN + axil_addr_t'(4 * NUM_EN)) begin
      idx = 32'(axil_addr_t'(a - A_EN)) >> 2;                         return R_EN;
    end
    if (a >= A_DELAY && a < A_DELAY + axil_addr_t'(4 * NUM_CH)) begin
      idx = 32'(axil_addr_t'(a - A_DELAY)) >> 2;                      return R_DELAY;
    end
    return R_NONE;
  endfunction

  reg_e        wr_reg, rd_reg;
  int unsigned wr_idx, rd_idx;

  always_comb begin
    wr_reg = decode(wr_addr, wr_idx);
    rd_reg = decode(rd_addr, rd_idx);
    wr_err = (wr_reg == R_NONE);
    rd_err = (rd_reg == R_NONE);
    unique case (rd_reg)
      R_CTRL:   rd_data = axil_data_t'(run_q);
      R_PERIOD: rd_data = axil_data_t'(period_q);
      R_EN:     rd_data = en_q[rd_idx*32 +: 32];
      R_DELAY:  rd_data = axil_data_t'(delay_q[rd_idx]);
      default:  rd_data = '0;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      run_q    <= 1'b0;
      period_q <= phase_t'(DEFAULT_PERIOD);
      en_q     <= '1;
      for (int i = 0; i < NUM_CH; i++) delay_q[i] <= '0;
    end else if (wr_en) begin
      unique case (wr_reg)
        R_CTRL:   run_q   <= wr_data[0];
        R_PERIOD: period_q <= wr_data[PHASE_W-1:0];
        R_EN:     en_q[wr_idx*32 +: 32] <= wr_data;
        R_DELAY:  delay_q[wr_idx] <= wr_data[PHASE_W-1:0];
        default:  ;
      endcase
    end
  end

  upac_wavegen #(.NUM_CH(NUM_CH)) u_wavegen (
    .clk, .rst_n,
    .run    (run_q),
    .period (period_q),
    .delay  (delay_q),
    .ch_en  (en_q[NUM_CH-1:0]),
    .drive,
    .frame_tick
  );

endmodule
