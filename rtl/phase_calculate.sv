// phase_calculate: the phase-delay accelerator. Given a focal point it
// computes, for each transducer of the array, the drive delay in clock cycles
// that focuses the array there, and keeps the results for the processor.
//
// How it works: the processor writes the focal point, the wavelength (which
// it derives from the measured temperature), the drive period and the range
// of transducers to compute (OFFSET, COUNT), then sets START. The controller
// then issues NUM_CU transducers per cycle, round robin, into NUM_CU
// pipelined phase_cu units. Transducer positions come from a table computed
// in logic: a flat ARRAY_COLS x ARRAY_ROWS grid of pitch PITCH_UM centred on
// the origin in the z = 0 plane, index i at column i mod ARRAY_COLS and row
// i / ARRAY_COLS:
//     x_i = (2*(i mod COLS) - (COLS-1)) * PITCH/2
//     y_i = (2*(i div COLS) - (ROWS-1)) * PITCH/2,   z_i = 0.
// Each result is written into a result register of its transducer. When the
// last one is back, DONE and the interrupt go high; CYCLES holds how long the
// run took.
//
// Register map (byte addresses, 32-bit registers):
//   0x000 CTRL   write: bit 0 START (ignored while busy), bit 1 clear DONE
//                read:  bit 0 BUSY, bit 1 DONE
//   0x004 FX, 0x008 FY, 0x00C FZ  focal point, signed micrometres
//   0x010 WAVELENGTH  micrometres (reset 8575: 343 m/s at 40 kHz)
//   0x014 PERIOD      drive period in clock cycles (reset 2500)
//   0x018 OFFSET      first transducer of the run (reset 0)
//   0x01C COUNT       number of transducers (reset NUM_T); the run is clipped
//                     at the end of the array
//   0x020 CYCLES      read only: clock cycles from START to DONE of the last run
//   0x100 + 4i        RESULT[i], read only: delay of transducer i
// Other addresses answer SLVERR. Focal point, wavelength and period must not
// be written while BUSY.
//
// Timing: a run of n transducers sets DONE ceil(n/NUM_CU) + 60 cycles after
// the cycle in which the START write is accepted (60 = phase_cu latency with
// the default formats), which is also the value left in CYCLES; irq is DONE.
//
// The inputs (focal point coordinates and an offset selecting the
// transducers), the output (one phase delay per transducer), the pipelined
// loop and the option of several compute units follow the published
// accelerator. The register map, the COUNT register, the result registers,
// the cycle counter and the grid geometry (pitch = 132 mm side / 8) are this
// design's choices.
module phase_calculate
  import lev_pkg::*;
#(
  parameter int unsigned NUM_T      = lev_pkg::ARRAY_CH,
  parameter int unsigned NUM_CU     = 1,
  parameter int unsigned ARRAY_COLS = lev_pkg::GRID_COLS,
  parameter int unsigned PITCH_UM   = lev_pkg::GRID_PITCH_UM
) (
  input  logic       clk,
  input  logic       rst_n,
  input  axil_req_t  s_axil_req,
  output axil_resp_t s_axil_resp,
  output logic       irq
);

  localparam int unsigned ARRAY_ROWS = (NUM_T + ARRAY_COLS - 1) / ARRAY_COLS;
  localparam int unsigned IDX_W      = $clog2(NUM_T + 1);
  localparam int unsigned RES_IDX_W  = (NUM_T > 1) ? $clog2(NUM_T) : 1;

  localparam axil_addr_t A_CTRL   = 12'h000;
  localparam axil_addr_t A_FX     = 12'h004;
  localparam axil_addr_t A_FY     = 12'h008;
  localparam axil_addr_t A_FZ     = 12'h00C;
  localparam axil_addr_t A_WL     = 12'h010;
  localparam axil_addr_t A_PERIOD = 12'h014;
  localparam axil_addr_t A_OFFSET = 12'h018;
  localparam axil_addr_t A_COUNT  = 12'h01C;
  localparam axil_addr_t A_CYCLES = 12'h020;
  localparam axil_addr_t A_RESULT = 12'h100;

  typedef logic [IDX_W-1:0] idx_t;

  typedef enum logic [1:0] {S_IDLE, S_ISSUE, S_DRAIN} state_e;

  // ---------------------------------------------------------------- registers
  logic       wr_en, rd_en, wr_err, rd_err;
  axil_addr_t wr_addr, rd_addr;
  axil_data_t wr_data, rd_data;
  logic [3:0] wr_strb;

  point_t      focal_q;
  wavelength_t wl_q;
  phase_t      period_q;
  idx_t        offset_q, count_q;
  axil_data_t  cycles_q;
  logic        done_q;
  phase_t      result_q [NUM_T];

  state_e      state_q;
  idx_t        next_q;     // next transducer to issue
  idx_t        end_q;      // one past the last transducer of the run
  idx_t        left_q;     // results still to come back

  axil_slave u_axil (
    .clk, .rst_n,
    .req  (s_axil_req),
    .resp (s_axil_resp),
    .wr_en, .wr_addr, .wr_data, .wr_strb, .wr_err,
    .rd_en, .rd_addr, .rd_data, .rd_err
  );

  function automatic logic writable(input axil_addr_t a);
    return a inside {A_CTRL, A_FX, A_FY, A_FZ, A_WL, A_PERIOD, A_OFFSET, A_COUNT};
  endfunction

  function automatic logic is_result(input axil_addr_t a);
    return a[1:0] == 2'b00 && a >= A_RESULT && a < A_RESULT + axil_addr_t'(4 * NUM_T);
  endfunction

  always_comb begin
    wr_err  = !writable(wr_addr);
    rd_err  = !(writable(rd_addr) || rd_addr == A_CYCLES || is_result(rd_addr));
    rd_data = '0;
    unique case (rd_addr)
      A_CTRL:   rd_data = axil_data_t'({done_q, state_q != S_IDLE});
      A_FX:     rd_data = axil_data_t'(signed'(focal_q.x));
      A_FY:     rd_data = axil_data_t'(signed'(focal_q.y));
      A_FZ:     rd_data = axil_data_t'(signed'(focal_q.z));
      A_WL:     rd_data = axil_data_t'(wl_q);
      A_PERIOD: rd_data = axil_data_t'(period_q);
      A_OFFSET: rd_data = axil_data_t'(offset_q);
      A_COUNT:  rd_data = axil_data_t'(count_q);
      A_CYCLES: rd_data = cycles_q;
      default:
        if (is_result(rd_addr))
          rd_data = axil_data_t'(result_q[RES_IDX_W'((rd_addr - A_RESULT) >> 2)]);
    endcase
  end

  // ------------------------------------------------------------- geometry
  function automatic point_t tpos(input idx_t i);
    point_t p;
    int     col, row;
    col = int'(i) % ARRAY_COLS;
    row = int'(i) / ARRAY_COLS;
    p.x = coord_t'((2 * col - (int'(ARRAY_COLS) - 1)) * int'(PITCH_UM) / 2);
    p.y = coord_t'((2 * row - (int'(ARRAY_ROWS) - 1)) * int'(PITCH_UM) / 2);
    p.z = '0;
    return p;
  endfunction

  // ----------------------------------------------------- compute units
  logic   cu_in_v  [NUM_CU];
  idx_t   cu_in_i  [NUM_CU];
  logic   cu_out_v [NUM_CU];
  phase_t cu_out_d [NUM_CU];
  idx_t   cu_out_i [NUM_CU];

  for (genvar c = 0; c < NUM_CU; c++) begin : g_cu
    assign cu_in_v[c] = (state_q == S_ISSUE) && (next_q + idx_t'(c) < end_q);
    assign cu_in_i[c] = next_q + idx_t'(c);

    phase_cu #(.TAG_W(IDX_W)) u_cu (
      .clk, .rst_n,
      .in_valid   (cu_in_v[c]),
      .in_tpos    (tpos(cu_in_i[c])),
      .in_tag     (cu_in_i[c]),
      .focal      (focal_q),
      .wavelength (wl_q),
      .period     (period_q),
      .out_valid  (cu_out_v[c]),
      .out_delay  (cu_out_d[c]),
      .out_tag    (cu_out_i[c])
    );
  end

  // Number of results returning this cycle.
  idx_t returned;
  always_comb begin
    returned = '0;
    for (int c = 0; c < NUM_CU; c++) returned += idx_t'(cu_out_v[c]);
  end

  // ------------------------------------------------------------ control
  logic start;
  assign start = wr_en && wr_addr == A_CTRL && wr_data[0] && state_q == S_IDLE;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      focal_q  <= '0;
      wl_q     <= wavelength_t'(DEFAULT_WAVELENGTH_UM);
      period_q <= phase_t'(DEFAULT_PERIOD);
      offset_q <= '0;
      count_q  <= idx_t'(NUM_T);
      cycles_q <= '0;
      done_q   <= 1'b0;
      state_q  <= S_IDLE;
      next_q   <= '0;
      end_q    <= '0;
      left_q   <= '0;
    end else begin
      if (wr_en) begin
        unique case (wr_addr)
          A_FX:     focal_q.x <= wr_data[COORD_W-1:0];
          A_FY:     focal_q.y <= wr_data[COORD_W-1:0];
          A_FZ:     focal_q.z <= wr_data[COORD_W-1:0];
          A_WL:     wl_q      <= wr_data[WL_W-1:0];
          A_PERIOD: period_q  <= wr_data[PHASE_W-1:0];
          A_OFFSET: offset_q  <= idx_t'(wr_data);
          A_COUNT:  count_q   <= idx_t'(wr_data);
          A_CTRL:   if (wr_data[1]) done_q <= 1'b0;
          default:  ;
        endcase
      end

      unique case (state_q)
        S_IDLE:
          if (start) begin
            int unsigned last;
            last     = int'(offset_q) + int'(count_q);
            if (last > NUM_T) last = NUM_T;
            next_q   <= offset_q;
            end_q    <= idx_t'(last);
            left_q   <= (offset_q >= idx_t'(last)) ? '0 : idx_t'(last) - offset_q;
            cycles_q <= '0;
            done_q   <= 1'b0;
            state_q  <= S_ISSUE;
          end
        S_ISSUE: begin
          cycles_q <= cycles_q + 1;
          left_q   <= left_q - returned;
          if (next_q + idx_t'(NUM_CU) >= end_q) begin
            next_q  <= end_q;
            state_q <= S_DRAIN;
          end else begin
            next_q <= next_q + idx_t'(NUM_CU);
          end
        end
        S_DRAIN: begin
          cycles_q <= cycles_q + 1;
          left_q   <= left_q - returned;
          if (left_q == returned) begin
            done_q  <= 1'b1;
            state_q <= S_IDLE;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_T; i++) result_q[i] <= '0;
    end else begin
      for (int c = 0; c < NUM_CU; c++)
        if (cu_out_v[c] && int'(cu_out_i[c]) < NUM_T) result_q[RES_IDX_W'(cu_out_i[c])] <= cu_out_d[c];
    end
  end

  assign irq = done_q;

  // Every issued transducer comes back exactly once: never more results
  // than are outstanding.
  a_no_extra: assert property (@(posedge clk) disable iff (!rst_n)
    returned <= left_q || state_q == S_IDLE && returned == '0);

endmodule
