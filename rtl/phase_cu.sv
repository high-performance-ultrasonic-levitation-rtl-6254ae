// phase_cu: one compute unit of the phase calculator. For one transducer at
// position t and a focal point f it returns the drive delay, in clock cycles,
// that makes the transducer's wave arrive at f in step with all others.
//
// How it works (one operand per cycle, fully pipelined):
//   1. d = f - t per axis                                    (1 stage)
//   2. the three squares                                     (1 stage)
//   3. their sum, the loop over the axes fully unrolled      (1 stage)
//   4. LP = floor(sqrt(sum)), path length, Eq. 1             (LP_W stages)
//   5. r = LP mod lambda                                     (LP_W stages)
//   6. r * period                                            (1 stage)
//   7. phi = floor(r * period / lambda), Eq. 2 in clock cycles (PHASE_W stages)
//   8. delay = (period - phi) mod period                     (1 stage)
// Eq. 2 gives the phase phi by which a transducer with path length LP must
// lead to focus at f (its wave loses LP/lambda of a cycle on the way). The
// drive controller takes delays, and a lead of phi on a periodic wave is a
// delay of period - phi, so step 8 does that conversion.
//
// Interface: coordinates are signed micrometres, lambda is in micrometres
// (nonzero), period in clock cycles. lambda and period are quasi-static: they
// must not change while operands are in flight. A tag (the transducer index)
// travels with each operand.
// Timing: LATENCY = 2*LP_W + PHASE_W + 5 cycles (60 with the defaults),
// one result per cycle.
//
// Eq. 1, Eq. 2 and the pipelined, unrolled loop follow the published
// accelerator. The fixed-point formats, the floor rounding at each step and
// the lead-to-delay conversion are this design's choices.
module phase_cu
  import lev_pkg::*;
#(
  parameter int unsigned TAG_W = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  point_t           in_tpos,
  input  logic [TAG_W-1:0] in_tag,
  input  point_t           focal,
  input  wavelength_t      wavelength,
  input  phase_t           period,
  output logic             out_valid,
  output phase_t           out_delay,
  output logic [TAG_W-1:0] out_tag
);

  localparam int unsigned D_W     = COORD_W + 1;

  // stage 1: differences
  logic signed [D_W-1:0] dx_q, dy_q, dz_q;
  logic                  v1_q;
  logic [TAG_W-1:0]      t1_q;
  // stage 2: squares
  logic [2*D_W-1:0]      sx_q, sy_q, sz_q;
  logic                  v2_q;
  logic [TAG_W-1:0]      t2_q;
  // stage 3: sum
  logic [SQ_W-1:0]       sum_q;
  logic                  v3_q;
  logic [TAG_W-1:0]      t3_q;

  // magnitudes, so that the squares are plain unsigned products
  logic [D_W-1:0] ax, ay, az;
  assign ax = dx_q[D_W-1] ? D_W'(-dx_q) : D_W'(dx_q);
  assign ay = dy_q[D_W-1] ? D_W'(-dy_q) : D_W'(dy_q);
  assign az = dz_q[D_W-1] ? D_W'(-dz_q) : D_W'(dz_q);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v1_q <= 1'b0;
      v2_q <= 1'b0;
      v3_q <= 1'b0;
    end else begin
      v1_q <= in_valid;
      v2_q <= v1_q;
      v3_q <= v2_q;
    end
  end

  always_ff @(posedge clk) begin
    dx_q  <= D_W'(focal.x) - D_W'(in_tpos.x);
    dy_q  <= D_W'(focal.y) - D_W'(in_tpos.y);
    dz_q  <= D_W'(focal.z) - D_W'(in_tpos.z);
    t1_q  <= in_tag;
    sx_q  <= (2*D_W)'(ax) * (2*D_W)'(ax);
    sy_q  <= (2*D_W)'(ay) * (2*D_W)'(ay);
    sz_q  <= (2*D_W)'(az) * (2*D_W)'(az);
    t2_q  <= t1_q;
    sum_q <= SQ_W'(sx_q) + SQ_W'(sy_q) + SQ_W'(sz_q);
    t3_q  <= t2_q;
  end

  // stage 4: path length
  logic             lp_v;
  logic [LP_W-1:0]  lp;
  logic [TAG_W-1:0] lp_t;

  isqrt_pipe #(.W(SQ_W), .TAG_W(TAG_W)) u_sqrt (
    .clk, .rst_n,
    .in_valid (v3_q), .in_x (sum_q), .in_tag (t3_q),
    .out_valid(lp_v), .out_root (lp), .out_tag (lp_t)
  );

  // stage 5: remainder modulo the wavelength
  logic             r_v;
  wavelength_t      r;
  logic [LP_W-1:0]  r_quot_unused;
  logic [TAG_W-1:0] r_t;

  div_pipe #(.WN(LP_W), .WD(WL_W), .WQ(LP_W), .TAG_W(TAG_W)) u_mod (
    .clk, .rst_n,
    .in_valid (lp_v), .in_n (lp), .in_d (wavelength), .in_tag (lp_t),
    .out_valid(r_v), .out_q (r_quot_unused), .out_r (r), .out_tag (r_t)
  );

  // stage 6: scale by the period
  logic                    rp_v_q;
  logic [WL_W+PHASE_W-1:0] rp_q;
  logic [TAG_W-1:0]        rp_t_q;

  always_ff @(posedge clk) begin
    if (!rst_n) rp_v_q <= 1'b0;
    else        rp_v_q <= r_v;
  end
  always_ff @(posedge clk) begin
    rp_q   <= (WL_W+PHASE_W)'(r) * (WL_W+PHASE_W)'(period);
    rp_t_q <= r_t;
  end

  // stage 7: phase in clock cycles
  logic             ph_v;
  phase_t           ph;
  wavelength_t      ph_rem_unused;
  logic [TAG_W-1:0] ph_t;

  div_pipe #(.WN(WL_W+PHASE_W), .WD(WL_W), .WQ(PHASE_W), .TAG_W(TAG_W)) u_scale (
    .clk, .rst_n,
    .in_valid (rp_v_q), .in_n (rp_q), .in_d (wavelength), .in_tag (rp_t_q),
    .out_valid(ph_v), .out_q (ph), .out_r (ph_rem_unused), .out_tag (ph_t)
  );

  // stage 8: lead -> delay
  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= ph_v;
  end
  always_ff @(posedge clk) begin
    out_delay <= (ph == '0) ? '0 : period - ph;
    out_tag   <= ph_t;
  end

endmodule
