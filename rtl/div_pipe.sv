// div_pipe: fully pipelined unsigned divider, q = n / d and r = n mod d.
//
// How it works: restoring long division, one quotient bit per stage from bit
// WQ-1 down to 0. Stage k compares the partial remainder with d shifted left
// by the bit position and subtracts when it fits. The divisor travels down
// the pipeline with its dividend, so every operand pair may differ.
//
// Interface: the quotient must fit in WQ bits, i.e. n < d * 2**WQ; that is the
// caller's promise. d = 0 gives an all-ones quotient and r = n (truncated).
// Timing: latency WQ cycles, throughput one division per cycle.
//
// Used for the modulo-wavelength step of Eq. 2 and for scaling the remainder
// to clock cycles; the method and pipelining are this design's own.
module div_pipe #(
  parameter int unsigned WN    = 21,
  parameter int unsigned WD    = 16,
  parameter int unsigned WQ    = 21,
  parameter int unsigned TAG_W = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [WN-1:0]    in_n,
  input  logic [WD-1:0]    in_d,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output logic [WQ-1:0]    out_q,
  output logic [WD-1:0]    out_r,
  output logic [TAG_W-1:0] out_tag
);

  localparam int unsigned W = (WN > WD + WQ) ? WN : WD + WQ;

  logic [W-1:0]     rem_q [WQ+1];
  logic [WD-1:0]    d_q   [WQ+1];
  logic [WQ-1:0]    quo_q [WQ+1];
  logic [TAG_W-1:0] tag_q [WQ+1];
  logic [WQ:0]      vld_q;

  assign rem_q[0] = W'(in_n);
  assign d_q[0]   = in_d;
  assign quo_q[0] = '0;
  assign tag_q[0] = in_tag;
  assign vld_q[0] = in_valid;

  for (genvar k = 0; k < WQ; k++) begin : g_stage
    localparam int unsigned B = WQ - 1 - k;
    logic [W-1:0] shifted;
    assign shifted = W'(d_q[k]) << B;

    always_ff @(posedge clk) begin
      if (!rst_n) vld_q[k+1] <= 1'b0;
      else        vld_q[k+1] <= vld_q[k];
    end

    always_ff @(posedge clk) begin
      d_q[k+1]   <= d_q[k];
      tag_q[k+1] <= tag_q[k];
      if (rem_q[k] >= shifted) begin
        rem_q[k+1]    <= rem_q[k] - shifted;
        quo_q[k+1]    <= quo_q[k] | (WQ'(1) << B);
      end else begin
        rem_q[k+1]    <= rem_q[k];
        quo_q[k+1]    <= quo_q[k];
      end
    end
  end

  assign out_valid = vld_q[WQ];
  assign out_q     = quo_q[WQ];
  assign out_r     = rem_q[WQ][WD-1:0];
  assign out_tag   = tag_q[WQ];

endmodule
