// isqrt_pipe: fully pipelined integer square root, root = floor(sqrt(x)).
//
// How it works: the classic digit-by-digit (binary restoring) method. Each of
// the W/2 stages tries one bit of the root, from the most significant down:
// with `one` the current power of four, if the remaining operand is at least
// res + one it is reduced by that amount and the bit is set. One stage per
// register level, so a new operand is accepted every cycle.
//
// Interface: x must have an even width W. A TAG_W-bit tag travels with each
// operand so the caller can tell results apart.
// Timing: latency W/2 cycles, throughput one root per cycle.
//
// The path-length square root is Eq. 1 of the phase calculation; how it is
// computed (this method, floor rounding, the pipelining) is this design's own.
module isqrt_pipe #(
  parameter int unsigned W     = 42,
  parameter int unsigned TAG_W = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [W-1:0]     in_x,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output logic [W/2-1:0]   out_root,
  output logic [TAG_W-1:0] out_tag
);

  localparam int unsigned N = W / 2;

  logic [W-1:0]     op_q  [N+1];
  logic [W-1:0]     res_q [N+1];
  logic [TAG_W-1:0] tag_q [N+1];
  logic [N:0]       vld_q;

  assign op_q[0]  = in_x;
  assign res_q[0] = '0;
  assign tag_q[0] = in_tag;
  assign vld_q[0] = in_valid;

  for (genvar k = 0; k < N; k++) begin : g_stage
    localparam logic [W-1:0] ONE = {{(W-1){1'b0}}, 1'b1} << (W - 2 - 2 * k);
    logic [W-1:0] trial;
    assign trial = res_q[k] + ONE;

    always_ff @(posedge clk) begin
      if (!rst_n) vld_q[k+1] <= 1'b0;
      else        vld_q[k+1] <= vld_q[k];
    end

    always_ff @(posedge clk) begin
      tag_q[k+1] <= tag_q[k];
      if (op_q[k] >= trial) begin
        op_q[k+1]  <= op_q[k] - trial;
        res_q[k+1] <= (res_q[k] >> 1) + ONE;
      end else begin
        op_q[k+1]  <= op_q[k];
        res_q[k+1] <= res_q[k] >> 1;
      end
    end
  end

  assign out_valid = vld_q[N];
  assign out_root  = res_q[N][N-1:0];
  assign out_tag   = tag_q[N];

endmodule
