// levitation_pl_top: programmable-logic side of the FPGA phased-array
// levitator. It holds the phase-delay accelerator and the phased-array drive
// controller; the embedded processor uses the first to compute a focal
// pattern and the second to play it on the 64 transducer drive pins.
//
// How it works: each block is an AXI4-Lite slave in its own 4 KiB window.
// Both slave ports are brought out of this module as they stand, to be joined
// to the processor's general-purpose AXI master by an interconnect outside
// this RTL. A typical update is: write the focal point to phase_calculate,
// set START, wait for phase_irq, read the NUM_CH results and write them into
// the DELAY registers of upac, which applies them at its next period
// boundary. Several focal points are produced by repeating this for each
// point in turn (time-division multiplexing). The drive pins go to the
// MOSFET driver board through the FMC connector; channels used as echo
// receivers are masked off in upac and their echo goes straight to the ADC.
//
// Interface: clk is the 100 MHz fabric clock, rst_n a synchronous active-low
// reset. s_phase_* and s_upac_* are the two AXI4-Lite slave ports.
// fmc_drive carries the square waves; frame_tick pulses at the start of each
// drive period; phase_irq is the accelerator's done interrupt.
//
// The split into an accelerator and a drive controller, both reached over
// AXI by the processor, follows the published platform; the bundling of the
// AXI ports as structs and the frame_tick output are this design's choices.
module levitation_pl_top
  import lev_pkg::*;
#(
  parameter int unsigned NUM_CH = lev_pkg::ARRAY_CH,
  parameter int unsigned NUM_CU = 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  axil_req_t         s_phase_req,
  output axil_resp_t        s_phase_resp,
  input  axil_req_t         s_upac_req,
  output axil_resp_t        s_upac_resp,
  output logic              phase_irq,
  output logic [NUM_CH-1:0] fmc_drive,
  output logic              frame_tick
);

  phase_calculate #(
    .NUM_T  (NUM_CH),
    .NUM_CU (NUM_CU)
  ) u_phase_calculate (
    .clk, .rst_n,
    .s_axil_req  (s_phase_req),
    .s_axil_resp (s_phase_resp),
    .irq         (phase_irq)
  );

  upac #(
    .NUM_CH (NUM_CH)
  ) u_upac (
    .clk, .rst_n,
    .s_axil_req  (s_upac_req),
    .s_axil_resp (s_upac_resp),
    .drive       (fmc_drive),
    .frame_tick
  );

endmodule
