// lev_pkg: constants and types shared by the phased-array logic.
//
// The platform drives an 8x8 array of ultrasonic transducers with square
// waves at 40 kHz from a 100 MHz fabric clock, so one drive period lasts
// 2500 clock cycles. A phase delay is therefore expressed as a count of
// clock cycles in 0..PERIOD-1. The channel count, the array shape, the
// 40 kHz tone and the 100 MHz clock follow the published platform; the
// fixed-point formats (micrometre coordinates, 13-bit phase counts) and the
// AXI4-Lite bundle structs are this design's own choices.
//
// Coordinates are signed micrometres (COORD_W bits, +/-524 mm). The
// wavelength is an unsigned count of micrometres (WL_W bits).
package lev_pkg;

  localparam int unsigned CLK_HZ          = 100_000_000;
  localparam int unsigned DRIVE_HZ        = 40_000;
  localparam int unsigned ARRAY_CH        = 64;          // 8 x 8 array
  localparam int unsigned GRID_COLS       = 8;
  localparam int unsigned GRID_ROWS       = 8;
  localparam int unsigned GRID_PITCH_UM   = 16_500;      // 132 mm side / 8
  localparam int unsigned DEFAULT_PERIOD  = CLK_HZ / DRIVE_HZ;  // 2500

  localparam int unsigned PHASE_W  = 13;   // phase / period counts, up to 8191
  localparam int unsigned COORD_W  = 20;   // signed micrometres
  localparam int unsigned WL_W     = 16;   // wavelength in micrometres
  localparam int unsigned SQ_W     = 2 * COORD_W + 2;  // sum of three squares
  localparam int unsigned LP_W     = SQ_W / 2;         // path length

  // Speed of sound 343 m/s at 40 kHz: 8575 um (about 8.5 mm).
  localparam int unsigned DEFAULT_WAVELENGTH_UM = 8575;

  // AXI4-Lite, 32-bit data, 12-bit address (4 KiB window per slave).
  localparam int unsigned AXIL_AW = 12;
  localparam int unsigned AXIL_DW = 32;

  typedef logic [AXIL_AW-1:0] axil_addr_t;
  typedef logic [AXIL_DW-1:0] axil_data_t;

  typedef enum logic [1:0] {
    AXI_RESP_OKAY   = 2'b00,
    AXI_RESP_SLVERR = 2'b10
  } axi_resp_e;

  // Master-to-slave half of an AXI4-Lite port.
  typedef struct packed {
    logic        awvalid;
    axil_addr_t  awaddr;
    logic        wvalid;
    axil_data_t  wdata;
    logic [3:0]  wstrb;
    logic        bready;
    logic        arvalid;
    axil_addr_t  araddr;
    logic        rready;
  } axil_req_t;

  // Slave-to-master half of an AXI4-Lite port.
  typedef struct packed {
    logic        awready;
    logic        wready;
    logic        bvalid;
    axi_resp_e   bresp;
    logic        arready;
    logic        rvalid;
    axil_data_t  rdata;
    axi_resp_e   rresp;
  } axil_resp_t;

  typedef logic signed [COORD_W-1:0] coord_t;
  typedef logic [PHASE_W-1:0]        phase_t;
  typedef logic [WL_W-1:0]           wavelength_t;

  typedef struct packed {
    coord_t x;
    coord_t y;
    coord_t z;
  } point_t;

endpackage
