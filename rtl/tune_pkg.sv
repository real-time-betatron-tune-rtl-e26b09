// tune_pkg: constants and types shared by the betatron-tune correction firmware.
//
// The firmware turns the current deviations dI_i of eight magnet power
// supplies into a tune displacement dnu = sum(alpha_i * dI_i) and sends it to
// a correction quadrupole, while recording the raw currents for monitoring.
// Sizes that come from the system itself (8 deviations, 4 local AD boards,
// 8 channels of 16 bits per board) follow the original system; the bus
// structs and the register map below are this design's own choices.
package tune_pkg;

  localparam int unsigned N_DI      = 8;   // supplies in the sum (6 bends + 2 quads)
  localparam int unsigned N_LOCAL   = 4;   // AD boards read directly (dI1..dI4)
  localparam int unsigned N_REMOTE  = 4;   // dI5..dI8 arrive over fibre
  localparam int unsigned ADC_BITS  = 16;  // ADS8568 resolution
  localparam int unsigned N_MON     = 7;   // monitor streams to the DDR3 selector
  localparam int unsigned N_DAC     = 4;   // analog monitor outputs
  localparam int unsigned ALPHA_W   = 18;  // coefficient width (one DSP input)

  typedef logic signed [ADC_BITS-1:0] sample_t;

  // Avalon-MM master request/response, 32-bit word bus with byte addresses.
  typedef struct packed {
    logic [31:0] address;
    logic        read;
    logic        write;
    logic [31:0] writedata;
  } avm_req_t;

  typedef struct packed {
    logic [31:0] readdata;
    logic        readdatavalid;
    logic        waitrequest;
  } avm_rsp_t;

  // Control register word addresses (CPU side).
  typedef enum logic [3:0] {
    REG_CTRL      = 4'd0,  // [0] run, [1] correction enable
    REG_DAC_SEL   = 4'd1,  // 4 x 4-bit source codes for the DAC channels
    REG_DDR_SEL   = 4'd2,  // 4 x 3-bit source codes for the DDR3 record
    REG_BUF_BASE0 = 4'd3,  // FPGA-side DDR3 byte address, ping buffer
    REG_BUF_BASE1 = 4'd4,  // FPGA-side DDR3 byte address, pong buffer
    REG_HPS_BASE  = 4'd5,  // destination byte address in the CPU's DDR3
    REG_MAX_SAMP  = 4'd6,  // samples per buffer before it is closed
    REG_STATUS    = 4'd7,  // [0] DMA busy, [15:8] link errors, [23:16] DMA overruns
    REG_CYCLES    = 4'd8,  // accelerator cycles moved to the CPU's DDR3
    REG_LAST_LEN  = 4'd9   // words in the last moved cycle
  } reg_addr_e;

  // DAC source codes: 0..3 Iout1..4, 4..11 dI1..dI8, 12 Vref, others zero.
  localparam logic [3:0] DAC_SRC_VREF = 4'd12;

  // Words per DDR3 record: four selected streams and dnu.
  localparam int unsigned REC_WORDS = 5;

endpackage
