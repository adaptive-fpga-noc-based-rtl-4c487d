// mspec_pkg: types and constants shared by the units of the RGB distance
// processing module.
//
// Spectral samples are 8-bit unsigned integers, one per wavelength, as the
// multispectral camera delivers them; 400 wavelengths (380 nm to 780 nm in
// 1 nm steps) is the largest spectrum handled. Commands and results travel
// between modules as frames. The frame layout (destination address, opcode,
// 32-bit payload) and the opcode values are this design's own choice.
package mspec_pkg;

  // Spectrum and colour sizes
  localparam int unsigned DEF_SPEC_W    = 8;    // spectral sample width
  localparam int unsigned DEF_COEF_W    = 8;    // RGB reference value width
  localparam int unsigned DEF_RGB_W     = 8;    // projected colour component width
  localparam int unsigned DEF_N_BANDS   = 400;  // wavelengths per pixel spectrum (most)
  localparam int unsigned DEF_PIX_W     = 23;   // pixel counter width
  localparam int unsigned DEF_DE_W      = DEF_RGB_W + 1;      // floor(sqrt(3*(2^DEF_RGB_W-1)^2)) fits
  localparam int unsigned DEF_R1_W      = DEF_PIX_W + DEF_DE_W;   // image distance never overflows
  localparam int unsigned ADDR_W    = 4;    // module address on the command network
  localparam int unsigned PAYLOAD_W = 32;

  // Address of the control module, destination of every result frame
  localparam logic [ADDR_W-1:0] CONTROL_ADDR = '0;

  typedef enum logic [3:0] {
    OP_NOP         = 4'h0,
    OP_SET_NPIX    = 4'h1,  // payload: number of pixels of the next image
    OP_SET_P1      = 4'h2,  // payload: precision threshold P1
    OP_LOAD_REF    = 4'h3,  // next 3*DEF_N_BANDS data bytes are RGB reference values
    OP_START       = 4'h4,  // correlate the next npix OI/CI pixel pairs
    OP_SET_NBANDS  = 4'h5,  // payload: wavelengths per spectrum in use (1..N_BANDS)
    OP_RESULT_R1   = 4'h8,  // result: image distance R1
    OP_RESULT_AUTH = 4'h9,  // result: bit 0 = 1 when R1 < P1
    OP_ERROR       = 4'hF   // result: unknown opcode received (payload = opcode)
  } opcode_e;

  typedef struct packed {
    logic [ADDR_W-1:0]    dest;
    opcode_e              op;
    logic [PAYLOAD_W-1:0] payload;
  } frame_t;

  // Commands passed from the decode unit to the control unit
  typedef enum logic [2:0] {
    CMD_SET_NPIX,
    CMD_SET_P1,
    CMD_LOAD_REF,
    CMD_START,
    CMD_SET_NBANDS,
    CMD_ERROR
  } cmd_e;

  typedef struct packed {
    cmd_e                 cmd;
    logic [PAYLOAD_W-1:0] arg;
  } command_t;

endpackage
