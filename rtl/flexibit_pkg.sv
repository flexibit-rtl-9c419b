// Shared types and design constants of the FlexiBit accelerator.
//
// The PE sizes are the default design parameters of the architecture:
// 24-bit activation/weight registers, 12-bit sign/exponent/mantissa
// registers and 144-bit primitive, exponent-adder, concat-shift and
// accumulator widths. NPROD (products per PE per cycle), the internal
// accumulator format and the CSR map are choices of this implementation.
package flexibit_pkg;

  localparam int unsigned REG_W  = 24;   // activation / weight register width
  localparam int unsigned R_M    = 12;   // mantissa register width
  localparam int unsigned R_E    = 12;   // exponent register width
  localparam int unsigned R_S    = 12;   // sign register width
  localparam int unsigned L_PRIM = 144;  // primitive register width
  localparam int unsigned L_ADD  = 144;  // flexible-bit exponent adder width
  localparam int unsigned NPROD  = 36;   // products (and accumulators) per PE
  localparam int unsigned PW     = 24;   // raw mantissa product width (R_M*2)
  localparam int unsigned SIGW   = 26;   // significand width incl. implicit ones
  localparam int unsigned PEXPW  = 10;   // width of an exponent sum
  localparam int unsigned ACCW   = 32;   // accumulator magnitude width
  localparam int unsigned ACC_LEAD = 30; // normalised position of the leading one
  localparam int unsigned AEXPW  = 12;   // accumulator exponent width (signed)
  localparam int unsigned OUTW   = 16;   // widest output element

  // Layer configuration written by the host into the CSRs and broadcast
  // to every PE. Element layout (LSB first): sign, exponent, mantissa.
  typedef struct packed {
    logic       int_mode;  // 1: sign-magnitude integers, exponent path bypassed
    logic       mx_en;     // apply the two MX shared scales at output
    logic [4:0] pa;        // activation precision (bits per element)
    logic [3:0] ea;        // activation exponent bits
    logic [4:0] pw;        // weight precision
    logic [3:0] ew;        // weight exponent bits
    logic [4:0] po;        // output precision
    logic [3:0] eo;        // output exponent bits
    logic [7:0] scale_a;   // MX shared activation scale (E8M0)
    logic [7:0] scale_w;   // MX shared weight scale (E8M0)
  } fb_cfg_t;

  // Per-layer control derived from the configuration.
  typedef struct packed {
    logic [4:0]       ma;        // activation mantissa bits
    logic [4:0]       mw;        // weight mantissa bits
    logic [4:0]       mo;        // output mantissa bits
    logic [4:0]       na;        // activations used per register
    logic [4:0]       nw;        // weights used per register
    logic [5:0]       nprod;     // products per cycle (na*nw)
    logic [4:0]       sw;        // FBEA segment width
    logic [L_ADD-1:0] fbea_ctrl; // 1 = break the carry chain after this bit
  } fb_ctl_t;

  typedef logic [PW-1:0]    prod_t;
  typedef logic [SIGW-1:0]  sig_t;
  typedef logic [ACCW-1:0]  accm_t;
  typedef logic signed [AEXPW-1:0] acce_t;

endpackage
