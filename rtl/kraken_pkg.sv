// kraken_pkg: types and constants shared by the Kraken SoC RTL.
//
// Holds the bus structs (a TCDM-style memory port and an APB port), the
// sizes the paper gives for the three engines and the memories, and the
// encodings this implementation chose where the paper is silent:
//   * SNE input/output events are COO words {ch, y, x} in the low 16 bits.
//   * A ternary value (trit) is two bits in two's complement: 00 = 0,
//     01 = +1, 11 = -1 (10 is read as 0).
// Sizes that come from the paper: 8 SNE engines, 8 KiB LIF state memory per
// engine, 4-bit 3x3 kernels, 8-bit LIF states, 9.2 KB (9 KiB) SNE weight
// buffer, 96 CUTIE output channels, 158 kB activation and 117 kB weight
// memories, 1.6 bit per compressed ternary weight, 1 MiB L2 in 8 interleaved
// banks, 128 KiB L1 shared by 8 cores.
package kraken_pkg;

  // ---------------------------------------------------------------- buses
  // Memory port: request is granted combinationally (gnt), read data comes
  // back one cycle after the grant (rvalid/rdata).
  typedef struct packed {
    logic        req;
    logic        we;
    logic [31:0] addr;   // byte address
    logic [31:0] wdata;
    logic [3:0]  be;
  } mem_req_t;

  typedef struct packed {
    logic        gnt;
    logic        rvalid;
    logic [31:0] rdata;
  } mem_rsp_t;

  typedef struct packed {
    logic        psel;
    logic        penable;
    logic        pwrite;
    logic [31:0] paddr;
    logic [31:0] pwdata;
  } apb_req_t;

  typedef struct packed {
    logic        pready;
    logic        pslverr;
    logic [31:0] prdata;
  } apb_rsp_t;

  // ---------------------------------------------------------------- SNE
  localparam int unsigned SNE_N_ENGINES  = 8;     // paper: eight engines
  localparam int unsigned SNE_STATE_BYTES = 8192; // paper: 8 KiB per engine
  localparam int unsigned SNE_XW         = 5;     // 32 columns per map
  localparam int unsigned SNE_YW         = 5;     // 32 rows per map
  localparam int unsigned SNE_LCHW       = 3;     // 8 output channels per engine
  localparam int unsigned SNE_CINW       = 5;     // 32 input channels
  localparam int unsigned SNE_COUTW      = 6;     // 64 output channels in all
  localparam int unsigned SNE_KBITS      = 36;    // 3x3 kernel of 4-bit weights
  // 64 output x 32 input kernels x 36 bit = 9216 byte = the 9.2 KB buffer
  localparam int unsigned SNE_N_KERNELS  = 2048;

  typedef struct packed {
    logic [SNE_COUTW-1:0] ch;
    logic [SNE_YW-1:0]    y;
    logic [SNE_XW-1:0]    x;
  } sne_event_t;

  // ---------------------------------------------------------------- CUTIE
  typedef logic [1:0] trit_t;
  localparam trit_t TRIT_ZERO = 2'b00;
  localparam trit_t TRIT_POS  = 2'b01;
  localparam trit_t TRIT_NEG  = 2'b11;

  localparam int unsigned CUTIE_N_OCU   = 96;   // paper: 96 output channels
  localparam int unsigned CUTIE_K       = 3;    // 3x3 kernels (assumed)

  function automatic logic signed [1:0] trit_val(trit_t t);
    return (t == TRIT_POS) ? 2'sd1 : (t == TRIT_NEG) ? -2'sd1 : 2'sd0;
  endfunction

  function automatic trit_t trit_mul(trit_t a, trit_t b);
    if (trit_val(a) == 0 || trit_val(b) == 0) return TRIT_ZERO;
    return (trit_val(a) == trit_val(b)) ? TRIT_POS : TRIT_NEG;
  endfunction

endpackage
