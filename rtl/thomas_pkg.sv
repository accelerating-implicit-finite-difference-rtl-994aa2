// thomas_pkg: shared constants of the Thomas tridiagonal solver.
//
// The defaults below are the configuration this RTL is built for: the
// 32-bit fixed-point solver with 2 integer and 30 fractional bits
// (Q2.30), arithmetic latencies of the radix-2 divider, multiplier and
// subtractor at 200 MHz, three cycles of per-row administration, ten
// concurrent systems ("threads") of at most 512 rows each.  All of these
// numbers are the published ones for the fixed-point solver; every module
// takes them as parameter defaults so other formats (Q2.22 with divider
// latency 52, Q2.14 with divider latency 36) are a parameter change.
// Linting the package on its own reports its constants as unused; the
// modules that import it use them.
package thomas_pkg;

  // Number format: W bits two's complement, F fractional bits.
  localparam int unsigned DEF_W = 32;
  localparam int unsigned DEF_F = 30;

  // Arithmetic latencies in clock cycles.
  localparam int unsigned DEF_DIV_LAT   = 61;  // radix-2 divider
  localparam int unsigned DEF_MUL_LAT   = 6;   // multiplier
  localparam int unsigned DEF_SUB_LAT   = 2;   // subtractor
  localparam int unsigned DEF_ADMIN_LAT = 3;   // per-row scheduling overhead

  // Capacity: concurrent systems and rows per system.
  localparam int unsigned DEF_M_MAX = 10;
  localparam int unsigned DEF_N_MAX = 512;

  // Wrapper FIFO depth (this design's choice).
  localparam int unsigned DEF_FIFO_DEPTH = 64;

  // IEEE-754 single precision width used on the host side.
  localparam int unsigned FLT_W = 32;

endpackage
