// gk_pkg: constants and types shared by the GateKeeper pre-alignment filter.
//
// Nucleotides are carried as 2-bit codes, A=00, C=01, G=10, T=11, the code
// shown in the encoding example of the GateKeeper paper. A read or a reference
// segment of READ_LEN bases is a 2*READ_LEN-bit vector whose most significant
// pair is the first base. Masks are READ_LEN-bit vectors in the same order:
// bit READ_LEN-1 belongs to base 1. The defaults below are the configuration
// the paper reports for its VC709 build: 100 bp reads, a 128-bit host stream,
// five processing cores, each checking its read against 16 reference segments,
// and a core clock one fifth of the 250 MHz system clock. The edit distance
// threshold E=2 is the value the paper uses for its headline comparisons.
package gk_pkg;

  typedef enum logic [1:0] {
    BASE_A = 2'b00,
    BASE_C = 2'b01,
    BASE_G = 2'b10,
    BASE_T = 2'b11
  } base_t;

  localparam int unsigned READ_LEN_DEF  = 100;  // bases per read
  localparam int unsigned E_DEF         = 2;    // edit distance threshold
  localparam int unsigned BUS_W_DEF     = 128;  // host stream width (RIFFA)
  localparam int unsigned NUM_CORES_DEF = 5;    // processing cores
  localparam int unsigned NUM_REFS_DEF  = 16;   // reference segments per read
  localparam int unsigned CORE_DIV_DEF  = 5;    // 250 MHz / 50 MHz
  localparam int unsigned FIFO_DEPTH_DEF = 4;   // per-core FIFO entries (own choice)

endpackage
