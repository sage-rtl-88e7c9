// sage_pkg: types and constants shared by the SAGe decompression hardware.
//
// The decompressor rebuilds DNA reads from a consensus sequence plus compact
// mismatch information held in five bit-packed arrays (MPGA/MPA for matching
// positions, MMPGA/MMPA for mismatch counts, positions and indel lengths,
// MBTA for mismatch bases and types). This package fixes the base encoding,
// the output formats, the token passed from the Scan Unit to the Read
// Construction Unit and the sizes that the paper gives (8-bit stream
// registers, 8-bit indel lengths, 150-base read register, up to eight bit-count
// classes per association table). Field widths that the paper does not state
// (16-bit positions and read lengths, 32-bit consensus addresses) are this
// design's own choices.
package sage_pkg;

  // Sizes taken from the paper.
  localparam int unsigned REG_BITS        = 8;    // stream / config register width
  localparam int unsigned INDEL_LEN_BITS  = 8;    // long-indel length field
  localparam int unsigned CHUNK_BASES     = 150;  // read construction register
  localparam int unsigned MAX_CLASSES     = 8;    // bit-count classes per table (d <= 8)
  localparam int unsigned DREG_BITS       = 64;   // each of the two double registers

  // Sizes chosen by this design.
  localparam int unsigned MAX_FIELD_BITS  = 16;   // widest array element read
  localparam int unsigned WIDTH_BITS      = 5;    // holds a field width 0..16
  localparam int unsigned POS_BITS        = 32;   // consensus address
  localparam int unsigned LEN_BITS        = 16;   // read length / counts
  localparam int unsigned BASES_PER_WORD  = DREG_BITS / 2;

  // 3-bit base code. A, C, G, T are the usual 2-bit codes; N only appears in
  // reads marked as corner cases.
  typedef enum logic [2:0] {
    BASE_A = 3'd0,
    BASE_C = 3'd1,
    BASE_G = 3'd2,
    BASE_T = 3'd3,
    BASE_N = 3'd4
  } base_t;

  // Output formats selectable with the read command.
  typedef enum logic [1:0] {
    FMT_2BIT   = 2'd0,   // A=0 C=1 G=2 T=3 (N shown as 0)
    FMT_3BIT   = 2'd1,   // as 2-bit, N=4
    FMT_ASCII  = 2'd2,   // 'A' 'C' 'G' 'T' 'N'
    FMT_ONEHOT = 2'd3    // A=0001 C=0010 G=0100 T=1000 N=0000
  } fmt_t;

  // Token from the Scan Unit to the Read Construction Unit.
  typedef enum logic {
    TOK_READ = 1'b0,     // new read: position, length, mismatch count
    TOK_MM   = 1'b1      // one mismatch: gap of matching bases before it
  } tok_kind_t;

  typedef struct packed {
    tok_kind_t           kind;
    logic [POS_BITS-1:0] pos;     // TOK_READ: absolute consensus position
    logic [LEN_BITS-1:0] len;     // TOK_READ: read length in bases
    logic [LEN_BITS-1:0] count;   // TOK_READ: number of mismatch entries
    logic [LEN_BITS-1:0] gap;     // TOK_MM: matching bases before the mismatch
  } su_token_t;

  // Host command opcodes (only the read command reaches the hardware).
  typedef enum logic [1:0] {
    CMD_NOP       = 2'd0,
    CMD_SAGE_READ = 2'd1
  } cmd_op_t;

  // Formatter: one 8-bit lane per base.
  function automatic logic [7:0] format_base(fmt_t fmt, logic [2:0] b);
    logic [7:0] r;
    unique case (fmt)
      FMT_2BIT:   r = (b == BASE_N) ? 8'd0 : {6'd0, b[1:0]};
      FMT_3BIT:   r = {5'd0, b};
      FMT_ASCII: begin
        unique case (b)
          BASE_A:  r = 8'h41;
          BASE_C:  r = 8'h43;
          BASE_G:  r = 8'h47;
          BASE_T:  r = 8'h54;
          default: r = 8'h4E;
        endcase
      end
      default:    r = (b == BASE_N) ? 8'd0 : (8'd1 << b[1:0]);
    endcase
    return r;
  endfunction

endpackage
