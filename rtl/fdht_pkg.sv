// fdht_pkg: sizes, types and arithmetic helpers shared by the FDHT-LSTM
// accelerator.
//
// The accelerator evaluates one hierarchical-Tucker (HT) layer as a chain of
// matrix products, T' x B', where every intermediate T is written into a
// "2-D SRAM array" in a layout that makes the next read produce the permuted
// matrix T' directly. Each element of T is placed at
//   flat = row*N + col = ((y*X + x)*K + k)*Z + z
// where x is the bank, y the segment, k the row inside a segment (the segment
// depth D is K) and z the 16-bit word inside the row. The read side walks
// (y, k) and reads all X banks of a group at once; the assemble unit then cuts
// that read into rows of T' in one of three ways (Type I, II, III).
//
// Defaults are the design example: 16 PEs of 16 MACs, 16-bit data, 24-bit
// accumulators, 14 banks of 256 bits x 2048 words, 8808 words of weights.
// The descriptor format, the product scaling and the saturation are this
// design's own choices.
package fdht_pkg;

  // ---- design-example sizes -------------------------------------------------
  localparam int unsigned DW      = 16;   // data / weight width (Table 7)
  localparam int unsigned AW      = 24;   // accumulator width (Sec. 5.2.1)
  localparam int unsigned NPE     = 16;   // PEs (Table 7)
  localparam int unsigned NMAC    = 16;   // multipliers per PE (Table 7)
  localparam int unsigned WORDS   = 16;   // 16-bit words per 256-bit SRAM row

  localparam int unsigned IDXW    = 20;   // flat element index width
  localparam int unsigned DEPW    = 12;   // segment depth / segment count field
  localparam int unsigned STEPS   = 8;    // step descriptors held by the controller

  // ---- how the assemble unit forms rows of T' from one array read ----------
  typedef enum logic [1:0] {
    XF_I   = 2'd0,   // X rows of Z words: one row per bank        (Fig. 10)
    XF_II  = 2'd1,   // one row of X*Z words: banks concatenated   (Figs. 9, 11)
    XF_III = 2'd2    // Z rows of X words: word z of every bank     (Fig. 12)
  } xform_e;

  // Layout of a matrix in the 2-D SRAM array.
  typedef struct packed {
    logic [4:0]      x;     // banks per bank group (X), 1..G
    logic [DEPW-1:0] k;     // segment depth D = K, 1..M
    logic [4:0]      z;     // words per group (Z), 1..16
    logic [DEPW-1:0] nseg;  // segments per bank = floor(M / K)
  } layout_t;

  // One step of the HT-layer chain: T'(rows x kred) * B'(kred x ncols).
  typedef struct packed {
    xform_e          rd_type;  // how the operand rows are assembled
    layout_t         rd;       // layout the operand was written in
    logic [IDXW-1:0] rd_reads; // number of array reads = Y * K
    layout_t         wr;       // layout for the product T
    logic [8:0]      ncols;    // N, columns of the product (1..256)
    logic [9:0]      wbase;    // first weight-SRAM row of B'
    logic [4:0]      shift;    // requantisation right shift of the accumulator
    logic            last;     // stream the product to the host instead of writing it
  } step_t;

  // ---- arithmetic -----------------------------------------------------------
  // Product scaling: the 32-bit product is shifted right by PSHIFT before it is
  // added to the 24-bit accumulator (fixed point with 8 fraction bits).
  localparam int unsigned PSHIFT = 8;

  function automatic logic signed [AW-1:0] sat_acc(input logic signed [AW+1:0] v);
    localparam logic signed [AW+1:0] MAXV = (AW+2)'((1 << (AW-1)) - 1);
    localparam logic signed [AW+1:0] MINV = -(AW+2)'(1 << (AW-1));
    if (v > MAXV)      return MAXV[AW-1:0];
    else if (v < MINV) return MINV[AW-1:0];
    else               return v[AW-1:0];
  endfunction

  function automatic logic signed [DW-1:0] requant(input logic signed [AW-1:0] acc,
                                                   input logic [4:0] sh);
    logic signed [AW-1:0] s;
    s = acc >>> sh;
    if (s > AW'(32767))       return 16'sh7fff;
    else if (s < -AW'(32768)) return 16'sh8000;
    else                      return s[DW-1:0];
  endfunction

  // Row length of T' for a given assembly type.
  function automatic logic [8:0] kred_of(input xform_e t, input layout_t l);
    case (t)
      XF_I:    return 9'(l.z);
      XF_II:   return 9'(l.x * l.z);
      default: return 9'(l.x);
    endcase
  endfunction

  // Rows of T' produced by one array read.
  function automatic logic [4:0] rows_per_read(input xform_e t, input layout_t l);
    case (t)
      XF_I:    return l.x;
      XF_II:   return 5'd1;
      default: return l.z;
    endcase
  endfunction

endpackage
