// ffip_pkg: sizes and shared types of the FFIP accelerator.
//
// The defaults are the main configuration of the design: an FFIP matrix unit
// of effective size 64x64 (32 physical PE columns, 64 PE rows plus one alpha
// row) on 8-bit signed inputs. Signed weights and signed activations give the
// pre-adder growth d = 1, so a+b and every g value fit in w+1 bits and the PE
// accumulators need 2w + clog2(X) + 1 bits. Everything else here (tag layout,
// tiler digit order) is this design's own bookkeeping.
package ffip_pkg;

  parameter int W_DEF  = 8;   // w: input bitwidth
  parameter int D_DEF  = 1;   // d: 1 when a and b are both signed
  parameter int X_DEF  = 64;  // effective MXU width  (K per tile)
  parameter int Y_DEF  = 64;  // effective MXU height (N per tile)

  // Width of the PE partial sums: 2w + clog2(X) + 1.
  function automatic int acc_width(input int w, input int x);
    return 2 * w + $clog2(x) + 1;
  endfunction

  // Seven digits of the memory tiler, least significant first (Fig. 8).
  parameter int TILER_DIGITS = 7;
  typedef enum logic [2:0] {
    DIG_W    = 3'd0,
    DIG_H    = 3'd1,
    DIG_CINT = 3'd2,
    DIG_KW   = 3'd3,
    DIG_KH   = 3'd4,
    DIG_HT   = 3'd5,
    DIG_NT   = 3'd6
  } tiler_digit_e;

  parameter int TILER_AW = 16;  // address width of tiler outputs
  parameter int TILER_CW = 12;  // width of a digit's size register

  typedef struct packed {
    logic [TILER_AW-1:0]                    base;
    logic [TILER_DIGITS-1:0][TILER_CW-1:0]  size;    // number of steps, >= 1
    logic [TILER_DIGITS-1:0][TILER_AW-1:0]  stride;  // address step
  } tiler_cfg_t;

  // Accumulator rows (tile height M_t) and bias table size: own choices.
  parameter int ACC_DEPTH_DEF = 1024;
  parameter int ROW_W = $clog2(ACC_DEPTH_DEF);
  parameter int NT_W  = 4;

  // Bookkeeping that travels with each activation row through the GEMM unit.
  typedef struct packed {
    logic [ROW_W-1:0]    row;    // accumulator row (index inside the M tile)
    logic                first;  // first K pass: overwrite the accumulator
    logic                last;   // last K pass: result goes on to post-GEMM
    logic [NT_W-1:0]     nt;     // N tile, selects the bias vector
    logic [TILER_AW-1:0] oaddr;  // layer IO address of the result
  } gemm_tag_t;

endpackage
