// gemm_unit: FFIP matrix unit plus output realignment and tile accumulation.
//
// A GEMM larger than one X x Y tile is done as several passes over the K
// dimension: each pass streams the M rows of an activation tile against one
// weight tile, and the partial products of the passes are summed here,
// outside the matrix unit. The MXU's rows come out one cycle apart (row j is
// j cycles later); a reversed triangular buffer delays row j by Y-1-j so a
// whole Y-wide result vector appears at once. A tag (gemm_tag_t) rides a
// delay line of the same length: on the first pass the result overwrites
// accumulator row tag.row, on later passes it is added, and on the last pass
// the finished sum is sent on (res_valid, res, res_tag) instead.
// Timing: a row entering at cycle t reaches the accumulator at t+X/2+Y+2 and
// res_valid follows one cycle later. Accumulator size and width, the tag and
// the deskew buffer are this design's choices; the paper only says that tile
// products are accumulated outside the MXU.
module gemm_unit
  import ffip_pkg::*;
#(
  parameter int X         = X_DEF,
  parameter int Y         = Y_DEF,
  parameter int W         = W_DEF,
  parameter int ACC_DEPTH = ACC_DEPTH_DEF,
  parameter int OUT_W     = 32
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           a_valid,
  input  logic                           a_bank,
  input  logic signed [X-1:0][W-1:0]     a,
  input  gemm_tag_t                      a_tag,
  input  logic signed [W-1:0]            r,
  input  logic                           wl_start,
  input  logic                           wl_bank,
  input  logic                           b_valid,
  input  logic                           b_first,
  input  logic                           b_last,
  input  logic signed [X-1:0][W-1:0]     b,
  output logic                           wl_busy,
  output logic                           wl_done,
  output logic                           res_valid,
  output logic signed [Y-1:0][OUT_W-1:0] res,
  output gemm_tag_t                      res_tag
);

  localparam int ACC_W = acc_width(W, X);
  localparam int DLY   = X/2 + Y + 2;   // input to aligned MXU output

  logic [Y-1:0]                   c_valid;
  logic signed [Y-1:0][ACC_W-1:0] c, c_al;
  logic [Y-1:0]                   v_al;

  ffip_mxu #(.X(X), .Y(Y), .W(W)) u_mxu (
    .clk(clk), .rst_n(rst_n), .a_valid(a_valid), .a_bank(a_bank), .a(a), .r(r),
    .wl_start(wl_start), .wl_bank(wl_bank), .b_valid(b_valid), .b_first(b_first),
    .b_last(b_last), .b(b), .wl_busy(wl_busy), .wl_done(wl_done),
    .c_valid(c_valid), .c(c));

  tri_buffer #(.N(Y), .EW(ACC_W), .PAIRED(1'b0), .REVERSE(1'b1)) u_deskew (
    .clk(clk), .din(c), .sin(c_valid), .dout(c_al), .sout(v_al));

  // tag delay line
  gemm_tag_t tag_pipe [DLY];
  always_ff @(posedge clk) begin
    tag_pipe[0] <= a_tag;
    for (int s = 1; s < DLY; s++) tag_pipe[s] <= tag_pipe[s-1];
  end
  gemm_tag_t t_al;
  assign t_al = tag_pipe[DLY-1];

  // accumulation buffer
  logic [Y*OUT_W-1:0] acc_mem [ACC_DEPTH];
  logic signed [Y-1:0][OUT_W-1:0] acc_rd, acc_new;
  assign acc_rd = acc_mem[t_al.row];

  always_comb begin
    for (int j = 0; j < Y; j++)
      acc_new[j] = (t_al.first ? '0 : acc_rd[j]) + OUT_W'(signed'(c_al[j]));
  end

  always_ff @(posedge clk) begin
    if (v_al[Y-1] && !t_al.last) acc_mem[t_al.row] <= acc_new;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) res_valid <= 1'b0;
    else        res_valid <= v_al[Y-1] && t_al.last;
  end
  always_ff @(posedge clk) begin
    res     <= acc_new;
    res_tag <= t_al;
  end

endmodule
