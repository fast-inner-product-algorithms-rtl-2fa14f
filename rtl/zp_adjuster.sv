// zp_adjuster: zero-point adjuster of the FFIP matrix unit.
//
// With a layer-wise weight zero point the unit multiplies A by B+R, where
// every element of R equals r, so A*R = r * sum_k a_{i,k} has to be removed
// from each output. This row adds the elements of a_i pair by pair (two
// adders and a register per column pair, the running sum moving right like
// the alpha row) and a single multiplier scales the finished sum by r. The
// result is handed to the alpha path so that alpha_i + ar_i is subtracted in
// one step. Timing: pair p presents a_i at cycle t+p; ar_i is valid
// (combinationally after the last register) at cycle t+X/2+1, aligned with
// alpha_i. r is a layer constant and must be stable while rows flow.
module zp_adjuster #(
  parameter int X     = ffip_pkg::X_DEF,
  parameter int W     = ffip_pkg::W_DEF,
  parameter int ACC_W = ffip_pkg::acc_width(ffip_pkg::W_DEF, ffip_pkg::X_DEF)
) (
  input  logic                          clk,
  input  logic signed [X-1:0][W-1:0]    a_sk,
  input  logic signed [W-1:0]           r,
  output logic signed [ACC_W-1:0]       ar
);

  localparam int P  = X / 2;
  localparam int SW = W + $clog2(X);  // width of the full row sum
  logic signed [SW-1:0] part [P];

  for (genvar p = 0; p < P; p++) begin : g_cell
    logic signed [SW-1:0] pair_sum;
    assign pair_sum = SW'(signed'(a_sk[2*p])) + SW'(signed'(a_sk[2*p+1]));
    always_ff @(posedge clk) begin
      if (p == 0) part[p] <= pair_sum;
      else        part[p] <= part[p > 0 ? p-1 : 0] + pair_sum;
    end
  end

  logic signed [SW+W-1:0] prod;
  assign prod = part[P-1] * r;
  assign ar   = ACC_W'(prod);

endmodule
