// tri_buffer: triangular skew buffer for vectors entering or leaving the MXU.
//
// N lanes of EW bits, lane k (1-based) delayed by its own shift register.
// With PAIRED=1 the depth of lane k is ceil(k/2), the input buffer of the
// FFIP matrix unit: both elements of column pair p reach the PE column p
// together, one cycle after pair p-1. With PAIRED=0 the depth is k, the
// plain systolic skew. REVERSE=1 instead gives lane k a depth of N-k, which
// undoes a one-cycle-per-lane skew (used here to realign the MXU output rows;
// the paper shows only the input buffers, the output use is this design's).
// Timing: din is sampled every cycle; lane k appears on dout after its depth
// in cycles (a depth of 0 is a wire). No reset; an optional side bit per
// lane (sin/sout) travels with the data.
module tri_buffer #(
  parameter int N       = ffip_pkg::X_DEF,
  parameter int EW      = ffip_pkg::W_DEF,
  parameter bit PAIRED  = 1'b1,
  parameter bit REVERSE = 1'b0
) (
  input  logic                   clk,
  input  logic [N-1:0][EW-1:0]   din,
  input  logic [N-1:0]           sin,
  output logic [N-1:0][EW-1:0]   dout,
  output logic [N-1:0]           sout
);

  function automatic int lane_depth(input int k);  // k is 1-based
    if (REVERSE) return N - k;
    else if (PAIRED) return (k + 1) / 2;
    else return k;
  endfunction

  for (genvar l = 0; l < N; l++) begin : g_lane
    localparam int DEPTH = lane_depth(l + 1);
    if (DEPTH == 0) begin : g_wire
      assign dout[l] = din[l];
      assign sout[l] = sin[l];
    end else begin : g_sr
      logic [EW:0] sr [DEPTH];
      always_ff @(posedge clk) begin
        sr[0] <= {sin[l], din[l]};
        for (int s = 1; s < DEPTH; s++) sr[s] <= sr[s-1];
      end
      assign {sout[l], dout[l]} = sr[DEPTH-1];
    end
  end

endmodule
