// y_generator: forms the FFIP weight differences y_{k,j} = b_{k,j} - b_{k,j-1}
// (and y_{k,1} = b_{k,1}) while a weight tile is being loaded.
//
// FFIP lets each PE add only the change of weight from the PE row above, so
// the matrix unit is loaded with y instead of b. y needs w+1 bits.
// The weight columns of one tile arrive one every other cycle in the order
// j = Y, Y-1, ..., 1: the load chain of the matrix unit pushes the first
// column to the bottom PE row. b_first marks column Y, b_last column 1.
// Column j is held until column j-1 arrives; then y_j = b_j - b_{j-1} is
// registered (y_valid one cycle after that b_valid). y_1 = b_1 follows two
// cycles after y_2, so the output keeps the every-other-cycle spacing and a
// tile of Y columns gives Y outputs. The reversed column order and this
// timing are this design's choices; the subtraction is the paper's.
module y_generator #(
  parameter int X = ffip_pkg::X_DEF,
  parameter int W = ffip_pkg::W_DEF
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          b_valid,
  input  logic                          b_first,
  input  logic                          b_last,
  input  logic signed [X-1:0][W-1:0]    b,
  output logic                          y_valid,
  output logic signed [X-1:0][W:0]      y
);

  logic signed [X-1:0][W-1:0] prev;
  logic [1:0] tail;  // counts down to the extra y_1 output

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y_valid <= 1'b0;
      tail    <= 2'd0;
    end else begin
      y_valid <= 1'b0;
      if (b_valid) begin
        if (!b_first) y_valid <= 1'b1;
        tail <= b_last ? 2'd2 : 2'd0;
      end else if (tail != 2'd0) begin
        tail <= tail - 2'd1;
        if (tail == 2'd1) y_valid <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (b_valid) begin
      prev <= b;
      for (int k = 0; k < X; k++)
        y[k] <= (W+1)'(signed'(prev[k])) - (W+1)'(signed'(b[k]));
    end else if (tail == 2'd1) begin
      for (int k = 0; k < X; k++)
        y[k] <= (W+1)'(signed'(prev[k]));
    end
  end

endmodule
