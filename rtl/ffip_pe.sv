// ffip_pe: one Free-pipeline Fast Inner Product processing element.
//
// The PE sits at row j, column pair k of the matrix unit and does the work of
// two conventional MAC PEs with one multiplier. Its two g registers hold
//   g(j)_{2k-1} = g(j-1)_{2k-1} + y_{2k-1,j}
//   g(j)_{2k}   = g(j-1)_{2k}   + y_{2k,j}
// and serve twice: they are the pipeline registers in front of the multiplier
// and the systolic registers that hand g down to the PE below. The product of
// the two g registers is added to the partial sum arriving from the PE on the
// left and registered, so the longest path is one adder plus one multiplier.
//
// Interface and timing: g_in / bank_in come from the PE above (or from the
// input skew buffer for row 1) and are registered here (1 cycle); c_out is
// registered one cycle after the g registers it uses. Weights y are shifted
// down the column through ysh_in/ysh_out into bank load_bank whenever the
// local enable ysh_en is high. Each PE keeps two y banks: one is used by the
// data flowing through while the other is loaded (the paper suggests an extra
// weight tile buffer to hide loading; choosing the bank with a bit that travels
// with g is this design's own mechanism). Datapath widths are the paper's:
// g on w+d bits, y on w+1 bits, partial sums on 2w+clog2(X)+1 bits, all in
// wrapping two's complement. No reset: nothing here is read before valid data.
module ffip_pe #(
  parameter int W     = ffip_pkg::W_DEF,
  parameter int D     = ffip_pkg::D_DEF,
  parameter int ACC_W = ffip_pkg::acc_width(ffip_pkg::W_DEF, ffip_pkg::X_DEF)
) (
  input  logic                     clk,
  input  logic signed [W+D-1:0]    g_in_odd,   // g(j-1)_{i,2k-1}
  input  logic signed [W+D-1:0]    g_in_even,  // g(j-1)_{i,2k}
  input  logic                     bank_in,
  input  logic signed [ACC_W-1:0]  c_in,
  input  logic signed [W:0]        ysh_in_odd,
  input  logic signed [W:0]        ysh_in_even,
  input  logic                     ysh_en,
  input  logic                     load_bank,
  output logic signed [W+D-1:0]    g_out_odd,
  output logic signed [W+D-1:0]    g_out_even,
  output logic                     bank_out,
  output logic signed [ACC_W-1:0]  c_out,
  output logic signed [W:0]        ysh_out_odd,
  output logic signed [W:0]        ysh_out_even
);

  logic signed [W:0] y_odd  [2];
  logic signed [W:0] y_even [2];
  logic signed [2*(W+D)-1:0] prod;
  logic signed [W+D-1:0] y_odd_x, y_even_x;

  // Weight shift chain into the bank being loaded.
  always_ff @(posedge clk) begin
    if (ysh_en) begin
      y_odd[load_bank]  <= ysh_in_odd;
      y_even[load_bank] <= ysh_in_even;
    end
  end
  assign ysh_out_odd  = y_odd[load_bank];
  assign ysh_out_even = y_even[load_bank];

  // FFIP pre-adders: the sum is exact on w+d bits.
  assign y_odd_x  = (W+D)'(y_odd[bank_in]);
  assign y_even_x = (W+D)'(y_even[bank_in]);

  always_ff @(posedge clk) begin
    g_out_odd  <= g_in_odd  + y_odd_x;
    g_out_even <= g_in_even + y_even_x;
    bank_out   <= bank_in;
  end

  // One multiplier on the registered g values, then accumulate.
  assign prod = g_out_odd * g_out_even;

  always_ff @(posedge clk) begin
    c_out <= c_in + ACC_W'(prod);
  end

endmodule
