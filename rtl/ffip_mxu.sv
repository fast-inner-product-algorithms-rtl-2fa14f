// ffip_mxu: FFIP matrix multiplication unit (systolic array).
//
// Multiplies a stream of row vectors a_i (X elements of w bits) by a
// stationary X x Y weight tile B and produces, per output column j,
//   c'_{i,j} = sum_k a_{i,k} b_{k,j} + beta_j - r * sum_k a_{i,k}
// with half the multipliers of a conventional array: X/2 columns of FFIP PEs
// by Y rows, plus one alpha row. beta_j is left in on purpose; it depends only
// on the weights and is folded into the bias after training.
//
// Data flow (top to bottom): the a vector enters a triangular skew buffer
// (pair p delayed p cycles), passes the zero-point adjuster row and the alpha
// row, then enters PE row 1 with each pair swapped (g_{2k-1} starts from
// a_{2k}). Every PE row adds its y values to g and passes g down; partial sums
// run right along each row. alpha_i + r*sum(a_i) is registered once (the "p"
// stage) and then walks down a register chain beside the rows; each row
// subtracts it from its finished sum.
// Timing: a_i presented at cycle t appears on c[j] (j = 0..Y-1) at cycle
// t + X/2 + j + 3, marked by c_valid[j]. A new a_i may enter every cycle.
//
// Weight loading: after wl_start (with the bank to fill in wl_bank) the Y
// weight columns of the next tile are given on b, one every other cycle, in
// the order j = Y..1 (b_first on the first, b_last on the last). The y
// generator turns them into y differences and the columns are shifted down
// every PE column under the local enable chains (wshift_ctrl). The other bank
// keeps serving the a vectors meanwhile; each a vector names its bank in
// a_bank. wl_busy is high from wl_start until the column is frozen.
// The caller must not name a bank in a_bank that is being loaded, nor reload
// a bank while a vector using it is still inside the array (X/2+Y+3 cycles).
//
// Lint note: the bank bit goes through the same skew buffer as the data, one
// copy per lane; only the copy of the first lane of each pair is used (both
// lanes of a pair have the same delay), so the other copies read as unused.
module ffip_mxu #(
  parameter int X     = ffip_pkg::X_DEF,
  parameter int Y     = ffip_pkg::Y_DEF,
  parameter int W     = ffip_pkg::W_DEF,
  parameter int D     = ffip_pkg::D_DEF,
  parameter int ACC_W = ffip_pkg::acc_width(W, X)
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // activations
  input  logic                           a_valid,
  input  logic                           a_bank,
  input  logic signed [X-1:0][W-1:0]     a,
  input  logic signed [W-1:0]            r,
  // weight loading
  input  logic                           wl_start,
  input  logic                           wl_bank,
  input  logic                           b_valid,
  input  logic                           b_first,
  input  logic                           b_last,
  input  logic signed [X-1:0][W-1:0]     b,
  output logic                           wl_busy,
  output logic                           wl_done,
  // outputs, row j skewed by j cycles
  output logic [Y-1:0]                   c_valid,
  output logic signed [Y-1:0][ACC_W-1:0] c
);

  localparam int P   = X / 2;
  localparam int LAT = P + 3;  // latency of row 0

  // ---------------- input skew buffer -------------------------------------
  logic signed [X-1:0][W-1:0] a_sk;
  logic [X-1:0] bank_sk;
  tri_buffer #(.N(X), .EW(W), .PAIRED(1'b1), .REVERSE(1'b0)) u_abuf (
    .clk(clk), .din(a), .sin({X{a_bank}}), .dout(a_sk), .sout(bank_sk));

  // ---------------- zero-point adjuster and alpha row ----------------------
  logic signed [ACC_W-1:0] ar, alpha;
  zp_adjuster #(.X(X), .W(W), .ACC_W(ACC_W)) u_zp (.clk(clk), .a_sk(a_sk), .r(r), .ar(ar));
  alpha_generator #(.X(X), .W(W), .ACC_W(ACC_W)) u_alpha (.clk(clk), .a_sk(a_sk), .alpha(alpha));

  // alpha + ar, then the p register and one register per row
  logic signed [ACC_W-1:0] sub_chain [Y];
  always_ff @(posedge clk) begin
    sub_chain[0] <= alpha + ar;
    for (int j = 1; j < Y; j++) sub_chain[j] <= sub_chain[j-1];
  end

  // ---------------- weight loading ----------------------------------------
  logic signed [X-1:0][W:0] y_col;
  logic y_valid;
  y_generator #(.X(X), .W(W)) u_ygen (
    .clk(clk), .rst_n(rst_n), .b_valid(b_valid), .b_first(b_first), .b_last(b_last),
    .b(b), .y_valid(y_valid), .y(y_col));

  typedef enum logic [1:0] {WL_IDLE, WL_ARMED, WL_LOAD} wl_state_e;
  wl_state_e wl_state;
  logic [$clog2(2*Y+1)-1:0] wl_cnt;
  logic load_bank, ctl_in;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wl_state  <= WL_IDLE;
      wl_cnt    <= '0;
      load_bank <= 1'b0;
      wl_done   <= 1'b0;
    end else begin
      wl_done <= 1'b0;
      unique case (wl_state)
        WL_IDLE:  if (wl_start) begin
                    wl_state  <= WL_ARMED;
                    load_bank <= wl_bank;
                  end
        WL_ARMED: if (y_valid) begin
                    wl_state <= WL_LOAD;
                    wl_cnt   <= 1;
                  end
        WL_LOAD:  begin
                    wl_cnt <= wl_cnt + 1'b1;
                    if (wl_cnt == $bits(wl_cnt)'(2*Y-2)) begin
                      wl_state <= WL_IDLE;
                      wl_done  <= 1'b1;
                    end
                  end
        default:  wl_state <= WL_IDLE;
      endcase
    end
  end

  assign wl_busy = (wl_state != WL_IDLE);
  assign ctl_in  = (wl_state == WL_ARMED) ||
                   (wl_state == WL_LOAD && wl_cnt < $bits(wl_cnt)'(Y-1));

  // ---------------- PE array ----------------------------------------------
  logic signed [W+D-1:0]   g_odd  [Y+1][P];
  logic signed [W+D-1:0]   g_even [Y+1][P];
  logic                    gbank  [Y+1][P];
  logic signed [W:0]       ys_odd [Y+1][P];
  logic signed [W:0]       ys_even[Y+1][P];
  logic signed [ACC_W-1:0] csum   [Y][P+1];

  for (genvar p = 0; p < P; p++) begin : g_col
    logic [Y-1:0] en;
    wshift_ctrl #(.Y(Y)) u_ctl (.clk(clk), .rst_n(rst_n), .start(wl_start && wl_state == WL_IDLE),
                                .ctl_in(ctl_in), .en(en));
    // row-0 inputs: pair swapped as in g(1)_{2k-1} = a_{2k} + y_{2k-1,1}
    assign g_odd[0][p]   = (W+D)'(signed'(a_sk[2*p+1]));
    assign g_even[0][p]  = (W+D)'(signed'(a_sk[2*p]));
    assign gbank[0][p]   = bank_sk[2*p];
    assign ys_odd[0][p]  = y_col[2*p];
    assign ys_even[0][p] = y_col[2*p+1];

    for (genvar j = 0; j < Y; j++) begin : g_row
      ffip_pe #(.W(W), .D(D), .ACC_W(ACC_W)) u_pe (
        .clk(clk),
        .g_in_odd(g_odd[j][p]), .g_in_even(g_even[j][p]), .bank_in(gbank[j][p]),
        .c_in(csum[j][p]),
        .ysh_in_odd(ys_odd[j][p]), .ysh_in_even(ys_even[j][p]),
        .ysh_en(en[j]), .load_bank(load_bank),
        .g_out_odd(g_odd[j+1][p]), .g_out_even(g_even[j+1][p]), .bank_out(gbank[j+1][p]),
        .c_out(csum[j][p+1]),
        .ysh_out_odd(ys_odd[j+1][p]), .ysh_out_even(ys_even[j+1][p]));
    end
  end

  // ---------------- row outputs -------------------------------------------
  logic [LAT+Y-1:0] vpipe;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vpipe <= '0;
    else        vpipe <= {vpipe[LAT+Y-2:0], a_valid};
  end

  for (genvar j = 0; j < Y; j++) begin : g_out
    assign csum[j][0] = '0;
    always_ff @(posedge clk) c[j] <= csum[j][P] - sub_chain[j];
    assign c_valid[j] = vpipe[LAT+j-1];
  end

endmodule
