// mem_tiler: multi-digit address counter ("tiler") for the memory unit.
//
// Seven digits, least significant first: w, h, cin_t, kw, kh, h_t, n_t. Each
// digit has a programmable size (number of positions) and stride (address
// step). A step advances digit 0; a digit that passes its last position wraps
// to zero and carries into the next, like an odometer, and every digit keeps
// its own running offset (index times stride). The address is the base plus
// the sum of all seven offsets, which is the loop nest
//   for n_t, h_t, kh, kw, cin_t, h, w:  address = (h_t+h+w) + (kh+kw+cin_t)
// that reads a convolution layer's input directly in GEMM order (K from
// kh,kw,cin_t; M from h_t,h,w) with no separate im2col copy. The n_t digit is
// added into the address too; a stride of 0 on it repeats the input for every
// weight column tile. The same counter generates weight addresses.
// Interface: start loads cfg and clears the digits; while valid is high, addr
// is the current address (combinational from registers) and step moves on.
// last is high at the final position; stepping there drops valid.
// The base address and the valid/last handshake are this design's own.
module mem_tiler
  import ffip_pkg::*;
#(
  parameter int DIGITS = TILER_DIGITS,
  parameter int AW     = TILER_AW,
  parameter int CW     = TILER_CW
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic [AW-1:0]                 base,
  input  logic [DIGITS-1:0][CW-1:0]     size,
  input  logic [DIGITS-1:0][AW-1:0]     stride,
  input  logic                          step,
  output logic                          valid,
  output logic                          last,
  output logic [AW-1:0]                 addr
);

  logic [DIGITS-1:0][CW-1:0] idx;
  logic [DIGITS-1:0][AW-1:0] off;
  logic [DIGITS-1:0][CW-1:0] size_q;
  logic [DIGITS-1:0][AW-1:0] stride_q;
  logic [AW-1:0]             base_q;
  logic [DIGITS:0]           carry;
  logic [DIGITS-1:0]         at_end;

  assign carry[0] = 1'b1;
  for (genvar d = 0; d < DIGITS; d++) begin : g_digit
    assign at_end[d]  = (idx[d] == size_q[d] - 1'b1) || (size_q[d] == '0);
    assign carry[d+1] = carry[d] && at_end[d];
  end
  assign last = valid && (&at_end);

  always_comb begin
    addr = base_q;
    for (int d = 0; d < DIGITS; d++) addr = addr + off[d];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= 1'b0;
      idx   <= '0;
      off   <= '0;
      size_q <= '0;
      stride_q <= '0;
      base_q <= '0;
    end else if (start) begin
      valid    <= 1'b1;
      idx      <= '0;
      off      <= '0;
      size_q   <= size;
      stride_q <= stride;
      base_q   <= base;
    end else if (step && valid) begin
      if (last) valid <= 1'b0;
      for (int d = 0; d < DIGITS; d++) begin
        if (carry[d]) begin
          if (at_end[d]) begin
            idx[d] <= '0;
            off[d] <= '0;
          end else begin
            idx[d] <= idx[d] + 1'b1;
            off[d] <= off[d] + stride_q[d];
          end
        end
      end
    end
  end

endmodule
