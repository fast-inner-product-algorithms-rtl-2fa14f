// wshift_ctrl: local enable chain for loading one PE column with weights.
//
// A plain weight shift register would need one enable wire fanned out to
// every row to freeze the column once it is full. Here the enables are a
// shift register of their own, one bit next to each weight register: start
// preloads every bit with 1, and afterwards the bit entering at the bottom
// (ctl_in) moves up one row per cycle. With weights entering the top every
// other cycle, the first 0 reaches each row just after its weight arrives, so
// each row freezes on its own value with only neighbour-to-neighbour wiring.
// en[0] is the top row. Timing: if the first weight reaches the top row at
// cycle T, ctl_in must be 1 up to cycle T+Y-2 and 0 from T+Y-1; the column
// is frozen from cycle T+2Y-1. The mechanism is the paper's; the exact
// control timing is derived here.
module wshift_ctrl #(
  parameter int Y = ffip_pkg::Y_DEF
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic         ctl_in,
  output logic [Y-1:0] en
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     en <= '0;
    else if (start) en <= '1;
    else            en <= {ctl_in, en[Y-1:1]};
  end

endmodule
