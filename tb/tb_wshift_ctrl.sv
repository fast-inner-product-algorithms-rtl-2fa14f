// tb_wshift_ctrl: models a weight column loaded one value every other cycle
// under the enable chain and checks that, with ctl_in dropped Y-1 cycles
// after the first value reaches the top row, every row ends up holding its
// own value (the first value at the bottom), as in the loading sequence of
// the localized-control figure; also checks the preload and the shift.
module tb_wshift_ctrl;
  localparam int Y = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, ctl_in = 0;
  logic [Y-1:0] en;
  wshift_ctrl #(.Y(Y)) dut (.*);
  int checks = 0, failures = 0;
  int col [Y];          // data registers, row 0 = top
  int src;
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int rep = 0; rep < 2; rep++) begin
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      checks++; if (en != '1) begin failures++; $display("preload %b", en); end
      for (int r = 0; r < Y; r++) col[r] = -1;
      // cycle T: first value (id 0) offered to the top row
      for (int c = 0; c < 3*Y; c++) begin
        src = (c % 2 == 0 && c/2 < Y) ? c/2 : -1;
        ctl_in = (c < Y-1);
        @(posedge clk);
        for (int r = Y-1; r >= 0; r--) if (en[r]) col[r] = (r == 0) ? src : col[r-1];
        #1;
      end
      for (int r = 0; r < Y; r++) begin
        checks++;
        if (col[r] != Y-1-r) begin failures++; $display("row %0d holds %0d", r, col[r]); end
      end
      checks++; if (en != '0) begin failures++; $display("not frozen %b", en); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (1000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
