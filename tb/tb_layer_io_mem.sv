// tb_layer_io_mem: random writes and reads against an associative-array model;
// checks the one-cycle registered read, that rdata holds when re is low, and
// that a write takes effect for reads issued in later cycles.
module tb_layer_io_mem;
  localparam int X = 4, W = 8, DEPTH = 256, AW = 8;
  logic clk = 0;
  always #5 clk = ~clk;
  logic re = 0, we = 0;
  logic [AW-1:0] raddr = '0, waddr = '0;
  logic [X-1:0][W-1:0] rdata, wdata = '0;
  layer_io_mem #(.X(X), .W(W), .DEPTH(DEPTH), .AW(AW)) dut (.*);
  int checks = 0, failures = 0;
  logic [X*W-1:0] model [DEPTH];
  initial begin
    // fill the memory first so every read is of written data
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); we = 1; waddr = AW'(i); wdata = (X*W)'($urandom()); model[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 2000; n++) begin
      logic [X*W-1:0] e, held;
      held = rdata;
      re = ($urandom_range(0, 2) != 0); raddr = AW'($urandom());
      we = ($urandom_range(0, 1) != 0); waddr = AW'($urandom()); wdata = (X*W)'($urandom());
      if (we && waddr == raddr) we = 0;   // same-cycle read/write of one word is not used
      e = re ? model[raddr] : held;
      if (we) model[waddr] = wdata;
      @(negedge clk);
      checks++;
      if (rdata != e) begin failures++; $display("read %0h exp %0h", rdata, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
