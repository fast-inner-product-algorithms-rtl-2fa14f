// weight_dram_model: behavioural stand-in for the external weight DRAM and
// its controller. Accepts a read request when req_ready is high (ready is
// dropped at random), and returns the word in order after a random latency
// of 3 to 8 cycles. The word itself is supplied by the testbench through
// mem_rd_data, sampled when the request is accepted.
module weight_dram_model #(
  parameter int DW = 64,
  parameter int AW = 24
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          req_valid,
  input  logic [AW-1:0] req_addr,
  output logic          req_ready,
  output logic          rsp_valid,
  output logic [DW-1:0] rsp_data,
  input  logic [DW-1:0] mem_rd_data
);
  logic [DW-1:0] q_data [$];
  longint        q_due  [$];
  longint        now = 0;

  always @(posedge clk) begin
    now <= now + 1;
    rsp_valid <= 1'b0;
    if (rst_n && req_valid && req_ready) begin
      q_data.push_back(mem_rd_data);
      q_due.push_back(now + longint'($urandom_range(3, 8)));
    end
    if (q_due.size() > 0 && q_due[0] <= now) begin
      void'(q_due.pop_front());
      rsp_data  <= q_data.pop_front();
      rsp_valid <= 1'b1;
    end
    req_ready <= ($urandom_range(0, 3) != 0);
  end

  initial begin req_ready = 1'b0; rsp_valid = 1'b0; rsp_data = '0; end

  logic unused;
  assign unused = ^req_addr;
endmodule
