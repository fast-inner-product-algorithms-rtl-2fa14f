// ffip_accel: FFIP inference accelerator, top level.
//
// A TPU-like accelerator built around an FFIP systolic array. Layer inputs
// and outputs stay in the on-chip layer IO memory; weights stream in from an
// external DRAM. One layer, or any GEMM C = A*B, is run as a sequence of
// passes. A pass multiplies M activation rows (one X-element word each) by
// one X x Y weight tile; K passes are accumulated in the GEMM unit, then each
// finished row goes through bias, re-scaling and activation and is written
// back to the layer IO memory as the next layer's input.
//
// Blocks: layer IO tiler (mem_tiler) -> layer IO memory -> GEMM unit (FFIP
// MXU, deskew, accumulator) -> post-GEMM -> layer IO memory. The weight tiler
// (a second mem_tiler) issues DRAM reads; the returned columns wait in a
// weight FIFO until a whole tile is there and are then loaded into the idle
// weight bank of the MXU, one column every other cycle, while the other bank
// keeps computing. A pass whose weights are not loaded yet stalls.
//
// Pass order: k (fastest), then h_t, then n_t, matching the tiler digits.
// The two tilers must be configured to walk the same passes: the layer IO
// tiler M*K*H_t*N_t steps, the weight tiler Y*K*H_t*N_t steps (weight columns
// stored in DRAM in load order, column Y first). Results of pass group
// (n_t, h_t) go to out_base + (n_t*H_t + h_t)*M + m.
//
// Interfaces: the host write ports stand in for the PCIe DMA unit and the
// configuration ports for the instruction unit, neither of which is described
// in enough detail to build. DRAM is a request/response port (one X-element
// word per response, in order). One clock domain; the paper runs several of
// these units on their own clocks. Requires X == Y so a result row fits one
// memory word. The sequencer and the ports are this design's own.
//
// Lint note: only the output address of the post-GEMM tag is used here (the
// other tag fields were consumed upstream), so its upper bits read as unused.
// rst_n is also sampled by the two assertions at the end (disable iff), which
// lint reports as a reset used both asynchronously and synchronously; the
// logic itself only uses it as an asynchronous reset.
module ffip_accel
  import ffip_pkg::*;
#(
  parameter int X         = X_DEF,
  parameter int Y         = Y_DEF,
  parameter int W         = W_DEF,
  parameter int IO_DEPTH  = 65536,
  parameter int WAW       = 24,                   // DRAM word address width
  parameter int ACC_DEPTH = ACC_DEPTH_DEF,
  parameter int OUT_W     = 32
) (
  input  logic                            clk,
  input  logic                            rst_n,
  // host side
  input  logic                            host_we,
  input  logic [TILER_AW-1:0]             host_waddr,
  input  logic [X-1:0][W-1:0]             host_wdata,
  input  logic                            host_bias_we,
  input  logic [NT_W-1:0]                 host_bias_waddr,
  input  logic [Y-1:0][OUT_W-1:0]         host_bias_wdata,
  // layer configuration
  input  logic                            start,
  input  tiler_cfg_t                      io_cfg,
  input  logic [WAW-1:0]                  wt_base,
  input  logic [TILER_DIGITS-1:0][TILER_CW-1:0] wt_size,
  input  logic [TILER_DIGITS-1:0][WAW-1:0] wt_stride,
  input  logic [ROW_W:0]                  m_len,       // rows per pass, 1..ACC_DEPTH
  input  logic [TILER_CW-1:0]             k_passes,
  input  logic [TILER_CW-1:0]             h_tiles,
  input  logic [NT_W:0]                   n_tiles,
  input  logic [TILER_AW-1:0]             out_base,
  input  logic signed [W-1:0]             zero_point,
  input  logic signed [15:0]              scale_m,
  input  logic [5:0]                      scale_sh,
  input  logic                            relu_en,
  output logic                            busy,
  output logic                            done,
  // weight DRAM
  output logic                            dram_req_valid,
  output logic [WAW-1:0]                  dram_req_addr,
  input  logic                            dram_req_ready,
  input  logic                            dram_rsp_valid,
  input  logic [X-1:0][W-1:0]             dram_rsp_data,
  // activity counters
  output logic [31:0]                     stall_cycles,
  output logic [31:0]                     overlap_cycles
);

  if (X != Y) begin : g_check
    $error("ffip_accel needs X == Y");
  end

  localparam int AW      = $clog2(IO_DEPTH);
  localparam int FDEPTH  = 2 * Y;
  localparam int FCW     = $clog2(FDEPTH + 1);
  localparam int DRAIN   = X/2 + Y + 4;

  // ---------------------------------------------------------------- run state
  logic running;
  logic [31:0] total_rows, rows_done;

  // ---------------------------------------------------------------- weight fetch
  logic wt_valid, wt_last_unused;
  logic [WAW-1:0] wt_addr;
  logic [FCW-1:0] f_count, outstanding;
  logic f_push, f_pop;
  logic [X*W-1:0] fifo [FDEPTH];
  logic [$clog2(FDEPTH)-1:0] f_wp, f_rp;

  mem_tiler #(.DIGITS(TILER_DIGITS), .AW(WAW), .CW(TILER_CW)) u_wt_tiler (
    .clk(clk), .rst_n(rst_n), .start(start && !running), .base(wt_base), .size(wt_size),
    .stride(wt_stride), .step(dram_req_valid && dram_req_ready), .valid(wt_valid),
    .last(wt_last_unused), .addr(wt_addr));

  assign dram_req_valid = running && wt_valid && ((f_count + outstanding) < FCW'(FDEPTH));
  assign dram_req_addr  = wt_addr;
  assign f_push = dram_rsp_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      f_count <= '0; outstanding <= '0; f_wp <= '0; f_rp <= '0;
    end else begin
      outstanding <= outstanding + FCW'(dram_req_valid && dram_req_ready) - FCW'(f_push);
      f_count     <= f_count + FCW'(f_push) - FCW'(f_pop);
      if (f_push) f_wp <= (f_wp == $bits(f_wp)'(FDEPTH-1)) ? '0 : f_wp + 1'b1;
      if (f_pop)  f_rp <= (f_rp == $bits(f_rp)'(FDEPTH-1)) ? '0 : f_rp + 1'b1;
    end
  end
  always_ff @(posedge clk) if (f_push) fifo[f_wp] <= dram_rsp_data;

  // ---------------------------------------------------------------- bank states
  typedef enum logic [2:0] {B_FREE, B_LOADING, B_READY, B_STREAM, B_DRAIN} bank_e;
  bank_e bstate [2];
  logic [$clog2(DRAIN+1)-1:0] bdrain [2];
  logic [31:0] total_passes;

  // ---------------------------------------------------------------- weight loader
  logic [31:0] lq;
  logic l_run, l_phase, wl_start, wl_busy, wl_done;
  logic [$clog2(Y+1)-1:0] l_col;
  logic b_valid, b_first, b_last;
  logic l_go;

  assign l_go  = running && !l_run && (lq < total_passes) && (f_count >= FCW'(Y)) &&
                 (bstate[lq[0]] == B_FREE) && !wl_busy;
  assign wl_start = l_go;
  assign f_pop    = l_run && l_phase && (l_col < $bits(l_col)'(Y));
  assign b_valid  = f_pop;
  assign b_first  = f_pop && (l_col == '0);
  assign b_last   = f_pop && (l_col == $bits(l_col)'(Y-1));

  // ---------------------------------------------------------------- streamer
  logic [31:0] sq;
  logic s_run;
  logic [ROW_W:0] s_m;
  logic [TILER_CW-1:0] s_kp, s_ht;
  logic [NT_W:0] s_nt;
  logic [TILER_AW-1:0] s_obase;
  logic io_valid, io_last_unused;
  logic [TILER_AW-1:0] io_addr;
  logic s_fire;
  gemm_tag_t s_tag, a_tag;
  logic a_valid, a_bank, s_bank;
  logic [X-1:0][W-1:0] a_data;

  assign s_bank = sq[0];
  assign s_fire = s_run;

  mem_tiler #(.DIGITS(TILER_DIGITS), .AW(TILER_AW), .CW(TILER_CW)) u_io_tiler (
    .clk(clk), .rst_n(rst_n), .start(start && !running), .base(io_cfg.base), .size(io_cfg.size),
    .stride(io_cfg.stride), .step(s_fire), .valid(io_valid), .last(io_last_unused), .addr(io_addr));

  always_comb begin
    s_tag.row   = ROW_W'(s_m);
    s_tag.first = (s_kp == '0);
    s_tag.last  = (s_kp == k_passes - 1'b1);
    s_tag.nt    = NT_W'(s_nt);
    s_tag.oaddr = s_obase + TILER_AW'(s_m);
  end

  // ---------------------------------------------------------------- memory
  logic mem_we;
  logic [AW-1:0] mem_waddr;
  logic [X-1:0][W-1:0] mem_wdata;
  logic pg_valid;
  logic signed [Y-1:0][W-1:0] pg_out;
  gemm_tag_t pg_tag;

  assign mem_we    = pg_valid || host_we;
  assign mem_waddr = pg_valid ? AW'(pg_tag.oaddr) : AW'(host_waddr);
  assign mem_wdata = pg_valid ? pg_out : host_wdata;

  layer_io_mem #(.X(X), .W(W), .DEPTH(IO_DEPTH)) u_mem (
    .clk(clk), .re(s_fire), .raddr(AW'(io_addr)), .rdata(a_data),
    .we(mem_we), .waddr(mem_waddr), .wdata(mem_wdata));

  // ---------------------------------------------------------------- GEMM + post
  logic res_valid;
  logic signed [Y-1:0][OUT_W-1:0] res;
  gemm_tag_t res_tag;

  gemm_unit #(.X(X), .Y(Y), .W(W), .ACC_DEPTH(ACC_DEPTH), .OUT_W(OUT_W)) u_gemm (
    .clk(clk), .rst_n(rst_n), .a_valid(a_valid), .a_bank(a_bank), .a(a_data), .a_tag(a_tag),
    .r(zero_point), .wl_start(wl_start), .wl_bank(lq[0]), .b_valid(b_valid), .b_first(b_first),
    .b_last(b_last), .b(fifo[f_rp]), .wl_busy(wl_busy), .wl_done(wl_done),
    .res_valid(res_valid), .res(res), .res_tag(res_tag));

  post_gemm #(.Y(Y), .W(W), .IN_W(OUT_W)) u_post (
    .clk(clk), .rst_n(rst_n), .bias_we(host_bias_we), .bias_waddr(host_bias_waddr),
    .bias_wdata(host_bias_wdata), .scale_m(scale_m), .scale_sh(scale_sh), .relu_en(relu_en),
    .in_valid(res_valid), .in(res), .in_tag(res_tag),
    .out_valid(pg_valid), .out(pg_out), .out_tag(pg_tag));

  // ---------------------------------------------------------------- control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0; done <= 1'b0; total_rows <= '0; rows_done <= '0; total_passes <= '0;
      lq <= '0; l_run <= 1'b0; l_phase <= 1'b0; l_col <= '0;
      sq <= '0; s_run <= 1'b0; s_m <= '0; s_kp <= '0; s_ht <= '0; s_nt <= '0; s_obase <= '0;
      a_valid <= 1'b0; a_bank <= 1'b0; a_tag <= '0;
      bstate[0] <= B_FREE; bstate[1] <= B_FREE; bdrain[0] <= '0; bdrain[1] <= '0;
      stall_cycles <= '0; overlap_cycles <= '0;
    end else begin
      // start of a layer
      if (start && !running) begin
        running      <= 1'b1;
        done         <= 1'b0;
        total_passes <= 32'(k_passes) * 32'(h_tiles) * 32'(n_tiles);
        total_rows   <= 32'(m_len) * 32'(h_tiles) * 32'(n_tiles);
        rows_done    <= '0;
        lq <= '0; sq <= '0; s_m <= '0; s_kp <= '0; s_ht <= '0; s_nt <= '0;
        s_obase <= out_base;
      end

      // weight loader
      if (l_go) begin
        l_run <= 1'b1; l_phase <= 1'b1; l_col <= '0;
        bstate[lq[0]] <= B_LOADING;
      end else if (l_run) begin
        l_phase <= !l_phase;
        if (f_pop) l_col <= l_col + 1'b1;
        if (wl_done) begin
          l_run <= 1'b0;
          bstate[lq[0]] <= B_READY;
          lq <= lq + 1;
        end
      end

      // streamer
      a_valid <= s_fire;
      a_bank  <= s_bank;
      a_tag   <= s_tag;
      if (running && !s_run && sq < total_passes) begin
        if (bstate[s_bank] == B_READY) begin
          s_run <= 1'b1;
          bstate[s_bank] <= B_STREAM;
        end else begin
          stall_cycles <= stall_cycles + 1;
        end
      end
      if (s_fire) begin
        if (s_m == m_len - 1'b1) begin
          s_run <= 1'b0;
          s_m   <= '0;
          bstate[s_bank] <= B_DRAIN;
          bdrain[s_bank] <= $bits(bdrain[0])'(DRAIN);
          sq <= sq + 1;
          if (s_kp == k_passes - 1'b1) begin
            s_kp    <= '0;
            s_obase <= s_obase + TILER_AW'(m_len);
            if (s_ht == h_tiles - 1'b1) begin
              s_ht <= '0;
              s_nt <= s_nt + 1'b1;
            end else begin
              s_ht <= s_ht + 1'b1;
            end
          end else begin
            s_kp <= s_kp + 1'b1;
          end
        end else begin
          s_m <= s_m + 1'b1;
        end
      end

      // drained banks become free
      for (int bk = 0; bk < 2; bk++) begin
        if (bstate[bk] == B_DRAIN && !(s_fire && s_m == m_len - 1'b1 && s_bank == bk[0])) begin
          if (bdrain[bk] == '0) bstate[bk] <= B_FREE;
          else                  bdrain[bk] <= bdrain[bk] - 1'b1;
        end
      end

      if (wl_busy && a_valid) overlap_cycles <= overlap_cycles + 1;

      // results written back
      if (pg_valid) begin
        rows_done <= rows_done + 1;
        if (rows_done + 1 == total_rows) begin
          running <= 1'b0;
          done    <= 1'b1;
        end
      end
    end
  end

  assign busy = running;

  // The host must not write the layer IO memory while results are written.
  a_no_write_clash: assert property (@(posedge clk) disable iff (!rst_n) !(pg_valid && host_we));
  // the layer IO tiler must be configured for at least the rows streamed
  a_io_walk: assert property (@(posedge clk) disable iff (!rst_n) s_fire |-> io_valid);

endmodule
