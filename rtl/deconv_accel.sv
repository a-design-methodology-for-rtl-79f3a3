// deconv_accel -- FPGA deconvolution accelerator (top level).
//
// The accelerator computes one deconvolution (transposed convolution) layer
// tile by tile. A tile job produces, or adds to, a T_OC x T_OH x T_OW block
// of output feature maps from T_IC input channels:
//   1. LOAD_W  the kernels kernel[o_c][i_c][k_h][k_w] of the tile arrive on
//              the input stream, o_c outermost, then i_c, k_h, k_w. Only the
//              active output and input channels are sent; weights of
//              inactive input channels are written as zero.
//   2. LOAD_IN the input window the output tile depends on arrives on the
//              same stream, i_c outermost, then rows, then columns. Its size
//              is (rows + d_max - d_min) x (cols + d_max - d_min), where
//              d(k) = (f(k) + P - k)/S, d_max = d(0), d_min = d(K-1); its
//              first row is input row o_h0/S + d_min for an output tile that
//              starts at row o_h0 (a multiple of S). Rows or columns that lie
//              outside the input map must be sent as zeros.
//   3. COMPUTE the address generator walks Algorithm 2 (reverse looping with
//              stride hole skipping) and the processing engine accumulates
//              into the output buffer.
//   4. STORE   (only if LAST was set) the output tile, rows*S x cols*S words
//              per active output channel, o_c outermost, leaves on the
//              output stream, rounded to 12 bits with saturation; TLAST marks
//              the final word.
// Convolution layers (GEOM.CONV = 1) use the same job sequence: the window
// then starts at input row S*o_h0 - P and is S*(rows-1) + K rows tall, and
// the output tile is rows x cols words per channel.
// A job started with FIRST discards the partial sums of the previous tile;
// without it the job adds to them, which is how the input channels of a layer
// are covered T_IC at a time while the output tile stays on chip.
//
// The stream ports stand for the DMA engine's memory-map-to-stream channels
// of the system; the AXI4-Lite port carries control and metadata
// (axil_ctrl_regs), and irq signals the end of each job to the host.
// Stream words carry one 12-bit sample sign-extended to 16 bits.
//
// Defaults T_OC = 13, T_IC = 16 (208 multipliers of the 220 DSP slices of the
// paper's device), T_OH = T_OW = 16 and K_MAX = 5 are this design's choice
// of tile size; the paper reports neither its tile sizes nor its register
// map, and the stream formats and job protocol above are this design's own.
module deconv_accel
  import dcnn_pkg::*;
#(
  parameter int unsigned T_OH  = 16,
  parameter int unsigned T_OW  = 16,
  parameter int unsigned T_OC  = 13,
  parameter int unsigned T_IC  = 16,
  parameter int unsigned K_MAX = 5,
  parameter int unsigned IN_H  = (T_OH + K_MAX + 1) / 2,
  parameter int unsigned IN_W  = (T_OW + K_MAX + 1) / 2,
  localparam int unsigned LAT  = 1 + ((T_IC > 1) ? $clog2(T_IC) : 0),
  localparam int unsigned IAW  = $clog2(IN_H * IN_W),
  localparam int unsigned WAW  = $clog2(K_MAX * K_MAX),
  localparam int unsigned OAW  = $clog2(T_OH * T_OW),
  localparam int unsigned OCW  = (T_OC > 1) ? $clog2(T_OC) : 1,
  localparam int unsigned ICW  = (T_IC > 1) ? $clog2(T_IC) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // AXI4-Lite control
  input  logic [5:0]        s_axil_awaddr,
  input  logic              s_axil_awvalid,
  output logic              s_axil_awready,
  input  logic [31:0]       s_axil_wdata,
  input  logic [3:0]        s_axil_wstrb,
  input  logic              s_axil_wvalid,
  output logic              s_axil_wready,
  output logic [1:0]        s_axil_bresp,
  output logic              s_axil_bvalid,
  input  logic              s_axil_bready,
  input  logic [5:0]        s_axil_araddr,
  input  logic              s_axil_arvalid,
  output logic              s_axil_arready,
  output logic [31:0]       s_axil_rdata,
  output logic [1:0]        s_axil_rresp,
  output logic              s_axil_rvalid,
  input  logic              s_axil_rready,
  // AXI4-Stream in (weights, then input window)
  input  logic [AXIS_W-1:0] s_axis_tdata,
  input  logic              s_axis_tvalid,
  output logic              s_axis_tready,
  // AXI4-Stream out (output tile)
  output logic [AXIS_W-1:0] m_axis_tdata,
  output logic              m_axis_tvalid,
  input  logic              m_axis_tready,
  output logic              m_axis_tlast,
  // interrupt to the host
  output logic              irq
);

  // ---------------------------------------------------------------- control
  logic       start, first, last, acc_busy, acc_done;
  layer_cfg_t cfg;

  axil_ctrl_regs #(.ADDR_W(6)) u_regs (
    .clk, .rst_n,
    .s_awaddr (s_axil_awaddr),  .s_awvalid(s_axil_awvalid), .s_awready(s_axil_awready),
    .s_wdata  (s_axil_wdata),   .s_wstrb  (s_axil_wstrb),   .s_wvalid (s_axil_wvalid),
    .s_wready (s_axil_wready),  .s_bresp  (s_axil_bresp),   .s_bvalid (s_axil_bvalid),
    .s_bready (s_axil_bready),  .s_araddr (s_axil_araddr),  .s_arvalid(s_axil_arvalid),
    .s_arready(s_axil_arready), .s_rdata  (s_axil_rdata),   .s_rresp  (s_axil_rresp),
    .s_rvalid (s_axil_rvalid),  .s_rready (s_axil_rready),
    .start, .first, .last, .cfg, .acc_busy, .acc_done, .irq
  );

  typedef enum logic [2:0] {
    S_IDLE, S_LOAD_W, S_LOAD_IN, S_COMPUTE, S_STORE_RD, S_STORE_SEND, S_FINISH
  } state_t;
  state_t state;

  logic [7:0] c_oc, c_ic, c_r, c_c;
  logic [3:0] c_kh, c_kw;
  logic       last_q;

  // window size of the input buffer for this job
  logic signed [7:0] d_max, d_min;
  logic [7:0]        win_h, win_w;
  always_comb begin
    d_max = in_offset(4'd0, cfg.s, cfg.p);
    d_min = in_offset(cfg.k - 4'd1, cfg.s, cfg.p);
    if (cfg.conv) begin
      win_h = 8'((cfg.rows - 8'd1) * cfg.s) + 8'(cfg.k);
      win_w = 8'((cfg.cols - 8'd1) * cfg.s) + 8'(cfg.k);
    end else begin
      win_h = cfg.rows + 8'(d_max - d_min);
      win_w = cfg.cols + 8'(d_max - d_min);
    end
  end

  logic [7:0] out_h, out_w;
  assign out_h = cfg.conv ? cfg.rows : 8'(cfg.rows * cfg.s);
  assign out_w = cfg.conv ? cfg.cols : 8'(cfg.cols * cfg.s);

  // stream loader handshakes
  logic need_word, w_step, in_step;
  assign need_word     = (c_ic < cfg.ic_active);
  assign s_axis_tready = ((state == S_LOAD_W) && need_word) || (state == S_LOAD_IN);
  assign w_step        = (state == S_LOAD_W) && (!need_word || s_axis_tvalid);
  assign in_step       = (state == S_LOAD_IN) && s_axis_tvalid;

  logic w_last, in_last, out_last;
  assign w_last  = (c_kw == cfg.k - 4'd1) && (c_kh == cfg.k - 4'd1) &&
                   (c_ic == 8'(T_IC - 1)) && (c_oc == cfg.oc_active - 8'd1);
  assign in_last = (c_c == win_w - 8'd1) && (c_r == win_h - 8'd1) &&
                   (c_ic == cfg.ic_active - 8'd1);
  assign out_last = (c_c == out_w - 8'd1) && (c_r == out_h - 8'd1) &&
                    (c_oc == cfg.oc_active - 8'd1);

  logic ag_start, ag_done, ag_busy, ob_clear;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      c_oc <= '0; c_ic <= '0; c_r <= '0; c_c <= '0; c_kh <= '0; c_kw <= '0;
      last_q <= 1'b0; ag_start <= 1'b0; ob_clear <= 1'b0; acc_done <= 1'b0;
    end else begin
      ag_start <= 1'b0;
      ob_clear <= 1'b0;
      acc_done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          last_q   <= last;
          ob_clear <= first;
          c_oc <= '0; c_ic <= '0; c_kh <= '0; c_kw <= '0;
          state <= S_LOAD_W;
        end
        S_LOAD_W: if (w_step) begin
          if (w_last) begin
            c_ic <= '0; c_r <= '0; c_c <= '0; c_kh <= '0; c_kw <= '0; c_oc <= '0;
            state <= S_LOAD_IN;
          end else if (c_kw != cfg.k - 4'd1) c_kw <= c_kw + 4'd1;
          else begin
            c_kw <= '0;
            if (c_kh != cfg.k - 4'd1) c_kh <= c_kh + 4'd1;
            else begin
              c_kh <= '0;
              if (c_ic != 8'(T_IC - 1)) c_ic <= c_ic + 8'd1;
              else begin
                c_ic <= '0;
                c_oc <= c_oc + 8'd1;
              end
            end
          end
        end
        S_LOAD_IN: if (in_step) begin
          if (in_last) begin
            c_ic <= '0; c_r <= '0; c_c <= '0;
            ag_start <= 1'b1;
            state <= S_COMPUTE;
          end else if (c_c != win_w - 8'd1) c_c <= c_c + 8'd1;
          else begin
            c_c <= '0;
            if (c_r != win_h - 8'd1) c_r <= c_r + 8'd1;
            else begin
              c_r  <= '0;
              c_ic <= c_ic + 8'd1;
            end
          end
        end
        S_COMPUTE: if (ag_done) begin
          c_oc <= '0; c_r <= '0; c_c <= '0;
          state <= last_q ? S_STORE_RD : S_FINISH;
        end
        S_STORE_RD: state <= S_STORE_SEND;
        S_STORE_SEND: if (m_axis_tready) begin
          if (out_last) state <= S_FINISH;
          else begin
            state <= S_STORE_RD;
            if (c_c != out_w - 8'd1) c_c <= c_c + 8'd1;
            else begin
              c_c <= '0;
              if (c_r != out_h - 8'd1) c_r <= c_r + 8'd1;
              else begin
                c_r  <= '0;
                c_oc <= c_oc + 8'd1;
              end
            end
          end
        end
        S_FINISH: begin
          acc_done <= 1'b1;
          state    <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign acc_busy = (state != S_IDLE);

  // ---------------------------------------------------------------- buffers
  logic           issue;
  logic [IAW-1:0] ag_in_addr;
  logic [WAW-1:0] ag_w_addr;
  logic [OAW-1:0] ag_out_addr;
  data_t          in_vec [T_IC];
  data_t          w_mat  [T_OC][T_IC];

  input_buffer #(.T_IC(T_IC), .DEPTH(IN_H * IN_W)) u_inbuf (
    .clk,
    .we    (in_step),
    .wbank (ICW'(c_ic)),
    .waddr (IAW'(int'(c_r) * IN_W + int'(c_c))),
    .wdata (data_t'(s_axis_tdata[DATA_W-1:0])),
    .re    (issue),
    .raddr (ag_in_addr),
    .rdata (in_vec)
  );

  weight_buffer #(.T_OC(T_OC), .T_IC(T_IC), .K_MAX(K_MAX)) u_wbuf (
    .clk,
    .we    (w_step),
    .woc   (OCW'(c_oc)),
    .wic   (ICW'(c_ic)),
    .waddr (WAW'(int'(c_kh) * K_MAX + int'(c_kw))),
    .wdata (need_word ? data_t'(s_axis_tdata[DATA_W-1:0]) : data_t'(0)),
    .re    (issue),
    .raddr (ag_w_addr),
    .rdata (w_mat)
  );

  // --------------------------------------------------------------- datapath
  logic pipe_busy;
  logic [15:0] inflight;
  logic ob_writing;

  deconv_addr_gen #(.T_OH(T_OH), .T_OW(T_OW), .K_MAX(K_MAX), .IN_H(IN_H), .IN_W(IN_W))
  u_addr (
    .clk, .rst_n,
    .start    (ag_start),
    .cfg,
    .pipe_busy,
    .issue,
    .in_addr  (ag_in_addr),
    .w_addr   (ag_w_addr),
    .out_addr (ag_out_addr),
    .busy     (ag_busy),
    .done     (ag_done)
  );

  // buffer read stage and output address delay line
  logic           rd_valid_q;
  logic [OAW-1:0] oaddr_pipe [LAT+1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_valid_q <= 1'b0;
    else        rd_valid_q <= issue;
  end

  always_ff @(posedge clk) begin
    oaddr_pipe[0] <= ag_out_addr;
    for (int i = 1; i <= LAT; i++) oaddr_pipe[i] <= oaddr_pipe[i-1];
  end

  logic pe_valid;
  acc_t psum [T_OC];

  processing_engine #(.T_OC(T_OC), .T_IC(T_IC)) u_pe (
    .clk, .rst_n,
    .in_valid (rd_valid_q),
    .in_data  (in_vec),
    .weight   (w_mat),
    .out_valid(pe_valid),
    .psum     (psum)
  );

  acc_t ob_rd_data [T_OC];

  output_buffer #(.T_OC(T_OC), .DEPTH(T_OH * T_OW)) u_outbuf (
    .clk, .rst_n,
    .clear    (ob_clear),
    .acc_valid(pe_valid),
    .acc_addr (oaddr_pipe[LAT]),
    .acc_psum (psum),
    .rd_en    (state == S_STORE_RD),
    .rd_addr  (OAW'(int'(c_r) * T_OW + int'(c_c))),
    .rd_data  (ob_rd_data),
    .busy     (ob_writing)
  );

  // iterations issued but not yet written back
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) inflight <= '0;
    else        inflight <= inflight + 16'(issue) - 16'(ob_writing);
  end
  assign pipe_busy = (inflight != 16'd0);

  // ----------------------------------------------------------------- output
  data_t out_word;
  assign out_word      = requant(ob_rd_data[OCW'(c_oc)]);
  assign m_axis_tdata  = AXIS_W'(out_word);
  assign m_axis_tvalid = (state == S_STORE_SEND);
  assign m_axis_tlast  = (state == S_STORE_SEND) && out_last;

endmodule
