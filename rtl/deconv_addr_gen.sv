// deconv_addr_gen -- the "Addressing" units of the processing engine: it
// walks the loop nest of the paper's Algorithm 2 and turns every iteration
// into input-, weight- and output-buffer addresses.
//
// Reverse looping: the loops run over the output tile, not the input, so
// each output word is produced inside one tile and never needs summing with
// a neighbouring tile. Stride hole skipping: for kernel row k_h only the
// output rows o_h = S*o_h' + f_h with f_h = (S - ((P - k_h) mod S)) mod S
// receive a contribution, and for those the input row is the integer
// i_h = o_h' + d_h with d_h = (f_h + P - k_h)/S; rows that would need a
// fractional input row are never visited. The same holds for columns.
//
// Loop order (outer to inner), as in Algorithm 2: k_h, k_w, o_h' (rows),
// o_w' (cols). The o_c and i_c loops are unrolled in the processing engine.
// Input addresses are relative to the input window held in the input
// buffer, whose first row/column is the one needed by k = K-1:
//   in_addr  = (o_h' + d_h - d_min) * IN_W + (o_w' + d_w - d_min)
//   w_addr   = k_h * K_MAX + k_w
//   out_addr = (S*o_h' + f_h) * T_OW + (S*o_w' + f_w)
//
// Convolution mode (cfg.conv = 1): the same loop nest with o_h' the output
// row itself, no phases, and the input row S*o_h' + k_h taken relative to a
// window that starts at input row S*o_h0 - P:
//   in_addr  = (S*o_h' + k_h) * IN_W + (S*o_w' + k_w)
//   out_addr = o_h' * T_OW + o_w'
//
// Timing: the o_w' loop is pipelined, one iteration every cfg.ii clocks
// (ii = 0 is taken as 1). After the last o_w' of a row the generator waits
// until pipe_busy is low, i.e. the datapath has drained, before starting the
// next row; a row therefore takes PD + II*(cols-1) clocks, the cycle model
// of the paper's computation roof. done pulses for one clock at the end.
module deconv_addr_gen
  import dcnn_pkg::*;
#(
  parameter int unsigned T_OH  = 16,
  parameter int unsigned T_OW  = 16,
  parameter int unsigned K_MAX = 5,
  parameter int unsigned IN_H  = 11,
  parameter int unsigned IN_W  = 11,
  localparam int unsigned IAW  = $clog2(IN_H * IN_W),
  localparam int unsigned WAW  = $clog2(K_MAX * K_MAX),
  localparam int unsigned OAW  = $clog2(T_OH * T_OW)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  layer_cfg_t     cfg,
  input  logic           pipe_busy,
  output logic           issue,
  output logic [IAW-1:0] in_addr,
  output logic [WAW-1:0] w_addr,
  output logic [OAW-1:0] out_addr,
  output logic           busy,
  output logic           done
);

  typedef enum logic [1:0] {S_IDLE, S_ISSUE, S_DRAIN} state_t;
  state_t state;

  logic [3:0] kh, kw, gap;
  logic [7:0] ohp, owp;

  logic [3:0] ii_eff;
  assign ii_eff = (cfg.ii == 4'd0) ? 4'd1 : cfg.ii;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      kh <= '0; kw <= '0; ohp <= '0; owp <= '0; gap <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          kh <= '0; kw <= '0; ohp <= '0; owp <= '0; gap <= '0;
          if (cfg.rows == 8'd0 || cfg.cols == 8'd0 || cfg.k == 4'd0 || cfg.s == 4'd0)
            done <= 1'b1;
          else
            state <= S_ISSUE;
        end
        S_ISSUE: begin
          if (gap != 4'd0) begin
            gap <= gap - 4'd1;
          end else if (owp == cfg.cols - 8'd1) begin
            owp   <= '0;
            state <= S_DRAIN;
          end else begin
            owp <= owp + 8'd1;
            gap <= ii_eff - 4'd1;
          end
        end
        S_DRAIN: if (!pipe_busy) begin
          gap   <= '0;
          state <= S_ISSUE;
          if (ohp != cfg.rows - 8'd1) begin
            ohp <= ohp + 8'd1;
          end else begin
            ohp <= '0;
            if (kw != cfg.k - 4'd1) begin
              kw <= kw + 4'd1;
            end else begin
              kw <= '0;
              if (kh != cfg.k - 4'd1) begin
                kh <= kh + 4'd1;
              end else begin
                state <= S_IDLE;
                done  <= 1'b1;
              end
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign issue = (state == S_ISSUE) && (gap == 4'd0);
  assign busy  = (state != S_IDLE);

  // stride hole skipping arithmetic
  logic signed [7:0] fh, fw, dh, dw, dmin;
  int unsigned       ih, iw, oh, ow;

  always_comb begin
    fh   = fh_offset(kh, cfg.s, cfg.p);
    fw   = fh_offset(kw, cfg.s, cfg.p);
    dmin = in_offset(cfg.k - 4'd1, cfg.s, cfg.p);
    dh   = in_offset(kh, cfg.s, cfg.p) - dmin;
    dw   = in_offset(kw, cfg.s, cfg.p) - dmin;
    ih   = int'(ohp) + int'(dh);
    iw   = int'(owp) + int'(dw);
    oh   = int'(ohp) * int'(cfg.s) + int'(fh);
    ow   = int'(owp) * int'(cfg.s) + int'(fw);
    if (cfg.conv) begin
      ih = int'(ohp) * int'(cfg.s) + int'(kh);
      iw = int'(owp) * int'(cfg.s) + int'(kw);
      oh = int'(ohp);
      ow = int'(owp);
    end
    in_addr  = IAW'(ih * IN_W + iw);
    w_addr   = WAW'(int'(kh) * K_MAX + int'(kw));
    out_addr = OAW'(oh * T_OW + ow);
  end

endmodule
