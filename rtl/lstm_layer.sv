// lstm_layer -- one LSTM layer (LSTM_i) as a small dataflow of its own.
//
// Structure (as drawn in the paper's architecture figure): the input
// element stream feeds MVM_X; MVM_X and MVM_H each pass their gate tuples
// through a FIFO to the activations and element-wise unit, whose h_t goes
// out of the layer and also back, through a third FIFO, to MVM_H as
// h_{t-1}. When MVM_X takes the first element of a sequence it tells
// MVM_H (zero_go), which then drains b_h as the h_{-1} = 0 result of the
// first timestep. All four units run concurrently and are coupled only by the
// FIFOs, so MVM_X may already accumulate timestep t+1 while MVM_H waits for
// h_t.
//
// Timing: with input available and output accepted, a timestep occupies
// max(X_t, H_t) = max(LX*RX+LH, LH*RH+LH) cycles, the paper's Lat_t_i, plus
// the few cycles of pipeline delay around the recurrence when LH is very
// small. The weight port selects the matrix with wl_mat (0: W_x / b_x,
// 1: W_h / b_h); see mvm for wl_row and wl_col.
//
// FIFO depths are this design's choice: the gate FIFOs hold GQ_DEPTH
// tuples and the feedback FIFO a whole hidden vector (LH), so feeding h
// back never stalls the activation unit.
module lstm_layer
  import lstm_ae_pkg::*;
#(
  parameter int LX       = 32,
  parameter int LH       = 16,
  parameter int RX       = 1,
  parameter int RH       = 3,
  parameter int MX       = lanes(LH, RX),
  parameter int MH       = lanes(LH, RH),
  parameter int GQ_DEPTH = 2,
  parameter int SEQ_W    = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [SEQ_W-1:0] seq_len,
  input  logic             in_valid,
  output logic             in_ready,
  input  fix_t             in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output fix_t             out_data,
  input  logic             wl_valid,
  input  logic             wl_mat,
  input  logic [15:0]      wl_row,
  input  logic [15:0]      wl_col,
  input  fix_t             wl_data
);
  logic   gx_v, gx_r, gxq_v, gxq_r;
  logic   gh_v, gh_r, ghq_v, ghq_r;
  gates_t gx_d, gxq_d, gh_d, ghq_d;
  logic   fb_v, fb_r, fbq_v, fbq_r;
  logic   x_first, h_first_unused, go;
  assign go = in_valid && in_ready && x_first;
  fix_t   fb_d, fbq_d;

  mvm #(.L(LX), .LH(LH), .R(RX), .M(MX), .RECURRENT(1'b0), .SEQ_W(SEQ_W)) u_mvm_x (
    .clk, .rst_n, .seq_len,
    .in_valid (in_valid), .in_ready (in_ready), .in_data (in_data),
    .out_valid(gx_v),     .out_ready(gx_r),     .out_data(gx_d),
    .wl_valid (wl_valid && !wl_mat), .wl_row, .wl_col, .wl_data,
    .zero_go  (1'b0), .seq_first(x_first)
  );

  mvm #(.L(LH), .LH(LH), .R(RH), .M(MH), .RECURRENT(1'b1), .SEQ_W(SEQ_W)) u_mvm_h (
    .clk, .rst_n, .seq_len,
    .in_valid (fbq_v), .in_ready (fbq_r), .in_data (fbq_d),
    .out_valid(gh_v),  .out_ready(gh_r),  .out_data(gh_d),
    .wl_valid (wl_valid && wl_mat), .wl_row, .wl_col, .wl_data,
    .zero_go  (go), .seq_first(h_first_unused)
  );

  stream_fifo #(.WIDTH($bits(gates_t)), .DEPTH(GQ_DEPTH)) u_gx_fifo (
    .clk, .rst_n,
    .in_valid(gx_v), .in_ready(gx_r), .in_data(gx_d),
    .out_valid(gxq_v), .out_ready(gxq_r), .out_data(gxq_d)
  );

  stream_fifo #(.WIDTH($bits(gates_t)), .DEPTH(GQ_DEPTH)) u_gh_fifo (
    .clk, .rst_n,
    .in_valid(gh_v), .in_ready(gh_r), .in_data(gh_d),
    .out_valid(ghq_v), .out_ready(ghq_r), .out_data(ghq_d)
  );

  lstm_act #(.LH(LH), .SEQ_W(SEQ_W)) u_act (
    .clk, .rst_n, .seq_len,
    .gx_valid(gxq_v), .gx_ready(gxq_r), .gx_data(gxq_d),
    .gh_valid(ghq_v), .gh_ready(ghq_r), .gh_data(ghq_d),
    .out_valid, .out_ready, .out_data,
    .fb_valid(fb_v), .fb_ready(fb_r), .fb_data(fb_d)
  );

  stream_fifo #(.WIDTH(DATA_W), .DEPTH(LH)) u_fb_fifo (
    .clk, .rst_n,
    .in_valid(fb_v), .in_ready(fb_r), .in_data(fb_d),
    .out_valid(fbq_v), .out_ready(fbq_r), .out_data(fbq_d)
  );

endmodule
