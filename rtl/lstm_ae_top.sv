// lstm_ae_top -- LSTM autoencoder accelerator with temporal parallelism.
//
// The whole network is laid out in hardware at once: a data reader, one
// LSTM layer module per network layer and a data writer, joined in a chain
// by FIFOs (reader -> FIFO -> LSTM_0 -> FIFO -> LSTM_1 -> ... -> LSTM_{D-1}
// -> FIFO -> writer). Every module runs on its own as soon as its input
// FIFO holds data, so after the pipeline has filled, layer i works on
// timestep t while layer i+1 works on timestep t-1 and so on. A sequence
// of T timesteps through D layers then takes about
//   T*Lat_t_m + sum over the other layers of Lat_t_i
// cycles, where Lat_t_i is the per-timestep latency of layer i.
//
// Configuration: F is the input feature size, D the number of layers (half
// encoder, half decoder, feature size halving from F and doubling back) and
// RH_M the reuse factor of the widest layer. All other sizes, reuse factors
// and multiplier counts are derived at elaboration by the dataflow-
// balancing rule in lstm_ae_pkg, so that every layer has the same
// per-timestep latency LH_m*(RH_M+1). The defaults are the paper's
// LSTM-AE-F32-D2 model with RH_m = 1.
//
// Interface: pulse start with seq_len (timesteps, 1 .. 2^SEQ_W-1),
// in_base and out_base held; the reader fetches seq_len*F words, the
// writer stores seq_len*F words and pulses done. Give start only while
// busy is low; sequences may then follow one another, and each layer
// restarts its recurrent state every seq_len timesteps. Weights and biases are loaded beforehand through wl_*:
// wl_layer selects the layer, wl_mat the matrix (0: W_x, 1: W_h), wl_row
// the gate row (gate*LH + k, gates i, f, g, o), wl_col the column, with
// column LX (W_x) or LH (W_h) addressing the bias. The memory channels are
// plain valid/ready channels for an external memory controller.
module lstm_ae_top
  import lstm_ae_pkg::*;
#(
  parameter int F      = 32,
  parameter int D      = 2,
  parameter int RH_M   = 1,
  parameter int SEQ_W  = 16,
  parameter int ADDR_W = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  // control
  input  logic              start,
  input  logic [SEQ_W-1:0]  seq_len,
  input  logic [ADDR_W-1:0] in_base,
  input  logic [ADDR_W-1:0] out_base,
  output logic              busy,
  output logic              done,
  // weight load
  input  logic              wl_valid,
  input  logic [7:0]        wl_layer,
  input  logic              wl_mat,
  input  logic [15:0]       wl_row,
  input  logic [15:0]       wl_col,
  input  fix_t              wl_data,
  // memory read channel
  output logic              rd_req_valid,
  input  logic              rd_req_ready,
  output logic [ADDR_W-1:0] rd_req_addr,
  input  logic              rd_resp_valid,
  output logic              rd_resp_ready,
  input  fix_t              rd_resp_data,
  // memory write channel
  output logic              wr_valid,
  input  logic              wr_ready,
  output logic [ADDR_W-1:0] wr_addr,
  output fix_t              wr_data
);
  // s_* : stream into FIFO k, q_* : stream out of FIFO k (k = 0 .. D)
  logic s_valid [D+1];
  logic s_ready [D+1];
  fix_t s_data  [D+1];
  logic q_valid [D+1];
  logic q_ready [D+1];
  fix_t q_data  [D+1];

  logic rd_busy, wr_busy;
  assign busy = rd_busy || wr_busy;

  data_reader #(.F(F), .SEQ_W(SEQ_W), .ADDR_W(ADDR_W)) u_reader (
    .clk, .rst_n, .start, .base_addr(in_base), .seq_len, .busy(rd_busy),
    .rd_req_valid, .rd_req_ready, .rd_req_addr,
    .rd_resp_valid, .rd_resp_ready, .rd_resp_data,
    .out_valid(s_valid[0]), .out_ready(s_ready[0]), .out_data(s_data[0])
  );

  // FIFO k holds one full vector of the feature size at point k.
  for (genvar k = 0; k <= D; k++) begin : g_fifo
    stream_fifo #(.WIDTH(DATA_W), .DEPTH(ae_dim(F, D, k))) u_fifo (
      .clk, .rst_n,
      .in_valid (s_valid[k]), .in_ready (s_ready[k]), .in_data (s_data[k]),
      .out_valid(q_valid[k]), .out_ready(q_ready[k]), .out_data(q_data[k])
    );
  end

  for (genvar i = 0; i < D; i++) begin : g_layer
    localparam int LX = layer_lx(F, D, i);
    localparam int LH = layer_lh(F, D, i);
    localparam int RH = layer_rh(F, D, RH_M, i);
    localparam int RX = layer_rx(F, D, RH_M, i);
    lstm_layer #(
      .LX(LX), .LH(LH), .RX(RX), .RH(RH),
      .MX(lanes(LH, RX)), .MH(lanes(LH, RH)), .SEQ_W(SEQ_W)
    ) u_layer (
      .clk, .rst_n, .seq_len,
      .in_valid (q_valid[i]),   .in_ready (q_ready[i]),   .in_data (q_data[i]),
      .out_valid(s_valid[i+1]), .out_ready(s_ready[i+1]), .out_data(s_data[i+1]),
      .wl_valid (wl_valid && (wl_layer == 8'(i))),
      .wl_mat, .wl_row, .wl_col, .wl_data
    );
  end

  data_writer #(.F(F), .SEQ_W(SEQ_W), .ADDR_W(ADDR_W)) u_writer (
    .clk, .rst_n, .start, .base_addr(out_base), .seq_len, .busy(wr_busy), .done,
    .in_valid(q_valid[D]), .in_ready(q_ready[D]), .in_data(q_data[D]),
    .wr_valid, .wr_ready, .wr_addr, .wr_data
  );

endmodule
