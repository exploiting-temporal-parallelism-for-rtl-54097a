// lstm_act -- the activations and element-wise unit of an LSTM layer.
//
// For every element k of a timestep it takes one gate tuple from MVM_X and
// one from MVM_H and computes (Q8.24, see lstm_ae_pkg)
//   i = sig(xi+hi)  f = sig(xf+hf)  g = tanh(xg+hg)  o = sig(xo+ho)
//   c_t[k] = f*c_{t-1}[k] + i*g
//   h_t[k] = o*tanh(c_t[k])
// The cell state c is kept locally, LH words; on the first timestep of each
// sequence of seq_len steps c_{t-1} is taken as zero.
//
// How it works: a two-stage pipeline that accepts one element per cycle.
// Stage 1 adds the two tuples and applies the piecewise-linear activations;
// stage 2 updates c and forms h into an output slot. The slot is offered on
// two streams: out_* to the next layer (every timestep) and fb_* back to
// MVM_H as h_{t-1} (every timestep except the last of a sequence, where no
// later timestep needs it). The slot is free once each stream it was
// offered on has taken it; the two handshakes are independent. Latency from
// taking the tuples to h on out_data is 2 cycles.
//
// The equations are the paper's (its Fig. 1); the pipelining, the two-way
// output and the skipped final feedback are this design's choices.
// Reset is synchronous, active low.
module lstm_act
  import lstm_ae_pkg::*;
#(
  parameter int LH    = 32,
  parameter int SEQ_W = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [SEQ_W-1:0] seq_len,
  input  logic             gx_valid,
  output logic             gx_ready,
  input  gates_t           gx_data,
  input  logic             gh_valid,
  output logic             gh_ready,
  input  gates_t           gh_data,
  // h_t to the next layer
  output logic             out_valid,
  input  logic             out_ready,
  output fix_t             out_data,
  // h_t back to MVM_H
  output logic             fb_valid,
  input  logic             fb_ready,
  output fix_t             fb_data
);
  localparam int KW = (LH > 1) ? $clog2(LH) : 1;

  fix_t c_mem [LH];

  // input-side position
  logic [KW-1:0]    k;
  logic [SEQ_W-1:0] t;
  logic             t_last;

  // stage 1
  logic          s1_valid;
  fix_t          s1_i, s1_f, s1_g, s1_o;
  logic [KW-1:0] s1_k;
  logic          s1_first, s1_last;

  // output slot
  logic out_pend, fb_pend;
  fix_t h_q;

  logic slot_free, adv2, s1_free, take;

  assign t_last    = (t + 1'b1 >= seq_len);
  assign slot_free = (!out_pend || out_ready) && (!fb_pend || fb_ready);
  assign adv2      = s1_valid && slot_free;
  assign s1_free   = !s1_valid || adv2;
  assign take      = gx_valid && gh_valid && s1_free;
  assign gx_ready  = gh_valid && s1_free;
  assign gh_ready  = gx_valid && s1_free;

  // stage 2 arithmetic
  fix_t c_old, c_new, h_new;
  always_comb begin
    c_old = s1_first ? '0 : c_mem[s1_k];
    c_new = fx_mul(s1_f, c_old) + fx_mul(s1_i, s1_g);
    h_new = fx_mul(s1_o, pwl_tanh(c_new));
  end

  always_ff @(posedge clk) begin
    if (adv2) c_mem[s1_k] <= c_new;
  end

  always_ff @(posedge clk) begin
    if (take) begin
      s1_i     <= pwl_sigmoid(gx_data.i + gh_data.i);
      s1_f     <= pwl_sigmoid(gx_data.f + gh_data.f);
      s1_g     <= pwl_tanh   (gx_data.g + gh_data.g);
      s1_o     <= pwl_sigmoid(gx_data.o + gh_data.o);
      s1_k     <= k;
      s1_first <= (t == '0);
      s1_last  <= t_last;
    end
    if (adv2) h_q <= h_new;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      k        <= '0;
      t        <= '0;
      s1_valid <= 1'b0;
      out_pend <= 1'b0;
      fb_pend  <= 1'b0;
    end else begin
      if (take) begin
        if (k == KW'(LH - 1)) begin
          k <= '0;
          t <= t_last ? '0 : t + 1'b1;
        end else begin
          k <= k + 1'b1;
        end
      end
      if (take)      s1_valid <= 1'b1;
      else if (adv2) s1_valid <= 1'b0;

      if (adv2) begin
        out_pend <= 1'b1;
        fb_pend  <= !s1_last;
      end else begin
        if (out_ready) out_pend <= 1'b0;
        if (fb_ready)  fb_pend  <= 1'b0;
      end
    end
  end

  assign out_valid = out_pend;
  assign out_data  = h_q;
  assign fb_valid  = fb_pend;
  assign fb_data   = h_q;

endmodule
