// mvm -- one matrix-vector multiply unit of an LSTM layer (MVM_X or MVM_H).
//
// Per timestep it computes the four gate pre-activation vectors
//   acc[r] = b[r] + sum_j W[r][j] * v[j],   r = 0 .. 4*LH-1
// where v is the layer input x_t (RECURRENT = 0, MVM_X) or the previous
// hidden state h_{t-1} (RECURRENT = 1, MVM_H). Row r = gate*LH + k with the
// gate order i, f, g, o.
//
// How it works: the input vector is consumed one element at a time, as the
// paper describes. Each element v[j] is held for R cycles (the reuse
// factor); in cycle c of those R cycles the M parallel multipliers update
// accumulator rows c*M .. c*M+M-1, so M = ceil(4*LH/R) multipliers cover
// all 4*LH rows. When the last element has been used, the unit drains the
// result as LH gate tuples {i_k, f_k, g_k, o_k}, one per cycle. A timestep
// therefore takes exactly L*R + LH cycles when its input is available and
// its output is accepted, which is the paper's X_t = LX*RX + LH and
// H_t = LH*RH + LH. Accumulation of the next timestep starts in the cycle
// after the last tuple is taken.
//
// Weight memory: W is kept in an array of L*R words of M lanes, word j*R+c
// holding the M weights used in cycle c of element j, so one word is read
// per cycle (the paper's "concurrent BRAM access for many weight
// elements"). The read is synchronous, as in a block RAM: each cycle the
// word for the next cycle's (j, c) is fetched into wq, so the multipliers
// see the right word without a bubble. Weights must therefore be loaded at
// least one cycle before the first input element, and reset must last at
// least two cycles. Bias b is kept per row and is added by initialising the
// accumulators at element 0. Both are written through the wl_* port, one
// weight per cycle: wl_row is r, wl_col is j, and wl_col = L addresses the
// bias. The load port is this design's choice; the paper does not say how
// weights reach the chip.
//
// Recurrence (MVM_H): for the first timestep of every sequence of seq_len
// timesteps h_{-1} is zero, so W_h*h_{-1} + b_h is just b_h. The unit then
// skips accumulation, takes nothing from its input stream and drains the
// bias rows directly (LH cycles). So that these tuples are not produced
// before the weights are loaded or before the sequence exists, each such
// drain waits for a pulse on zero_go, which the layer gives when MVM_X
// takes the first element of a sequence; up to three pulses are counted
// ahead. For later timesteps it consumes the LH elements of h_{t-1} fed
// back by the activation unit. For MVM_X zero_go is unused, and
// seq_first marks that the unit is waiting for the first element of a
// sequence.
//
// Interface: input stream in_* (one Q8.24 element, taken in the last of its
// R cycles), output stream out_* (one gates_t tuple), both valid/ready.
// seq_len must be held stable while a sequence is in flight. Reset is
// synchronous, active low.
module mvm
  import lstm_ae_pkg::*;
#(
  parameter int L         = 16,   // vector length (LX or LH)
  parameter int LH        = 32,   // hidden size of the layer
  parameter int R         = 2,    // reuse factor (cycles per element)
  parameter int M         = lanes(LH, R),
  parameter bit RECURRENT = 1'b0,
  parameter int SEQ_W     = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [SEQ_W-1:0] seq_len,
  // element stream in
  input  logic             in_valid,
  output logic             in_ready,
  input  fix_t             in_data,
  // gate tuple stream out
  output logic             out_valid,
  input  logic             out_ready,
  output gates_t           out_data,
  // weight / bias load
  input  logic             wl_valid,
  input  logic [15:0]      wl_row,
  input  logic [15:0]      wl_col,
  input  fix_t             wl_data,
  // sequence-start handshake between MVM_X and MVM_H
  input  logic             zero_go,
  output logic             seq_first
);
  localparam int ROWS = 4 * LH;
  localparam int WD   = L * R;
  localparam int JW   = (L  > 1) ? $clog2(L)  : 1;
  localparam int CW   = (R  > 1) ? $clog2(R)  : 1;
  localparam int KW   = (LH > 1) ? $clog2(LH) : 1;
  localparam int AW   = (WD > 1) ? $clog2(WD) : 1;

  fix_t wmem [WD][M];
  fix_t bias [R][M];
  fix_t acc  [R][M];

  typedef enum logic {S_ACC, S_DRAIN} state_t;
  state_t           state;
  logic [JW-1:0]    j;
  logic [CW-1:0]    c;
  logic [KW-1:0]    k;
  logic [SEQ_W-1:0] t;

  logic  zero_in;    // MVM_H on the first timestep of a sequence
  logic  have;       // operand available this cycle
  logic [SEQ_W-1:0] t_next;
  logic [AW-1:0] waddr, raddr_next;
  fix_t          wq [M];     // registered read port of the weight memory

  assign zero_in  = RECURRENT && (t == '0);
  assign have     = (state == S_ACC) && in_valid;
  assign in_ready = (state == S_ACC) && (c == CW'(R - 1));
  assign t_next   = (t + 1'b1 >= seq_len) ? '0 : t + 1'b1;
  assign seq_first = (state == S_ACC) && (t == '0) && (j == '0);

  // Pending sequence starts (MVM_H only).
  logic [1:0] go_cnt;
  logic       zero_done;
  assign zero_done = (state == S_DRAIN) && zero_in && out_ready && go_cnt != '0
                     && (k == KW'(LH - 1));
  always_ff @(posedge clk) begin
    if (!rst_n || !RECURRENT)
      go_cnt <= '0;
    else if (zero_go && !zero_done && go_cnt != 2'd3)
      go_cnt <= go_cnt + 1'b1;
    else if (zero_done && !zero_go)
      go_cnt <= go_cnt - 1'b1;
  end
  assign waddr    = AW'(int'(j) * R + int'(c));

  // ---- weight / bias load ----
  always_ff @(posedge clk) begin
    if (wl_valid && int'(wl_row) < ROWS) begin
      if (int'(wl_col) < L)
        wmem[int'(wl_col) * R + int'(wl_row) / M][int'(wl_row) % M] <= wl_data;
      else if (int'(wl_col) == L)
        bias[int'(wl_row) / M][int'(wl_row) % M] <= wl_data;
    end
  end

  // ---- synchronous weight read, one cycle ahead ----
  always_comb begin
    if (state == S_ACC)
      raddr_next = !have ? waddr : (waddr == AW'(WD - 1)) ? '0 : waddr + 1'b1;
    else
      raddr_next = '0;
  end

  always_ff @(posedge clk) begin
    for (int m = 0; m < M; m++) wq[m] <= wmem[raddr_next][m];
  end

  // ---- multiply-accumulate: M lanes per cycle ----
  always_ff @(posedge clk) begin
    if (have) begin
      for (int m = 0; m < M; m++) begin
        if (int'(c) * M + m < ROWS)
          acc[c][m] <= ((j == '0) ? bias[c][m] : acc[c][m]) + fx_mul(wq[m], in_data);
      end
    end
  end

  // ---- sequencing ----
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= RECURRENT ? S_DRAIN : S_ACC;
      j <= '0;
      c <= '0;
      k <= '0;
      t <= '0;
    end else if (state == S_ACC) begin
      if (have) begin
        if (c == CW'(R - 1)) begin
          c <= '0;
          if (j == JW'(L - 1)) begin
            j     <= '0;
            k     <= '0;
            state <= S_DRAIN;
          end else begin
            j <= j + 1'b1;
          end
        end else begin
          c <= c + 1'b1;
        end
      end
    end else if (out_valid && out_ready) begin
      if (k == KW'(LH - 1)) begin
        k     <= '0;
        t     <= t_next;
        state <= (RECURRENT && t_next == '0) ? S_DRAIN : S_ACC;
      end else begin
        k <= k + 1'b1;
      end
    end
  end

  // ---- drain: element k of each gate ----
  function automatic fix_t acc_row(int r);
    return zero_in ? bias[r / M][r % M] : acc[r / M][r % M];
  endfunction

  assign out_valid  = (state == S_DRAIN) && (!zero_in || go_cnt != '0);
  assign out_data.i = acc_row(0 * LH + int'(k));
  assign out_data.f = acc_row(1 * LH + int'(k));
  assign out_data.g = acc_row(2 * LH + int'(k));
  assign out_data.o = acc_row(3 * LH + int'(k));

  // A waiting tuple stays stable, except while weights are being loaded
  // (the bias drained on a first timestep is read live).
  logic wl_q;
  always_ff @(posedge clk) wl_q <= wl_valid;
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n || wl_valid || wl_q)
                                 (out_valid && !out_ready) |=> (out_valid && $stable(out_data)));

endmodule
