// tb_lstm_layer -- self-checking test of one LSTM layer (MVM_X, MVM_H,
// activation unit and their FIFOs together).
//
// Loads random W_x, W_h and biases, streams two sequences of seq_len
// random input vectors and compares every h with a reference LSTM
// computed here. Phase 1 runs without stalls and checks the per-timestep
// interval in steady state against Lat_t = max(LX*RX+LH, LH*RH+LH);
// phase 2 adds random input gaps and output back-pressure.
module tb_lstm_layer;
  import lstm_ae_pkg::*;
  import tb_ref_pkg::*;

  localparam int LX = 8, LH = 4, RX = 1, RH = 3, TS = 4, NSEQ = 2;
  localparam int LAT_T = (LX * RX + LH > LH * RH + LH) ? LX * RX + LH : LH * RH + LH;
  localparam int SLACK = 4;   // pipeline delay around the recurrence

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [15:0] seq_len = 16'(TS);
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  fix_t in_data = '0, out_data;
  logic wl_valid = 0, wl_mat = 0;
  logic [15:0] wl_row = 0, wl_col = 0;
  fix_t wl_data = '0;

  lstm_layer #(.LX(LX), .LH(LH), .RX(RX), .RH(RH)) dut (.*);

  int wx [], wh [];
  int x [NSEQ][], h [NSEQ][];
  int checks = 0, failures = 0, cyc = 0, worst = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #400000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(bit stalls);
    int ni = 0, no = 0, last = -1, n_all;
    n_all = NSEQ * TS * LH;
    for (int s = 0; s < NSEQ; s++) begin
      x[s] = new[TS * LX];
      foreach (x[s][i]) x[s][i] = r_rand(26);
      r_lstm(LX, LH, TS, wx, wh, x[s], h[s]);
    end
    while (no < n_all) begin
      @(negedge clk);
      in_valid  = (ni < NSEQ * TS * LX) && (!stalls || $urandom_range(3) != 0);
      in_data   = (ni < NSEQ * TS * LX) ? x[ni / (TS * LX)][ni % (TS * LX)] : 0;
      out_ready = !stalls || $urandom_range(2) != 0;
      @(posedge clk);
      if (in_valid && in_ready) ni++;
      if (out_valid && out_ready) begin
        int e;
        e = h[no / (TS * LH)][no % (TS * LH)];
        checks++;
        if (out_data != e) begin
          failures++;
          $display("h[%0d] got %h exp %h", no, out_data, e);
        end
        if (no % LH == LH - 1) begin
          if (!stalls && no / LH >= 2) begin
            checks++;
            if (cyc - last > worst) worst = cyc - last;
            if (cyc - last > LAT_T + SLACK) begin
              failures++;
              $display("timestep interval %0d > %0d", cyc - last, LAT_T + SLACK);
            end
          end
          last = cyc;
        end
        no++;
      end
    end
    @(negedge clk);
    in_valid = 0; out_ready = 0;
  endtask

  task automatic load(bit mat, ref int w [], input int cols);
    for (int r = 0; r < 4 * LH; r++)
      for (int j = 0; j < cols; j++) begin
        @(negedge clk);
        wl_valid = 1; wl_mat = mat; wl_row = 16'(r); wl_col = 16'(j);
        wl_data = w[r * cols + j];
      end
    @(negedge clk) wl_valid = 0;
  endtask

  initial begin
    wx = new[4 * LH * (LX + 1)];
    wh = new[4 * LH * (LH + 1)];
    foreach (wx[i]) wx[i] = r_rand(25);
    foreach (wh[i]) wh[i] = r_rand(25);
    repeat (3) @(posedge clk);
    rst_n = 1;
    load(1'b0, wx, LX + 1);
    load(1'b1, wh, LH + 1);
    run(1'b0);
    $display("steady-state timestep interval: worst %0d cycles, Lat_t = %0d", worst, LAT_T);
    run(1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
