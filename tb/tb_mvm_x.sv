// tb_mvm_x -- self-checking test of mvm as the input MVM (MVM_X).
//
// Loads random weights and biases, streams seq_len timesteps of random
// input vectors and compares every gate tuple with a reference computed
// here. Phase 1 runs without stalls and checks that each timestep takes
// exactly L*R + LH cycles (X_t = LX*RX + LH). Phase 2 repeats with random
// input gaps and random output back-pressure. R = 3 does not divide 4*LH,
// so the last multiply cycle of each element is only partly used.
module tb_mvm_x;
  import lstm_ae_pkg::*;
  import tb_ref_pkg::*;

  localparam int L = 8, LH = 4, R = 3, T = 3;
  localparam int ROWS = 4 * LH;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [15:0] seq_len = 16'(T);
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  fix_t in_data = '0;
  gates_t out_data;
  logic wl_valid = 0;
  logic [15:0] wl_row = 0, wl_col = 0;
  fix_t wl_data = '0;
  logic zero_go = 0, seq_first;

  mvm #(.L(L), .LH(LH), .R(R), .RECURRENT(1'b0)) dut (.*);

  int W [ROWS][L+1];
  int X [T][L];
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(bit stalls);
    int n_in = 0, n_out = 0;
    int last_end = -1;
    while (n_out < T * LH) begin
      @(negedge clk);
      in_valid  = (n_in < T * L) && (!stalls || ($urandom_range(3) != 0));
      in_data   = (n_in < T * L) ? X[n_in / L][n_in % L] : 0;
      out_ready = !stalls || ($urandom_range(2) != 0);
      @(posedge clk);
      if (in_valid && in_ready) n_in++;
      if (out_valid && out_ready) begin
        int tt, kk, ref_v [4];
        tt = n_out / LH; kk = n_out % LH;
        for (int g = 0; g < 4; g++) begin
          ref_v[g] = W[g*LH+kk][L];
          for (int j = 0; j < L; j++) ref_v[g] += r_mul(W[g*LH+kk][j], X[tt][j]);
        end
        checks++;
        if (out_data.i != ref_v[0] || out_data.f != ref_v[1] ||
            out_data.g != ref_v[2] || out_data.o != ref_v[3]) begin
          failures++;
          $display("mismatch t=%0d k=%0d got %h %h %h %h exp %h %h %h %h", tt, kk,
                   out_data.i, out_data.f, out_data.g, out_data.o,
                   ref_v[0], ref_v[1], ref_v[2], ref_v[3]);
        end
        if (kk == LH - 1) begin
          if (!stalls && last_end >= 0) begin
            checks++;
            if (cyc - last_end != L * R + LH) begin
              failures++;
              $display("timestep took %0d cycles, expected %0d", cyc - last_end, L * R + LH);
            end
          end
          last_end = cyc;
        end
        n_out++;
      end
    end
    @(negedge clk);
    in_valid = 0; out_ready = 0;
  endtask

  initial begin
    for (int r = 0; r < ROWS; r++)
      for (int j = 0; j <= L; j++) W[r][j] = r_rand(25);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++)
      for (int j = 0; j <= L; j++) begin
        @(negedge clk);
        wl_valid = 1; wl_row = 16'(r); wl_col = 16'(j); wl_data = W[r][j];
      end
    @(negedge clk) wl_valid = 0;
    for (int p = 0; p < 2; p++) begin
      for (int t = 0; t < T; t++)
        for (int j = 0; j < L; j++) X[t][j] = r_rand(26);
      run(p == 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
