// tb_lstm_act -- self-checking test of the activations and element-wise
// unit.
//
// Random gate tuples are fed on both inputs for two sequences of seq_len
// timesteps. Every h on the output stream is compared with a reference
// LSTM cell computed here (which also tracks c), and the feedback stream
// must carry the same h except on the last timestep of each sequence.
// Phase 1 runs without stalls and checks the 2-cycle latency and one
// element per cycle; phase 2 adds random gaps and back-pressure on both
// output streams independently.
module tb_lstm_act;
  import lstm_ae_pkg::*;
  import tb_ref_pkg::*;

  localparam int LH = 4, TS = 3, NSEQ = 2, N = LH * TS * NSEQ;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [15:0] seq_len = 16'(TS);
  logic gx_valid = 0, gx_ready, gh_valid = 0, gh_ready;
  gates_t gx_data = '0, gh_data = '0;
  logic out_valid, out_ready = 0, fb_valid, fb_ready = 0;
  fix_t out_data, fb_data;

  lstm_act #(.LH(LH)) dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  gates_t GX [N], GH [N];
  int H [N];
  int fb_exp [$];
  int take_cyc [N];

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic make_ref();
    int c [LH];
    fb_exp.delete();
    for (int n = 0; n < N; n++) begin
      int k, t, gi, gf, gg, go;
      k = n % LH; t = (n / LH) % TS;
      for (int q = 0; q < 4; q++) begin
        GX[n][q*32 +: 32] = r_rand(28);
        GH[n][q*32 +: 32] = r_rand(28);
      end
      gi = r_sig (int'(GX[n].i) + int'(GH[n].i));
      gf = r_sig (int'(GX[n].f) + int'(GH[n].f));
      gg = r_tanh(int'(GX[n].g) + int'(GH[n].g));
      go = r_sig (int'(GX[n].o) + int'(GH[n].o));
      if (t == 0) c[k] = 0;
      c[k] = r_mul(gf, c[k]) + r_mul(gi, gg);
      H[n] = r_mul(go, r_tanh(c[k]));
      if (t != TS - 1) fb_exp.push_back(H[n]);
    end
  endtask

  task automatic run(bit stalls);
    int nx = 0, nh = 0, no = 0, nf = 0, nfb;
    nfb = fb_exp.size();
    while (no < N || nf < nfb) begin
      @(negedge clk);
      gx_valid  = (nx < N) && (!stalls || $urandom_range(3) != 0);
      gx_data   = (nx < N) ? GX[nx] : '0;
      gh_valid  = (nh < N) && (!stalls || $urandom_range(3) != 0);
      gh_data   = (nh < N) ? GH[nh] : '0;
      out_ready = !stalls || $urandom_range(2) != 0;
      fb_ready  = !stalls || $urandom_range(2) != 0;
      @(posedge clk);
      if (gx_valid && gx_ready) begin take_cyc[nx] = cyc; nx++; end
      if (gh_valid && gh_ready) nh++;
      if (out_valid && out_ready) begin
        checks++;
        if (out_data != H[no]) begin
          failures++;
          $display("h mismatch n=%0d got %h exp %h", no, out_data, H[no]);
        end
        if (!stalls) begin
          checks++;
          if (cyc - take_cyc[no] != 2) begin
            failures++;
            $display("latency %0d, expected 2", cyc - take_cyc[no]);
          end
        end
        no++;
      end
      if (fb_valid && fb_ready) begin
        checks++;
        if (nf >= nfb || fb_data != fb_exp[nf]) begin
          failures++;
          $display("feedback mismatch n=%0d got %h", nf, fb_data);
        end
        nf++;
      end
    end
    // no stray feedback afterwards
    repeat (4) begin
      @(posedge clk);
      if (fb_valid) begin failures++; $display("extra feedback"); end
    end
    checks++;
    @(negedge clk);
    gx_valid = 0; gh_valid = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < 2; p++) begin
      make_ref();
      run(p == 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
