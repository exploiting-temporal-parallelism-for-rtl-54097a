// tb_lstm_ae_top -- end-to-end test of the accelerator at its default
// size (the LSTM-AE-F32-D2 model, RH_m = 1), also used as the full-size
// test.
//
// tb_ae_driver loads random weights, runs a 64-timestep sequence on an
// unstalled memory (checking every output and the cycle count against the
// latency model), then a 1- and a 3-timestep sequence with random memory
// stalls. Besides, this bench counts how often each mechanism of the
// design happened and fails if one never did:
//   overlap    all layers accumulating at once on different timesteps
//              (temporal parallelism)
//   backpress  a FIFO refusing a word (a module stalled by its consumer)
//   h0_bias    MVM_H producing a first-timestep result from its bias
//   fb_skip    the activation unit skipping the feedback of a last timestep
//   mem_stall  the memory refusing a read or write
module tb_lstm_ae_top;
  import lstm_ae_pkg::*;

  localparam int F = 32, D = 2, RHM = 1;

  logic clk = 0;
  always #1.667 clk = ~clk;   // 300 MHz

  logic rst_n, start, busy, done;
  logic [15:0] seq_len;
  logic [31:0] in_base, out_base;
  logic wl_valid, wl_mat;
  logic [7:0] wl_layer;
  logic [15:0] wl_row, wl_col;
  fix_t wl_data;
  logic rd_req_valid, rd_req_ready, rd_resp_valid, rd_resp_ready;
  logic [31:0] rd_req_addr;
  fix_t rd_resp_data;
  logic wr_valid, wr_ready;
  logic [31:0] wr_addr;
  fix_t wr_data;

  lstm_ae_top dut (.*);
  tb_ae_driver #(.F(F), .D(D), .RHM(RHM), .NRUN(3), .RUNS('{64, 1, 3})) drv (.*);

  // ---- mechanism counters ----
  int n_overlap = 0, n_backpress = 0, n_h0 = 0, n_fbskip = 0, n_memstall = 0;
  logic all_acc [D];
  logic [15:0] t_of [D];
  logic fifo_full [D+1];
  logic h0 [D], fbs [D];

  for (genvar i = 0; i < D; i++) begin : g_mon
    assign all_acc[i] = dut.g_layer[i].u_layer.u_mvm_h.have;
    assign t_of[i]    = dut.g_layer[i].u_layer.u_mvm_h.t;
    assign h0[i]      = dut.g_layer[i].u_layer.u_mvm_h.zero_done;
    assign fbs[i]     = dut.g_layer[i].u_layer.u_act.adv2 && dut.g_layer[i].u_layer.u_act.s1_last;
  end
  for (genvar k = 0; k <= D; k++) begin : g_monf
    assign fifo_full[k] = dut.s_valid[k] && !dut.s_ready[k];
  end

  always @(posedge clk) begin
    bit all, differ;
    all = 1; differ = 0;
    for (int i = 0; i < D; i++) begin
      if (!all_acc[i]) all = 0;
      if (t_of[i] != t_of[0]) differ = 1;
      if (h0[i]) n_h0++;
      if (fbs[i]) n_fbskip++;
    end
    if (all && differ) n_overlap++;
    for (int k = 0; k <= D; k++) if (fifo_full[k]) n_backpress++;
    if ((rd_req_valid && !rd_req_ready) || (wr_valid && !wr_ready)) n_memstall++;
  end

  task automatic need(int n, string what);
    drv.checks++;
    $display("mechanism %-10s happened %0d times", what, n);
    if (n == 0) begin drv.failures++; $display("FAIL: %s never happened", what); end
  endtask

  initial begin
    fork
      begin
        wait (drv.finished);
        need(n_overlap, "overlap");
        need(n_backpress, "backpress");
        need(n_h0, "h0_bias");
        need(n_fbskip, "fb_skip");
        need(n_memstall, "mem_stall");
      end
      begin
        repeat (200000) @(posedge clk);
        drv.failures++;
        $display("watchdog expired");
      end
    join_any
    $display("TB_RESULT checks=%0d failures=%0d", drv.checks, drv.failures);
    $finish;
  end
endmodule
