// tb_workloads -- runs the other three autoencoders evaluated for this
// design, each elaborated at its own size: LSTM-AE-F64-D2 (RH_m = 4),
// LSTM-AE-F32-D6 (RH_m = 1) and LSTM-AE-F64-D6 (RH_m = 8). For each, the
// driver loads random weights, runs a 64-timestep sequence on an
// unstalled memory (outputs checked against the reference autoencoder,
// cycle count against Acc_Lat), then sequences of 1 and 6 timesteps with
// random memory stalls. The default LSTM-AE-F32-D2 is covered by
// tb_lstm_ae_top. The three run concurrently; the bench ends when all are
// done.
module tb_workloads;
  import lstm_ae_pkg::*;

  logic clk = 0;
  always #1.667 clk = ~clk;

  localparam int NM = 3;
  localparam int MF [NM]  = '{64, 32, 64};
  localparam int MD [NM]  = '{2, 6, 6};
  localparam int MR [NM]  = '{4, 1, 8};

  int  m_checks [NM], m_failures [NM];
  bit  m_done [NM];

  for (genvar g = 0; g < NM; g++) begin : g_model
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

    lstm_ae_top #(.F(MF[g]), .D(MD[g]), .RH_M(MR[g])) dut (.*);
    tb_ae_driver #(.F(MF[g]), .D(MD[g]), .RHM(MR[g]), .NRUN(3), .RUNS('{64, 1, 6})) drv (.*);

    always @(posedge clk) begin
      m_checks[g]   <= drv.checks;
      m_failures[g] <= drv.failures;
      m_done[g]     <= drv.finished;
    end
  end

  initial begin
    int checks, failures;
    bit all;
    checks = 0; failures = 0;
    fork
      begin
        do begin
          @(posedge clk);
          all = 1;
          for (int g = 0; g < NM; g++) if (!m_done[g]) all = 0;
        end while (!all);
        @(posedge clk);
      end
      begin
        repeat (400000) @(posedge clk);
        failures++;
        $display("watchdog expired");
      end
    join_any
    for (int g = 0; g < NM; g++) begin
      checks   += m_checks[g];
      failures += m_failures[g];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
