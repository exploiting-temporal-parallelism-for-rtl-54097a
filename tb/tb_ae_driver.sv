// tb_ae_driver -- end-to-end stimulus and checking for lstm_ae_top, shared
// by the top-level and workload testbenches (which instantiate the top
// themselves and connect it to this driver).
//
// It holds the memory model, generates random weights and biases for every
// layer of the F{F}-D{D} autoencoder, loads them through the weight port,
// and then runs the sequence lengths in RUNS one after another: write a
// random input sequence to memory, pulse start, wait for done, and compare
// every output word with a reference autoencoder computed here (a chain of
// reference LSTM layers). The first run is made with an unstalled memory
// and its cycle count, from start to done, is checked against the paper's
// latency model Acc_Lat = T*Lat_t_m + sum of the other layers' Lat_t_i,
// with an allowance of OVERHEAD cycles for memory latency and the FIFOs;
// later runs stall the memory channels at random.
// checks, failures and `finished` are read by the instantiating testbench.
module tb_ae_driver
  import lstm_ae_pkg::*;
  import tb_ref_pkg::*;
#(
  parameter int F        = 32,
  parameter int D        = 2,
  parameter int RHM      = 1,
  parameter int NRUN     = 3,
  parameter int RUNS [NRUN] = '{64, 1, 3},
  parameter int OVERHEAD = 48
) (
  input  logic        clk,
  output logic        rst_n,
  output logic        start,
  output logic [15:0] seq_len,
  output logic [31:0] in_base,
  output logic [31:0] out_base,
  input  logic        busy,
  input  logic        done,
  output logic        wl_valid,
  output logic [7:0]  wl_layer,
  output logic        wl_mat,
  output logic [15:0] wl_row,
  output logic [15:0] wl_col,
  output fix_t        wl_data,
  input  logic        rd_req_valid,
  output logic        rd_req_ready,
  input  logic [31:0] rd_req_addr,
  output logic        rd_resp_valid,
  input  logic        rd_resp_ready,
  output fix_t        rd_resp_data,
  input  logic        wr_valid,
  output logic        wr_ready,
  input  logic [31:0] wr_addr,
  input  fix_t        wr_data
);
  localparam int WORDS   = 16384;
  localparam int OUT_W   = 8192;      // output area, in words

  logic stall = 0;
  tb_dram #(.WORDS(WORDS), .LAT(4)) mem (
    .clk, .stall, .rd_req_valid, .rd_req_ready, .rd_req_addr,
    .rd_resp_valid, .rd_resp_ready, .rd_resp_data,
    .wr_valid, .wr_ready, .wr_addr, .wr_data);

  int checks = 0, failures = 0;
  bit finished = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  int wx [D][], wh [D][];
  int lx [D], lh [D];

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic load_layers();
    for (int i = 0; i < D; i++) begin
      lx[i] = layer_lx(F, D, i);
      lh[i] = layer_lh(F, D, i);
      wx[i] = new[4 * lh[i] * (lx[i] + 1)];
      wh[i] = new[4 * lh[i] * (lh[i] + 1)];
      foreach (wx[i][n]) wx[i][n] = r_rand(25);
      foreach (wh[i][n]) wh[i][n] = r_rand(25);
      for (int mat = 0; mat < 2; mat++) begin
        int cols;
        cols = (mat == 0) ? lx[i] + 1 : lh[i] + 1;
        for (int r = 0; r < 4 * lh[i]; r++)
          for (int j = 0; j < cols; j++) begin
            @(negedge clk);
            wl_valid = 1; wl_layer = 8'(i); wl_mat = mat[0];
            wl_row = 16'(r); wl_col = 16'(j);
            wl_data = (mat == 0) ? wx[i][r * cols + j] : wh[i][r * cols + j];
          end
      end
    end
    @(negedge clk) wl_valid = 0;
  endtask

  task automatic run(int T, bit stalled);
    int x [], y [], t0, took, acc_lat, latm;
    x = new[T * F];
    foreach (x[n]) begin
      x[n] = r_rand(26);
      mem.mem[n] = x[n];
    end
    for (int n = 0; n < T * F; n++) mem.mem[OUT_W + n] = 32'hBAD0BAD0;
    y = x;
    for (int i = 0; i < D; i++) begin
      int h [];
      r_lstm(lx[i], lh[i], T, wx[i], wh[i], y, h);
      y = h;
    end
    stall = stalled;
    @(negedge clk);
    seq_len = 16'(T); in_base = 32'h0; out_base = 32'(OUT_W * 4); start = 1;
    t0 = cyc;
    @(negedge clk) start = 0;
    while (!done) @(posedge clk);
    took = cyc - t0;
    @(negedge clk);
    for (int n = 0; n < T * F; n++)
      check(fix_t'(mem.mem[OUT_W + n]) == y[n],
            $sformatf("T=%0d out[%0d] got %h exp %h", T, n, mem.mem[OUT_W + n], y[n]));
    latm = lat_t_m(F, D, RHM);
    acc_lat = T * latm + (D - 1) * latm;
    $display("F%0d-D%0d RH_m=%0d T=%0d: %0d cycles start to done, Acc_Lat model %0d%s",
             F, D, RHM, T, took, acc_lat, stalled ? " (memory stalled)" : "");
    if (!stalled) begin
      check(took <= acc_lat + OVERHEAD, $sformatf("latency %0d > %0d + %0d", took, acc_lat, OVERHEAD));
      check(took >= T * latm, $sformatf("latency %0d below T*Lat_t_m", took));
    end
  endtask

  initial begin
    rst_n = 0; start = 0; seq_len = '0; in_base = '0; out_base = '0;
    wl_valid = 0; wl_layer = '0; wl_mat = 0; wl_row = '0; wl_col = '0; wl_data = '0;
    repeat (4) @(posedge clk);
    @(negedge clk) rst_n = 1;
    load_layers();
    for (int r = 0; r < NRUN; r++) run(RUNS[r], r != 0);
    finished = 1;
  end
endmodule
