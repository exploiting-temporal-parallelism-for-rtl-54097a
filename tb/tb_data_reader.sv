// tb_data_reader -- self-checking test of the data reader.
//
// Two sequences are read from the memory model (with random request
// stalls and a 4-cycle read latency) while the output stream is
// back-pressured at random. Every element must equal the memory word at
// base + 4*n, exactly seq_len*F requests must be issued, and busy must
// fall after the last element. A second read then checks restart.
module tb_data_reader;
  import lstm_ae_pkg::*;

  localparam int F = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, busy;
  logic [31:0] base_addr = '0;
  logic [15:0] seq_len = '0;
  logic rd_req_valid, rd_req_ready, rd_resp_valid, rd_resp_ready;
  logic [31:0] rd_req_addr;
  fix_t rd_resp_data;
  logic out_valid, out_ready = 0;
  fix_t out_data;
  logic wr_ready;

  data_reader #(.F(F)) dut (.*);
  tb_dram #(.WORDS(1024), .LAT(4), .STALL(1'b1)) mem (
    .clk, .stall(1'b1), .rd_req_valid, .rd_req_ready, .rd_req_addr,
    .rd_resp_valid, .rd_resp_ready, .rd_resp_data,
    .wr_valid(1'b0), .wr_ready, .wr_addr(32'h0), .wr_data(32'h0));

  int checks = 0, failures = 0, n_req = 0;
  always @(posedge clk) if (rd_req_valid && rd_req_ready) n_req++;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int base, int T);
    int n = 0;
    n_req = 0;
    @(negedge clk);
    base_addr = 32'(base); seq_len = 16'(T); start = 1;
    @(negedge clk);
    start = 0;
    while (n < T * F) begin
      out_ready = $urandom_range(2) != 0;
      @(posedge clk);
      if (out_valid && out_ready) begin
        checks++;
        if (out_data != fix_t'(mem.mem[base / 4 + n])) begin
          failures++;
          $display("element %0d: got %h exp %h", n, out_data, mem.mem[base / 4 + n]);
        end
        n++;
      end
      @(negedge clk);
    end
    out_ready = 0;
    repeat (5) @(negedge clk);
    checks++;
    if (busy || n_req != T * F) begin
      failures++;
      $display("busy=%0d requests=%0d expected %0d", busy, n_req, T * F);
    end
  endtask

  initial begin
    for (int i = 0; i < 1024; i++) mem.mem[i] = $urandom();
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(32'h100, 5);
    run(32'h400, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
