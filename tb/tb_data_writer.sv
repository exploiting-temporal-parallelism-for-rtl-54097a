// tb_data_writer -- self-checking test of the data writer.
//
// Streams seq_len*F random elements into the writer under random input
// gaps and random write-channel stalls. Afterwards the memory model must
// hold the elements at base + 4*n, no other word may have changed, done
// must have pulsed exactly once and busy must be low. Extra input offered
// after the sequence must not be taken.
module tb_data_writer;
  import lstm_ae_pkg::*;

  localparam int F = 4, T = 6, WORDS = 256;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, busy, done;
  logic [31:0] base_addr = '0;
  logic [15:0] seq_len = '0;
  logic in_valid = 0, in_ready;
  fix_t in_data = '0;
  logic wr_valid, wr_ready;
  logic [31:0] wr_addr;
  fix_t wr_data;
  logic rd_req_ready, rd_resp_valid;
  logic [31:0] rd_resp_data;

  data_writer #(.F(F)) dut (.*);
  tb_dram #(.WORDS(WORDS), .STALL(1'b1)) mem (
    .clk, .stall(1'b1), .rd_req_valid(1'b0), .rd_req_ready, .rd_req_addr(32'h0),
    .rd_resp_valid, .rd_resp_ready(1'b0), .rd_resp_data,
    .wr_valid, .wr_ready, .wr_addr, .wr_data);

  int checks = 0, failures = 0, n_done = 0;
  int X [T*F];
  always @(posedge clk) if (rst_n && done) n_done++;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n, extra;
    n = 0; extra = 0;
    for (int i = 0; i < WORDS; i++) mem.mem[i] = 32'hDEAD0000 + 32'(i);
    for (int i = 0; i < T * F; i++) X[i] = $urandom();
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    base_addr = 32'h80; seq_len = 16'(T); start = 1;
    @(negedge clk);
    start = 0;
    // offer the sequence and then 8 cycles of extra words
    for (int cy = 0; cy < 2000 && extra < 8; cy++) begin
      in_valid = $urandom_range(2) != 0;
      in_data  = (n < T * F) ? X[n] : 32'h5A5A5A5A;
      @(posedge clk);
      if (in_valid && in_ready) begin
        if (n >= T * F) begin failures++; $display("extra element taken"); end
        n++;
      end
      @(negedge clk);
      if (n >= T * F) extra++;
    end
    checks++;
    if (n != T * F) begin failures++; $display("%0d elements taken, expected %0d", n, T * F); end
    in_valid = 0;
    repeat (4) @(negedge clk);
    for (int i = 0; i < WORDS; i++) begin
      logic [31:0] e;
      e = (i >= 32 && i < 32 + T * F) ? X[i - 32] : 32'hDEAD0000 + 32'(i);
      checks++;
      if (mem.mem[i] != e) begin
        failures++;
        $display("word %0d: got %h exp %h", i, mem.mem[i], e);
      end
    end
    checks++;
    if (n_done != 1 || busy) begin failures++; $display("done=%0d busy=%0d", n_done, busy); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
