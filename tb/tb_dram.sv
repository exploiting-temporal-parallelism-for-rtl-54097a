// tb_dram -- behavioural model of the external memory and its controller,
// for testbenches only (not synthesizable). A word-addressed array of
// WORDS 32-bit words behind the accelerator's read-request/response and
// write channels. Read responses come back in order, LAT cycles after
// their request, through a response queue; requests and write acceptance
// are throttled at random while STALL is set or the stall input is high,
// to exercise back-pressure.
// The testbench reads and writes the array directly through mem.
module tb_dram #(
  parameter int WORDS = 4096,
  parameter int LAT   = 4,
  parameter bit STALL = 1'b0
) (
  input  logic        clk,
  input  logic        stall,
  input  logic        rd_req_valid,
  output logic        rd_req_ready,
  input  logic [31:0] rd_req_addr,
  output logic        rd_resp_valid,
  input  logic        rd_resp_ready,
  output logic [31:0] rd_resp_data,
  input  logic        wr_valid,
  output logic        wr_ready,
  input  logic [31:0] wr_addr,
  input  logic [31:0] wr_data
);
  logic [31:0] mem [WORDS];
  localparam int QN = 16384;   // enough for every read of a sequence to be in flight
  logic [31:0] q_data [QN];
  longint      q_time [QN];
  int          q_wr = 0, q_rd = 0;
  longint      now = 0;
  int          n_wr = 0;

  always @(posedge clk) now <= now + 1;

  initial begin
    rd_req_ready = 0;
    wr_ready     = 0;
  end

  always @(negedge clk) begin
    rd_req_ready <= !(STALL || stall) || ($urandom_range(3) != 0);
    wr_ready     <= !(STALL || stall) || ($urandom_range(2) == 0);
  end

  always_comb begin
    rd_resp_valid = (q_rd != q_wr) && (q_time[q_rd % QN] <= now);
    rd_resp_data  = q_data[q_rd % QN];
  end

  always @(posedge clk) begin
    if (rd_resp_valid && rd_resp_ready) q_rd <= q_rd + 1;
    if (rd_req_valid && rd_req_ready) begin
      q_data[q_wr % QN] <= mem[(rd_req_addr >> 2) % WORDS];
      q_time[q_wr % QN] <= now + longint'(LAT);
      q_wr <= q_wr + 1;
    end
    if (wr_valid && wr_ready) begin
      mem[(wr_addr >> 2) % WORDS] <= wr_data;
      n_wr <= n_wr + 1;
    end
  end
endmodule
