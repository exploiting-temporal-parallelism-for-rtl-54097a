// data_reader -- streams one input sequence from external memory into the
// first FIFO of the accelerator.
//
// On a start pulse it latches base_addr and seq_len and issues seq_len*F
// read requests for consecutive 32-bit words (byte addresses base_addr,
// base_addr+4, ...), the sequence being stored timestep-major: word t*F+f
// is feature f of timestep t. Read data come back in request order on the
// response channel and are forwarded to out_* unchanged, so the response
// channel is back-pressured directly by the FIFO. Requests and responses
// are separate valid/ready channels, so any number of reads may be in
// flight. busy is high from start until the last response has been passed
// on.
//
// The paper names this module and its job (streaming input sequences from
// DRAM); the memory channel protocol, addressing and layout are this
// design's choices, in the spirit of an AXI read master.
module data_reader
  import lstm_ae_pkg::*;
#(
  parameter int F      = 32,
  parameter int SEQ_W  = 16,
  parameter int ADDR_W = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] base_addr,
  input  logic [SEQ_W-1:0]  seq_len,
  output logic              busy,
  // memory read request / response
  output logic              rd_req_valid,
  input  logic              rd_req_ready,
  output logic [ADDR_W-1:0] rd_req_addr,
  input  logic              rd_resp_valid,
  output logic              rd_resp_ready,
  input  fix_t              rd_resp_data,
  // element stream out
  output logic              out_valid,
  input  logic              out_ready,
  output fix_t              out_data
);
  localparam int CNT_W = SEQ_W + $clog2(F) + 1;

  logic [CNT_W-1:0]  total, n_req, n_resp;
  logic [ADDR_W-1:0] addr;

  assign rd_req_valid  = busy && (n_req != total);
  assign rd_req_addr   = addr;
  assign out_valid     = busy && rd_resp_valid;
  assign out_data      = rd_resp_data;
  assign rd_resp_ready = busy && out_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      total  <= '0;
      n_req  <= '0;
      n_resp <= '0;
      addr   <= '0;
    end else if (!busy) begin
      if (start && seq_len != '0) begin
        busy   <= 1'b1;
        total  <= CNT_W'(seq_len) * CNT_W'(F);
        n_req  <= '0;
        n_resp <= '0;
        addr   <= base_addr;
      end
    end else begin
      if (rd_req_valid && rd_req_ready) begin
        n_req <= n_req + 1'b1;
        addr  <= addr + ADDR_W'(4);
      end
      if (rd_resp_valid && rd_resp_ready) begin
        n_resp <= n_resp + 1'b1;
        if (n_resp + 1'b1 == total) busy <= 1'b0;
      end
    end
  end

  a_req_hold: assert property (@(posedge clk) disable iff (!rst_n)
                               (rd_req_valid && !rd_req_ready) |=> (rd_req_valid && $stable(rd_req_addr)));

endmodule
