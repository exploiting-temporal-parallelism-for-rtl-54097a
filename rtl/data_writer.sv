// data_writer -- stores the output sequence of the last LSTM layer to
// external memory.
//
// On a start pulse it latches base_addr and seq_len and then writes the
// next seq_len*F elements of its input stream to consecutive 32-bit words
// (byte addresses base_addr, base_addr+4, ...), timestep-major like the
// input. Each element becomes one write on a valid/ready write channel
// carrying address and data together; an element is taken from the input
// FIFO in the cycle its write is accepted. done pulses for one cycle with
// the last accepted write; busy is high from start until then.
//
// The paper names this module and its job (storing processed outputs back
// into DRAM); the channel protocol and layout are this design's choices.
module data_writer
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
  output logic              done,
  // element stream in
  input  logic              in_valid,
  output logic              in_ready,
  input  fix_t              in_data,
  // memory write channel
  output logic              wr_valid,
  input  logic              wr_ready,
  output logic [ADDR_W-1:0] wr_addr,
  output fix_t              wr_data
);
  localparam int CNT_W = SEQ_W + $clog2(F) + 1;

  logic [CNT_W-1:0]  total, n_wr;
  logic [ADDR_W-1:0] addr;

  assign wr_valid = busy && in_valid;
  assign wr_addr  = addr;
  assign wr_data  = in_data;
  assign in_ready = busy && wr_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      total <= '0;
      n_wr  <= '0;
      addr  <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start && seq_len != '0) begin
          busy  <= 1'b1;
          total <= CNT_W'(seq_len) * CNT_W'(F);
          n_wr  <= '0;
          addr  <= base_addr;
        end
      end else if (wr_valid && wr_ready) begin
        n_wr <= n_wr + 1'b1;
        addr <= addr + ADDR_W'(4);
        if (n_wr + 1'b1 == total) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
