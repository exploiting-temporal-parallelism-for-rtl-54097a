// tb_stream_fifo -- self-checking test of the stream FIFO.
//
// Pushes a numbered word sequence through a 3-deep FIFO under random
// valid and ready and checks order and content against a queue. Then
// checks the timing: a word pushed into an empty FIFO is visible one
// cycle later, a full FIFO refuses a push unless it is popped in the same
// cycle, and with both sides always active one word passes per cycle.
module tb_stream_fifo;
  localparam int W = 16, DEPTH = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [W-1:0] in_data = '0, out_data;

  stream_fifo #(.WIDTH(W), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  logic [W-1:0] model [$];
  int n_in = 0, n_out = 0;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // random traffic
    while (n_out < 300) begin
      @(negedge clk);
      in_valid  = (n_in < 300) && $urandom_range(1);
      in_data   = W'(n_in * 7 + 3);
      out_ready = $urandom_range(1);
      @(posedge clk);
      if (out_valid && out_ready) begin
        check(model.size() > 0 && out_data == model[0], "order/content");
        if (model.size() > 0) void'(model.pop_front());
        n_out++;
      end
      if (in_valid && in_ready) begin model.push_back(in_data); n_in++; end
      check(model.size() <= DEPTH, "occupancy bound");
    end
    // timing: empty -> one push -> visible next cycle
    @(negedge clk); in_valid = 1; in_data = 16'hABCD; out_ready = 0;
    @(negedge clk); in_valid = 0;
    check(out_valid && out_data == 16'hABCD, "fall-through after one cycle");
    // fill up
    in_valid = 1; in_data = 16'h1111;
    @(negedge clk); in_data = 16'h2222;
    @(negedge clk); in_data = 16'h3333;
    #1 check(!in_ready, "full FIFO refuses a push");
    out_ready = 1;
    #1 check(in_ready, "full FIFO accepts a push with a pop");
    @(negedge clk);
    check(out_data == 16'h1111, "order after full pass");
    // streaming: one word per cycle
    for (int i = 0; i < 10; i++) begin
      in_data = 16'(100 + i);
      #1 check(in_ready && out_valid, "one word per cycle");
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
