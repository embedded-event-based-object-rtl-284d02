// tb_spike_fifo -- self-checking test of the token FIFO: random push/pop pressure
// against a queue model, full/empty flags, fill count and order.
module tb_spike_fifo;
  localparam int W = 27, D = 8;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [W-1:0] in_data = '0, out_data;
  logic [$clog2(D+1)-1:0] count;
  logic [W-1:0] q[$];
  int checks = 0, failures = 0, fulls = 0;

  spike_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      // phase-dependent pressure so the FIFO goes both full and empty
      in_valid  = ($urandom_range(99) < ((n / 500) % 2 ? 80 : 30));
      out_ready = ($urandom_range(99) < ((n / 500) % 2 ? 30 : 80));
      in_data   = W'($urandom);
      // checks on the current state
      checks++;
      if (count != $bits(count)'(q.size())) begin failures++; $display("FAIL count %0d vs %0d", count, q.size()); end
      checks++;
      if (in_ready != (q.size() < D)) begin failures++; $display("FAIL in_ready"); end
      checks++;
      if (out_valid != (q.size() > 0)) begin failures++; $display("FAIL out_valid"); end
      if (q.size() > 0) begin
        checks++;
        if (out_data !== q[0]) begin failures++; $display("FAIL data %h vs %h", out_data, q[0]); end
      end
      if (q.size() == D) fulls++;
      @(posedge clk);
      if (out_valid && out_ready) void'(q.pop_front());
      if (in_valid && in_ready) q.push_back(in_data);
    end
    checks++;
    if (fulls == 0) begin failures++; $display("FAIL never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
