// tb_sdp_ram -- self-checking test of the simple dual-port RAM.
// Writes random words, reads them back through the registered port, checks that
// rdata holds while re is low and that a same-edge read/write returns the old word.
module tb_sdp_ram;
  localparam int W = 16, D = 64;
  logic clk = 0, we = 0, re = 0;
  logic [5:0] waddr = '0, raddr = '0;
  logic [W-1:0] wdata = '0, rdata;
  logic [W-1:0] model [D];
  int checks = 0, failures = 0;

  sdp_ram #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(logic [W-1:0] exp, string what);
    checks++;
    if (rdata !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, rdata, exp);
    end
  endtask

  initial begin
    // fill
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      we = 1; waddr = 6'(a); wdata = W'($urandom); model[a] = wdata;
    end
    @(negedge clk); we = 0;
    // random reads
    for (int n = 0; n < 200; n++) begin
      int a;
      a = $urandom_range(D - 1);
      @(negedge clk); re = 1; raddr = 6'(a);
      @(negedge clk); re = 0;
      check(model[a], "read");
      // hold while re is low, even when the address moves
      raddr = 6'(a + 1 + $urandom_range(D - 2));
      @(negedge clk);
      check(model[a], "hold");
    end
    // read-before-write collision
    for (int n = 0; n < 50; n++) begin
      int a;
      logic [W-1:0] nw;
      a = $urandom_range(D - 1);
      nw = W'($urandom);
      @(negedge clk); re = 1; raddr = 6'(a); we = 1; waddr = 6'(a); wdata = nw;
      @(negedge clk); re = 0; we = 0;
      check(model[a], "collision old");
      model[a] = nw;
      @(negedge clk); re = 1; raddr = 6'(a);
      @(negedge clk); re = 0;
      check(model[a], "collision new");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
