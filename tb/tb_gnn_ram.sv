// tb_gnn_ram: self-checking test of the simple dual-port RAM.
// Writes random words to every address, reads them back with and without
// gaps, checks the one-cycle read latency, that rdata holds while re is low,
// and that a read of an address written in the same cycle returns the old word.
module tb_gnn_ram;
  localparam int W = 24, D = 13;
  logic clk = 0, we = 0, re = 0;
  logic [3:0] waddr = 0, raddr = 0;
  logic [W-1:0] wdata = 0, rdata;
  logic [W-1:0] model [D];
  int checks = 0, failures = 0;

  gnn_ram #(.WIDTH(W), .DEPTH(D)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input logic [W-1:0] exp, input string what);
    checks++;
    if (rdata !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, rdata, exp);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    for (int a = 0; a < D; a++) begin
      @(negedge clk); we = 1; waddr = 4'(a); wdata = W'($urandom); model[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int r = 0; r < 40; r++) begin
      int a = $urandom_range(D - 1);
      @(negedge clk); re = 1; raddr = 4'(a);
      @(negedge clk); re = 0;
      check(model[a], "read");
      @(negedge clk);
      check(model[a], "hold");
    end
    // read and write the same address in one cycle: old word comes out
    @(negedge clk); re = 1; raddr = 4'd5; we = 1; waddr = 4'd5; wdata = ~model[5];
    @(negedge clk); re = 0; we = 0;
    check(model[5], "read-during-write");
    model[5] = ~model[5];
    @(negedge clk); re = 1; raddr = 4'd5;
    @(negedge clk); re = 0;
    check(model[5], "after write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
