// tb_sync_fifo: self-checking test of the handshake / instruction FIFO.
// Random push and pop (pop only when not empty, push only when not full)
// against a queue model; checks first-word fall-through data, full, empty
// and count every cycle, and that a push into an empty FIFO is visible on
// the next cycle (one-cycle latency).
// The test values and stimulus are this testbench's own choice; the expected
// behaviour follows the architecture described in the design notes of the
// module under test.
`timescale 1ns/1ps
module tb_sync_fifo;
  localparam int W = 8, D = 4;
  logic clk = 0, rst_n = 1'b1;
  // the reset falls at 1 ns, before the first clock edge, so that no flop is
  // clocked with its power-on value
  initial #1 rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic push, pop, full, empty;
  logic [W-1:0] wr_data, rd_data;
  logic [$clog2(D+1)-1:0] count;
  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);
  logic [W-1:0] q[$];

  initial begin
    #1_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", msg, $time); end
  endtask

  initial begin
    push = 0; pop = 0; wr_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(empty && !full && count == 0, "reset state");
    // latency: push into empty, visible next cycle
    push = 1; wr_data = 8'hA5;
    @(negedge clk);
    push = 0; q.push_back(8'hA5);
    chk(!empty && rd_data == 8'hA5, "one-cycle latency");
    for (int i = 0; i < 2000; i++) begin
      push = ($urandom % 3 != 0) && !full;
      pop  = ($urandom % 2 == 0) && !empty;
      wr_data = W'($urandom);
      @(posedge clk);
      if (pop) void'(q.pop_front());
      if (push) q.push_back(wr_data);
      @(negedge clk);
      chk(count == q.size(), "count");
      chk(empty == (q.size() == 0), "empty");
      chk(full == (q.size() == D), "full");
      if (q.size() > 0) chk(rd_data == q[0], "data order");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
