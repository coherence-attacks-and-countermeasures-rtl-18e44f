// tb_flit_fifo: self-checking test of the router's virtual-network buffer.
//
// Random pushes and pops (never a push when full nor a pop when empty, as
// the router guarantees) are compared with a queue model: the front entry,
// full and empty must match the model every cycle. Directed steps check
// that the buffer holds exactly DEPTH (4) flits and that a push and a pop
// in the same cycle keep the count.
module tb_flit_fifo;
  localparam int W = 16, D = 4;

  logic clk = 0, rst_n = 0;
  logic push = 0, pop = 0;
  logic [W-1:0] din = '0, front;
  logic full, empty;
  int checks = 0, failures = 0;
  logic [W-1:0] model[$];

  flit_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic compare();
    check(empty == (model.size() == 0), $sformatf("empty=%0d with %0d entries", empty, model.size()));
    check(full == (model.size() == D), $sformatf("full=%0d with %0d entries", full, model.size()));
    if (model.size() != 0) check(front == model[0], $sformatf("front %h expected %h", front, model[0]));
  endtask

  // one cycle with the given request; model updated at the clock edge
  task automatic step(input bit p, input bit q, input logic [W-1:0] d);
    @(negedge clk);
    push = p && !full; pop = q && !empty; din = d;
    @(posedge clk);
    if (pop) void'(model.pop_front());
    if (push) model.push_back(d);
    #1 compare();
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    #1 compare();
    for (int i = 0; i < D; i++) step(1, 0, W'(100 + i));
    check(full, "holds exactly four flits");
    step(0, 1, '0);
    step(1, 1, W'(200));
    check(!full && front == W'(102), "push and pop together keep the count");
    step(1, 0, W'(201));
    check(full, "full again");
    for (int i = 0; i < D; i++) step(0, 1, '0);
    check(empty, "drained");
    for (int n = 0; n < 5000; n++) step($urandom % 2, $urandom % 3 != 0, W'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
