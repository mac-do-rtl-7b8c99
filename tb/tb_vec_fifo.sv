// tb_vec_fifo: self-checking test of the vector FIFO used for the input,
// weight and output buffers. Random pushes and pops against a reference
// queue; checks data order, full/empty flags and the fill level.
module tb_vec_fifo;
  localparam int WIDTH = 12;
  localparam int DEPTH = 4;
  logic clk = 0, rst = 1;
  logic push_valid = 0, pop_ready = 0;
  logic push_ready, pop_valid;
  logic [WIDTH-1:0] push_data = '0, pop_data;
  logic [$clog2(DEPTH+1)-1:0] level;
  int checks = 0, failures = 0;
  logic [WIDTH-1:0] q [$];

  vec_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int fulls = 0, empties = 0;
  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      // state checks before this cycle's edge
      check(pop_valid == (q.size() != 0), "pop_valid");
      check(push_ready == (q.size() != DEPTH), "push_ready");
      check(int'(level) == q.size(), "level");
      if (q.size() != 0) check(pop_data == q[0], "pop_data");
      if (q.size() == DEPTH) fulls++;
      if (q.size() == 0) empties++;
      // phases of mostly-push and mostly-pop traffic
      push_valid = ($urandom_range(0, 99) < ((i / 100) % 2 ? 80 : 30));
      pop_ready  = ($urandom_range(0, 99) < ((i / 100) % 2 ? 30 : 80));
      push_data  = WIDTH'($urandom);
      @(posedge clk);
      if (pop_valid && pop_ready) void'(q.pop_front());
      if (push_valid && push_ready) q.push_back(push_data);
    end
    check(fulls > 0, "buffer reached full");
    check(empties > 0, "buffer reached empty");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
