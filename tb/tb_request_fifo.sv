// tb_request_fifo: self-checking test of the request queue.
// Random pushes and pops against a reference queue: head ID and arrival
// time, count (N_Q), full and empty, push-when-full and pop-when-empty.
module tb_request_fifo;
  localparam int D = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [31:0] now = 0;
  logic push = 0, pop = 0; logic [15:0] push_id = 0;
  logic [15:0] head_id; logic [31:0] head_time; logic [3:0] count; logic full, empty;
  int checks = 0, failures = 0, n_full = 0;
  int qi[$]; int qt[$];

  request_fifo #(.DEPTH(D)) dut (.*);
  always @(posedge clk) now <= now + 1;

  task automatic chk(input logic ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      automatic bit was_full, was_empty; automatic int t;
      @(negedge clk);
      push = ($urandom_range(99) < (n < 1500 ? 60 : 40)); pop = ($urandom_range(99) < 50);
      push_id = 16'($urandom);
      was_full = (qi.size() == D); was_empty = (qi.size() == 0); t = now;
      chk(full == was_full && empty == was_empty && int'(count) == qi.size(), "flags");
      if (!was_empty) chk(int'(head_id) == qi[0] && int'(head_time) == qt[0], "head");
      if (was_full) n_full++;
      @(posedge clk); #1;
      if (pop && !was_empty) begin void'(qi.pop_front()); void'(qt.pop_front()); end
      if (push && !was_full) begin qi.push_back(push_id); qt.push_back(t); end
    end
    chk(n_full > 0, "queue filled up at least once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
