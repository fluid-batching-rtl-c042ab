// tb_exit_decision: self-checking test of the early-exit decision.
// Random confidences and batch sizes; checks the exit mask and B_exit
// against the 0.8 threshold (205 in Q8.8), the exact threshold value, and
// that the final exit releases every active sample.
module tb_exit_decision;
  import fb_pkg::*;
  localparam int BM = 8;
  data_t conf [BM]; logic [3:0] b_act; logic final_exit;
  logic [BM-1:0] exit_mask; logic [3:0] b_exit;
  int checks = 0, failures = 0;

  exit_decision #(.B_MAX(BM)) dut (.*);

  task automatic chk(input logic ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int n = 0; n < 2000; n++) begin
      automatic int cnt = 0; automatic logic [BM-1:0] m = '0;
      b_act = 4'($urandom_range(BM)); final_exit = ($urandom_range(9) == 0);
      for (int s = 0; s < BM; s++) begin
        conf[s] = data_t'($urandom_range(400)) - data_t'(100);
        if (n == 0) conf[s] = data_t'(204 + (s % 2));   // 204 stays, 205 exits
        if (s < b_act && (final_exit || conf[s] >= 205)) begin m[s] = 1; cnt++; end
      end
      #1;
      chk(exit_mask == m && int'(b_exit) == cnt, $sformatf("n=%0d mask=%b ref=%b", n, exit_mask, m));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
