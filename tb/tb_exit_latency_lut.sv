// tb_exit_latency_lut: self-checking test of the per-exit latency table.
// Writes a random latency for every (exit, batch size), reads all entries
// back on both ports, and checks that batch size 0 reads as zero.
module tb_exit_latency_lut;
  localparam int NE = 4, BM = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cfg_we = 0; logic [1:0] cfg_exit = 0; logic [3:0] cfg_bsize = 0; logic [31:0] cfg_lat = 0;
  logic [1:0] rd_exit_a = 0, rd_exit_b = 0; logic [3:0] rd_b_a = 0, rd_b_b = 0;
  logic [31:0] lat_a, lat_b;
  int checks = 0, failures = 0;
  logic [31:0] ref_t [NE][BM];

  exit_latency_lut #(.N_EXITS(NE), .B_MAX(BM)) dut (.*);

  task automatic chk(input logic ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int e = 0; e < NE; e++) for (int b = 1; b <= BM; b++) begin
      @(negedge clk);
      ref_t[e][b-1] = $urandom; cfg_we = 1; cfg_exit = 2'(e); cfg_bsize = 4'(b); cfg_lat = ref_t[e][b-1];
    end
    @(negedge clk) cfg_we = 0;
    for (int e = 0; e < NE; e++) for (int b = 1; b <= BM; b++) begin
      rd_exit_a = 2'(e); rd_b_a = 4'(b); rd_exit_b = 2'(NE-1-e); rd_b_b = 4'(BM+1-b); #1;
      chk(lat_a == ref_t[e][b-1], "port a");
      chk(lat_b == ref_t[NE-1-e][BM-b], "port b");
    end
    rd_b_a = 0; #1 chk(lat_a == 0, "b=0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
