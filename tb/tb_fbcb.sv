// tb_fbcb: self-checking test of the Fluid Batching Control Block.
// Checks the reset policy (R-batching: B_R = b, B_P = 1, k = 1), random
// writes read back through every (layer, batch size), B_P = B_act - B_R + 1,
// clamping of B_R above the batch size, and the all-zero policy for B_act = 0.
module tb_fbcb;
  import fb_pkg::*;
  localparam int L = 62, BM = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cfg_we = 0; logic [5:0] cfg_layer = 0; logic [3:0] cfg_bsize = 0, cfg_br = 0;
  pe_mode_e cfg_k = K_ONE;
  logic [5:0] rd_layer = 0; logic [3:0] rd_bact = 0;
  logic [3:0] br, bp; pe_mode_e k;
  int checks = 0, failures = 0;
  int ref_br [L][BM]; pe_mode_e ref_k [L][BM];

  fbcb #(.N_LAYERS(L), .B_MAX(BM)) dut (.*);

  task automatic chk(input logic ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk);
    for (int l = 0; l < L; l++) for (int b = 1; b <= BM; b++) begin
      ref_br[l][b-1] = b; ref_k[l][b-1] = K_ONE;
    end
    // reset state
    for (int l = 0; l < L; l += 7) for (int b = 1; b <= BM; b++) begin
      rd_layer = 6'(l); rd_bact = 4'(b); #1;
      chk(br == 4'(b) && bp == 1 && k == K_ONE, $sformatf("reset l=%0d b=%0d", l, b));
    end
    // random writes
    for (int n = 0; n < 400; n++) begin
      automatic int l = $urandom_range(L-1), b = $urandom_range(BM, 1), r = $urandom_range(BM, 1);
      automatic pe_mode_e kk = pe_mode_e'($urandom_range(2));
      @(negedge clk);
      cfg_we = 1; cfg_layer = 6'(l); cfg_bsize = 4'(b); cfg_br = 4'(r); cfg_k = kk;
      @(negedge clk); cfg_we = 0;
      ref_br[l][b-1] = (r > b) ? b : r; ref_k[l][b-1] = kk;
    end
    for (int l = 0; l < L; l++) for (int b = 1; b <= BM; b++) begin
      rd_layer = 6'(l); rd_bact = 4'(b); #1;
      chk(int'(br) == ref_br[l][b-1] && int'(bp) == b - ref_br[l][b-1] + 1 && k == ref_k[l][b-1],
          $sformatf("read l=%0d b=%0d br=%0d bp=%0d k=%0d", l, b, br, bp, k));
    end
    rd_bact = 0; #1;
    chk(br == 0 && bp == 0, "bact=0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
