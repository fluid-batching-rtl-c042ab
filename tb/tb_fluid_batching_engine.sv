// tb_fluid_batching_engine: self-checking test of the CU + FBCB pair.
// Fills the FBCB with a random policy for every (layer, batch size), then
// drives a random stream of starts, layer ends, exits and preemptions and
// checks B_act, l and the emitted policy <B_R, B_P, k> against a reference
// model of the register file and the table after every event.
module tb_fluid_batching_engine;
  import fb_pkg::*;
  localparam int L = 12, BM = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, preempt = 0, layer_done = 0, exit_evt = 0;
  logic [3:0] b_incr = 0, b_exit = 0;
  logic cfg_we = 0; logic [3:0] cfg_layer = 0; logic [3:0] cfg_bsize = 0, cfg_br = 0;
  pe_mode_e cfg_k = K_ONE;
  logic [3:0] b_act, b_old, layer, l_old, pol_br, pol_bp;
  logic parked, merge, preempt_err; pe_mode_e pol_k;
  int checks = 0, failures = 0, n_merge = 0, n_pre = 0;
  int t_br [L][BM]; pe_mode_e t_k [L][BM];
  int m_b, m_l, m_bo, m_lo; bit m_park;

  fluid_batching_engine #(.N_LAYERS(L), .B_MAX(BM)) dut (.*);

  task automatic chk(input logic ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int l = 0; l < L; l++) for (int b = 1; b <= BM; b++) begin
      @(negedge clk);
      t_br[l][b-1] = $urandom_range(b, 1); t_k[l][b-1] = pe_mode_e'($urandom_range(2));
      cfg_we = 1; cfg_layer = 4'(l); cfg_bsize = 4'(b); cfg_br = 4'(t_br[l][b-1]); cfg_k = t_k[l][b-1];
    end
    @(negedge clk) cfg_we = 0;
    m_b = 0; m_l = 0; m_bo = 0; m_lo = 0; m_park = 0;
    for (int n = 0; n < 3000; n++) begin
      automatic int op = $urandom_range(9);
      @(negedge clk);
      if (op == 0 || m_l >= L - 1) begin
        start = 1; b_incr = 4'($urandom_range(BM, 1));
        m_b = b_incr; m_l = 0; m_park = 0;
      end else if (op == 1 && !m_park && m_b < BM) begin
        preempt = 1; b_incr = 4'($urandom_range(BM - m_b, 1));
        m_bo = m_b; m_lo = m_l; m_b = b_incr; m_l = 0; m_park = 1; n_pre++;
      end else if (op < 5) begin
        layer_done = 1; exit_evt = 1; b_exit = 4'($urandom_range(m_b));
        if (m_park && m_l + 1 == m_lo) begin m_b = m_bo + m_b - b_exit; m_park = 0; n_merge++; end
        else m_b = m_b - b_exit;
        m_l++;
      end else begin
        layer_done = 1; m_l++;
      end
      @(negedge clk);
      start = 0; preempt = 0; layer_done = 0; exit_evt = 0;
      chk(int'(b_act) == m_b && int'(layer) == m_l && parked == m_park, $sformatf("state n=%0d b=%0d/%0d l=%0d/%0d", n, b_act, m_b, layer, m_l));
      if (m_b > 0 && m_l < L)
        chk(int'(pol_br) == t_br[m_l][m_b-1] && int'(pol_bp) == m_b - t_br[m_l][m_b-1] + 1 && pol_k == t_k[m_l][m_b-1],
            $sformatf("policy l=%0d b=%0d", m_l, m_b));
    end
    chk(n_merge > 10 && n_pre > 10, "merges and preemptions happened");
    $display("merges=%0d preemptions=%0d", n_merge, n_pre);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
