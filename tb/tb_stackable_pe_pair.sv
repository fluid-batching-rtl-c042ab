// tb_stackable_pe_pair: self-checking test of a Stackable-PE pair.
// Random operands in all three configurations: k = 1 gives two T_P-wide dot
// products, k = 2 one 2*T_P-wide dot product through the shared adder,
// k = 1/2 four floor(T_P/2)-wide dot products. Run at the default T_P = 7,
// where k = 1/2 leaves the last lane unused.
module tb_stackable_pe_pair;
  import fb_pkg::*;
  localparam int TP = 7, H = TP / 2;
  pe_mode_e k; data_t a0 [TP], w0 [TP], a1 [TP], w1 [TP];
  acc_t y [4]; logic [3:0] y_valid;
  int checks = 0, failures = 0;

  stackable_pe_pair #(.T_P(TP)) dut (.*);

  task automatic chk(input logic ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask
  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int n = 0; n < 3000; n++) begin
      automatic longint s0 = 0, s1 = 0, l0 = 0, h0 = 0, l1 = 0, h1 = 0;
      k = pe_mode_e'(n % 3);
      for (int j = 0; j < TP; j++) begin
        a0[j] = data_t'($urandom); w0[j] = data_t'($urandom);
        a1[j] = data_t'($urandom); w1[j] = data_t'($urandom);
        if (n % 5 == 0) begin a0[j] = 16'sh7fff; w0[j] = 16'sh8000; end
        s0 += longint'(a0[j]) * longint'(w0[j]);
        s1 += longint'(a1[j]) * longint'(w1[j]);
        if (j < H) begin l0 += longint'(a0[j]) * longint'(w0[j]); l1 += longint'(a1[j]) * longint'(w1[j]); end
        else if (j < 2 * H) begin h0 += longint'(a0[j]) * longint'(w0[j]); h1 += longint'(a1[j]) * longint'(w1[j]); end
      end
      #1;
      case (k)
        K_ONE:  chk(y_valid == 4'b0011 && y[0] == acc_t'(s0) && y[1] == acc_t'(s1), "k=1");
        K_TWO:  chk(y_valid == 4'b0001 && y[0] == acc_t'(s0 + s1), "k=2");
        K_HALF: chk(y_valid == 4'b1111 && y[0] == acc_t'(l0) && y[1] == acc_t'(h0) &&
                    y[2] == acc_t'(l1) && y[3] == acc_t'(h1), "k=1/2");
        default: ;
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
