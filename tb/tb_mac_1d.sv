// tb_mac_1d: self-checking test of one MAC array.
// Random signed/unsigned 8-bit vectors and exponents; the dot product and the
// exponent sum are compared with a plain integer loop.
module tb_mac_1d;
  import trigen_pkg::*;
  localparam int N = 32;
  logic signed [A_W-1:0] ifm [N], w [N];
  logic [7:0] ifm_exp, w_exp;
  logic signed [2*A_W+$clog2(N)-1:0] sum;
  logic signed [9:0] exp_sum;
  int checks = 0, failures = 0;

  trigen_mac_1d #(.N(N)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint ref_s;
    for (int it = 0; it < 500; it++) begin
      ref_s = 0;
      for (int i = 0; i < N; i++) begin
        // extremes in the first iterations, random after that
        if (it == 0) begin ifm[i] = -9'sd128; w[i] = -9'sd128; end
        else if (it == 1) begin ifm[i] = 9'sd255; w[i] = 9'sd255; end
        else begin
          ifm[i] = A_W'($signed($urandom_range(0, 383)) - 128);
          w[i]   = A_W'($signed($urandom_range(0, 383)) - 128);
        end
        ref_s += longint'(ifm[i]) * longint'(w[i]);
      end
      ifm_exp = 8'($urandom_range(100, 150));
      w_exp   = (it % 3 == 0) ? 8'd127 : 8'($urandom_range(100, 150));
      #1;
      checks++;
      if (longint'(sum) != ref_s || int'(exp_sum) != int'(ifm_exp) + int'(w_exp) - 127) begin
        failures++;
        if (failures < 5) $display("FAIL it=%0d sum=%0d ref=%0d exp=%0d", it, sum, ref_s, exp_sum);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
