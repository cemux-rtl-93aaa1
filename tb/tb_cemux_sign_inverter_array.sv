// tb_cemux_sign_inverter_array: random input words against a per-bit reference:
// y_i = !x_i for negative weights, x_i otherwise (signs + - - + - + + -).
module tb_cemux_sign_inverter_array;
  localparam int M = 8;
  localparam cemux_pkg::neg_vec_t NEG = cemux_pkg::neg_vec_t'(8'b10010110);
  logic [M-1:0] x, y;
  int checks = 0, failures = 0;

  cemux_sign_inverter_array #(.M(M), .NEG(NEG)) dut (.x(x), .y(y));

  initial begin
    for (int t = 0; t < 300; t++) begin
      x = M'($urandom);
      #1;
      for (int i = 0; i < M; i++) begin
        checks++;
        if (y[i] != (NEG[i] ? !x[i] : x[i])) begin
          failures++;
          $display("FAIL: bit %0d x=%b y=%b", i, x, y);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
