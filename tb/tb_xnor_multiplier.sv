// tb_xnor_multiplier: checks the XNOR multiplier lane by lane against a bitwise reference
// on random vectors, and checks that the bipolar value of the product of two long
// independent streams is close to the product of their values.
module tb_xnor_multiplier;
  localparam int N = 4096;
  logic [N-1:0] a, b, y;
  int checks = 0, failures = 0;

  xnor_multiplier #(.N(N)) dut (.a, .b, .y);

  initial begin
    // exact lane check
    for (int it = 0; it < 20; it++) begin
      for (int i = 0; i < N; i++) begin
        a[i] = 1'($urandom);
        b[i] = 1'($urandom);
      end
      #1;
      for (int i = 0; i < N; i++) begin
        logic exp_b;
        exp_b = (a[i] == b[i]);
        checks++;
        if (y[i] !== exp_b) failures++;
      end
    end
    // bipolar product: pa = 0.8 (value 0.6), pb = 0.25 (value -0.5) -> -0.3
    for (int i = 0; i < N; i++) begin
      a[i] = ($urandom % 1000) < 800;
      b[i] = ($urandom % 1000) < 250;
    end
    #1;
    begin
      real v;
      v = 2.0 * real'($countones(y)) / real'(N) - 1.0;
      checks++;
      if (v < -0.36 || v > -0.24) begin
        failures++;
        $display("bipolar product %f, expected -0.3", v);
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
