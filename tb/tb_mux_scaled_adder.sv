// tb_mux_scaled_adder: checks the multiplexer lane by lane on random vectors and that, with
// a select stream of one-probability 1/2, the bipolar value of the output is half the sum
// of the input values.
module tb_mux_scaled_adder;
  localparam int N = 4096;
  logic [N-1:0] a, b, sel, y;
  int checks = 0, failures = 0;

  mux_scaled_adder #(.N(N)) dut (.a, .b, .sel, .y);

  initial begin
    for (int it = 0; it < 20; it++) begin
      for (int i = 0; i < N; i++) begin
        a[i] = 1'($urandom); b[i] = 1'($urandom); sel[i] = 1'($urandom);
      end
      #1;
      for (int i = 0; i < N; i++) begin
        checks++;
        if (y[i] !== (sel[i] ? a[i] : b[i])) failures++;
      end
    end
    // a: value -0.8 (p 0.1), b: value 0.4 (p 0.7), sel p 0.5 -> (-0.8+0.4)/2 = -0.2
    for (int i = 0; i < N; i++) begin
      a[i] = ($urandom % 1000) < 100;
      b[i] = ($urandom % 1000) < 700;
      sel[i] = 1'($urandom);
    end
    #1;
    begin
      real v;
      v = 2.0 * real'($countones(y)) / real'(N) - 1.0;
      checks++;
      if (v < -0.26 || v > -0.14) begin
        failures++;
        $display("scaled sum %f, expected -0.2", v);
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
