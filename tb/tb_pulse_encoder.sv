// tb_pulse_encoder: for values across [-1, 1] (and beyond, to test the clip) checks that
// the programming pulse is one contiguous run of exactly n cycles starting the cycle after
// start, with n = round(-TICKS_PER_TAU * ln(1 - i/2**P_BITS)), i = round(p * 2**P_BITS),
// p = (v + 1)/2, worked out here in floating point; that done follows the last tick; and
// that the resulting switching probability 1 - exp(-n/TICKS_PER_TAU) is within one table
// step of p.
module tb_pulse_encoder;
  import sc_pkg::*;
  localparam int P_BITS = 8, TPT = 64;
  logic clk = 0, rst_n = 0, start = 0, prog, busy, done;
  val_t value;
  pw_t  width;
  int checks = 0, failures = 0, cycles = 0;

  pulse_encoder #(.P_BITS(P_BITS), .TICKS_PER_TAU(TPT)) dut (
    .clk, .rst_n, .start, .value, .prog, .busy, .done, .width);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  function automatic int expected_n(int v);
    real p, n;
    int  i;
    if (v > VAL_ONE) v = VAL_ONE;
    if (v < -VAL_ONE) v = -VAL_ONE;
    p = (real'(v) / real'(VAL_ONE) + 1.0) / 2.0;
    i = int'($floor(p * 256.0 + 0.5));
    if (i > 255) i = 255;
    n = -real'(TPT) * $ln(1.0 - real'(i) / 256.0);
    return int'($floor(n + 0.5));
  endfunction

  task automatic run(int v);
    int n_exp, n_prog, t_first, t_last, t_done, t0;
    n_exp = expected_n(v);
    @(negedge clk); value = val_t'(v); start = 1;
    @(posedge clk); t0 = cycles;
    @(negedge clk); start = 0;
    n_prog = 0; t_first = -1; t_last = -1; t_done = -1;
    while (t_done < 0 && cycles < t0 + 2000) begin
      @(posedge clk);
      if (prog) begin
        n_prog++;
        if (t_first < 0) t_first = cycles;
        t_last = cycles;
      end
      if (done) t_done = cycles;
    end
    checks++;
    if (n_prog != n_exp) begin
      failures++;
      $display("v=%0d: %0d pulse ticks, expected %0d", v, n_prog, n_exp);
    end
    checks++;
    if (n_exp > 0 && (t_first != t0 + 1 || t_last - t_first + 1 != n_prog || t_done != t_last + 1)) begin
      failures++;
      $display("v=%0d: pulse timing first=%0d last=%0d done=%0d start=%0d", v, t_first, t_last, t_done, t0);
    end else if (n_exp == 0 && t_done != t0 + 1) begin
      failures++;
      $display("v=%0d: zero-length pulse, done at %0d", v, t_done);
    end
    // probability realised by the pulse vs. wanted
    if (v > -VAL_ONE && v < VAL_ONE - 512) begin
      real p, pr;
      p  = (real'(v) / real'(VAL_ONE) + 1.0) / 2.0;
      pr = 1.0 - $exp(-real'(n_prog) / real'(TPT));
      checks++;
      if (pr - p > 0.0125 || p - pr > 0.0125) begin
        failures++;
        $display("v=%0d: probability %f, wanted %f", v, pr, p);
      end
    end
  endtask

  initial begin
    value = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(-VAL_ONE); run(VAL_ONE); run(0); run(VAL_ONE/2); run(-VAL_ONE/2);
    run(-2*VAL_ONE); run(VAL_ONE + 100);
    for (int k = 0; k < 200; k++) run(int'($urandom % (2*VAL_ONE + 1)) - VAL_ONE);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cycles == 200000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
