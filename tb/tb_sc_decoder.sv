// tb_sc_decoder: feeds random parallel streams of random density to a decoder at its
// default size (16384 bits) and to a small one (512 bits), and checks the result against a
// count made here: clip(2**up_shift * (2c - N)/N) in Q1.14, the clip flag, and the latency
// of two cycles with one stream accepted per cycle.
module tb_sc_decoder;
  import sc_pkg::*;
  localparam int LA = 128, WA = 128, NA = LA*WA;
  localparam int LB = 8,   WB = 64,  NB = LB*WB;
  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [NA-1:0] bits_a;
  logic [NB-1:0] bits_b;
  logic [1:0] up_shift;
  logic ov_a, ov_b, sat_a, sat_b;
  val_t out_a, out_b;
  int checks = 0, failures = 0, cycles = 0;

  sc_decoder dut_a (.clk, .rst_n, .in_valid, .bits(bits_a), .up_shift,
                    .out_valid(ov_a), .out(out_a), .sat(sat_a));
  sc_decoder #(.LANES(LB), .LANE_W(WB)) dut_b (.clk, .rst_n, .in_valid, .bits(bits_b), .up_shift,
                    .out_valid(ov_b), .out(out_b), .sat(sat_b));

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  function automatic int ref_val(int c, int n, int sh);
    longint q;
    // floor((2c - n) * 2**14 / n) * 2**sh
    q = (longint'(2*c - n) * VAL_ONE);
    if (q >= 0) q = q / n; else q = -((-q + n - 1) / n);
    q = q * (1 << sh);
    if (q > VAL_ONE) q = VAL_ONE;
    if (q < -VAL_ONE) q = -VAL_ONE;
    return int'(q);
  endfunction

  function automatic logic ref_sat(int c, int n, int sh);
    longint q;
    q = (longint'(2*c - n) * VAL_ONE);
    if (q >= 0) q = q / n; else q = -((-q + n - 1) / n);
    q = q * (1 << sh);
    return (q > VAL_ONE) || (q < -VAL_ONE);
  endfunction

  // expected results in flight
  int exp_a[$], exp_b[$];
  logic exps_a[$], exps_b[$];

  initial begin
    bits_a = '0; bits_b = '0; up_shift = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 60; it++) begin
      int thr, ca, cb, sh;
      @(negedge clk);
      thr = $urandom % 1001;
      sh  = $urandom % 3;
      ca = 0; cb = 0;
      for (int i = 0; i < NA; i++) begin
        bits_a[i] = ($urandom % 1000) < thr;
        ca += int'(bits_a[i]);
      end
      for (int i = 0; i < NB; i++) begin
        bits_b[i] = ($urandom % 1000) < thr;
        cb += int'(bits_b[i]);
      end
      up_shift = 2'(sh);
      in_valid = 1;
      exp_a.push_back(ref_val(ca, NA, sh));
      exp_b.push_back(ref_val(cb, NB, sh));
      exps_a.push_back(ref_sat(ca, NA, sh));
      exps_b.push_back(ref_sat(cb, NB, sh));
      // up_shift must be stable until the second stage: hold it for two cycles
      @(negedge clk); in_valid = 0;
      @(negedge clk);
    end
    repeat (4) @(posedge clk);
    checks++;
    if (exp_a.size() != 0 || exp_b.size() != 0) begin
      failures++;
      $display("%0d/%0d results missing", exp_a.size(), exp_b.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // latency: out_valid exactly two cycles after in_valid
  logic [1:0] vpipe;
  always @(posedge clk) begin
    if (!rst_n) vpipe <= '0;
    else begin
      vpipe <= {vpipe[0], in_valid};
      checks++;
      if (ov_a !== vpipe[1] || ov_b !== vpipe[1]) begin
        failures++;
        $display("latency: out_valid %b/%b, expected %b", ov_a, ov_b, vpipe[1]);
      end
    end
  end

  always @(posedge clk) begin
    if (ov_a && exp_a.size() > 0) begin
      int e; logic es;
      e = exp_a.pop_front(); es = exps_a.pop_front();
      checks++;
      if (int'(out_a) != e || sat_a != es) begin
        failures++;
        $display("16384-bit: out %0d sat %b, expected %0d sat %b", out_a, sat_a, e, es);
      end
    end
    if (ov_b && exp_b.size() > 0) begin
      int e; logic es;
      e = exp_b.pop_front(); es = exps_b.pop_front();
      checks++;
      if (int'(out_b) != e || sat_b != es) begin
        failures++;
        $display("512-bit: out %0d sat %b, expected %0d sat %b", out_b, sat_b, e, es);
      end
    end
  end

  initial begin
    wait (cycles == 100000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
