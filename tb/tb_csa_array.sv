// tb_csa_array: checks the two-step paired-column read: phase 0 latches only the even
// columns, phase 1 only the odd ones, the register holds without sense, valid marks a
// complete read, and reset clears the register.
module tb_csa_array;
  localparam int COLS = 128;
  logic clk = 0, rst_n = 0, sense = 0, phase = 0;
  logic [COLS-1:0] col_on, q, model;
  logic valid;
  int checks = 0, failures = 0, cycles = 0;

  csa_array #(.COLS(COLS)) dut (.clk, .rst_n, .sense, .phase, .col_on, .q, .valid);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  function automatic logic [COLS-1:0] rnd();
    logic [COLS-1:0] v;
    for (int i = 0; i < COLS; i += 32) v[i +: 32] = $urandom;
    return v;
  endfunction

  task automatic check(string what, logic [COLS-1:0] expq, logic expv);
    checks++;
    if (q !== expq || valid !== expv) begin
      failures++;
      $display("%s: q=%h exp=%h valid=%b exp=%b", what, q, expq, valid, expv);
    end
  endtask

  initial begin
    col_on = rnd();
    repeat (2) @(posedge clk);
    #1 check("reset", '0, 1'b0);
    rst_n = 1;
    model = '0;
    for (int it = 0; it < 50; it++) begin
      logic [COLS-1:0] v0, v1;
      v0 = rnd(); v1 = rnd();
      // phase 0 with v0
      @(negedge clk); sense = 1; phase = 0; col_on = v0;
      @(posedge clk); #1;
      for (int c = 0; c < COLS; c += 2) model[c] = v0[c];
      check("phase0", model, 1'b0);
      // phase 1 with v1 (different data: even bits must not change)
      @(negedge clk); sense = 1; phase = 1; col_on = v1;
      @(posedge clk); #1;
      for (int c = 1; c < COLS; c += 2) model[c] = v1[c];
      check("phase1", model, 1'b1);
      // idle: hold
      @(negedge clk); sense = 0; col_on = rnd();
      @(posedge clk); #1;
      check("hold", model, 1'b1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cycles == 10000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
