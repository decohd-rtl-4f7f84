// tb_hd_path_counter: a three-layer 2x3x2 counter is stepped through all 12
// paths twice (with wrap) and cleared part-way; the per-layer digits, the
// linear path index and 'last' are compared with an independent model in
// which the linear index is decoded into digits by division.
module tb_hd_path_counter;
  localparam int unsigned N = 3;
  localparam int unsigned L [N] = '{2, 3, 2};
  localparam int unsigned M = 12;
  logic clk = 0, rst_n = 0, clear = 0, step = 0;
  logic [7:0] sel [N];
  logic [3:0] m;
  logic last;
  int checks = 0, failures = 0;
  int exp_m = 0;

  hd_path_counter #(.N_LAYERS(N), .L_CH(L)) dut (.*);
  always #5 clk = ~clk;

  task automatic check_state();
    int r;
    r = exp_m;
    checks++;
    if (32'(m) != exp_m || last != (exp_m == M - 1)) begin
      failures++;
      $display("FAIL m=%0d last=%0d expected m=%0d", m, last, exp_m);
    end
    for (int i = N - 1; i >= 0; i--) begin
      checks++;
      if (32'(sel[i]) != r % L[i]) begin
        failures++;
        $display("FAIL path %0d layer %0d digit %0d expected %0d", exp_m, i, sel[i], r % L[i]);
      end
      r = r / L[i];
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk); #1;
    check_state();
    for (int k = 0; k < 2 * M + 3; k++) begin
      step <= 1;
      @(posedge clk); #1;
      exp_m = (exp_m + 1) % M;
      check_state();
    end
    step <= 0;
    // idle cycles keep the path
    repeat (3) @(posedge clk); #1;
    check_state();
    clear <= 1;
    @(posedge clk); #1;
    clear <= 0;
    exp_m = 0;
    check_state();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
