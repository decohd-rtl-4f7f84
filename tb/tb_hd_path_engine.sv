// tb_hd_path_engine: a two-layer engine (D = 32) is connected to memories
// modelled in the testbench (registered reads). For several random queries,
// channel choices and active dimensions it checks t_m against the reference
// sum_d ((h_d*A1_d)*A2_d)*h_d accumulated in the same order, and checks that
// 'done' comes exactly cfg_dim+2 cycles after 'start'.
module tb_hd_path_engine;
  import fp_ref_pkg::*;
  localparam int unsigned N = 2, D = 32;
  logic clk = 0, rst_n = 0, start = 0;
  logic [5:0] cfg_dim = 6'(D);
  logic [4:0] raddr;
  logic [31:0] h_rdata, t;
  logic [31:0] a_rdata [N];
  logic busy, done;
  logic [31:0] h [D];
  logic [31:0] a [N][D];
  int checks = 0, failures = 0;

  hd_path_engine #(.N_LAYERS(N), .D(D)) dut (.*);
  always #5 clk = ~clk;

  always_ff @(posedge clk) begin
    h_rdata    <= h[raddr];
    a_rdata[0] <= a[0][raddr];
    a_rdata[1] <= a[1][raddr];
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int k = 0; k < 40; k++) begin
      logic [31:0] ref_t, z;
      int n, cyc;
      n = (k % 4 == 0) ? D : $urandom_range(1, D);
      for (int d = 0; d < D; d++) begin
        h[d] = frand(3);
        a[0][d] = frand(3);
        a[1][d] = frand(3);
      end
      ref_t = 32'h0;
      for (int d = 0; d < n; d++) begin
        z = fmul(fmul(h[d], a[0][d]), a[1][d]);
        ref_t = fadd(ref_t, fmul(z, h[d]));
      end
      cfg_dim <= 6'(n);
      @(posedge clk);
      start <= 1;
      cyc = 0;
      do begin @(posedge clk); #1; start = 0; cyc++; end while (!done);
      checks += 2;
      if (t !== ref_t) begin
        failures++;
        $display("FAIL t = %h expected %h (dim %0d)", t, ref_t, n);
      end
      if (cyc != n + 2) begin
        failures++;
        $display("FAIL latency %0d expected %0d", cyc, n + 2);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
