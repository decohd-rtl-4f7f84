// tb_hd_channel_bank: a two-layer bank (3 and 2 channels, D = 16) is loaded
// with random elements; random paths and element indices are then read and
// every layer's output is compared with the element of the selected channel.
module tb_hd_channel_bank;
  localparam int unsigned N = 2, D = 16;
  localparam int unsigned L [N] = '{3, 2};
  logic clk = 0, we = 0;
  logic [0:0] wlayer = '0;
  logic [31:0] waddr = '0, wdata = '0;
  logic [7:0] sel [N];
  logic [3:0] raddr = '0;
  logic [31:0] rdata [N];
  logic [31:0] model [N][3][D];
  int checks = 0, failures = 0;

  hd_channel_bank #(.N_LAYERS(N), .L_CH(L), .D(D), .FW(32)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    sel[0] = '0; sel[1] = '0;
    @(posedge clk);
    for (int i = 0; i < N; i++)
      for (int l = 0; l < int'(L[i]); l++)
        for (int d = 0; d < D; d++) begin
          model[i][l][d] = $urandom;
          we <= 1; wlayer <= 1'(i); waddr <= l * D + d; wdata <= model[i][l][d];
          @(posedge clk);
        end
    we <= 0;
    for (int k = 0; k < 300; k++) begin
      int s0, s1, d;
      s0 = $urandom_range(0, L[0] - 1);
      s1 = $urandom_range(0, L[1] - 1);
      d  = $urandom_range(0, D - 1);
      sel[0] <= 8'(s0); sel[1] <= 8'(s1); raddr <= 4'(d);
      @(posedge clk);
      #1;
      checks += 2;
      if (rdata[0] !== model[0][s0][d]) begin
        failures++;
        $display("FAIL layer0 ch%0d d%0d = %h expected %h", s0, d, rdata[0], model[0][s0][d]);
      end
      if (rdata[1] !== model[1][s1][d]) begin
        failures++;
        $display("FAIL layer1 ch%0d d%0d = %h expected %h", s1, d, rdata[1], model[1][s1][d]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
