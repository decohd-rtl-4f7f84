// tb_hd_query_buf: writes random data to every element of a small query
// buffer, then reads addresses in random order and checks the registered
// read data one cycle later.
module tb_hd_query_buf;
  localparam int unsigned D = 64;
  logic clk = 0, we = 0;
  logic [$clog2(D)-1:0] waddr = '0, raddr = '0;
  logic [31:0] wdata = '0, rdata;
  logic [31:0] model [D];
  int checks = 0, failures = 0;

  hd_query_buf #(.D(D), .FW(32)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    @(posedge clk);
    for (int i = 0; i < D; i++) begin
      model[i] = $urandom;
      we <= 1; waddr <= i[$clog2(D)-1:0]; wdata <= model[i];
      @(posedge clk);
    end
    we <= 0;
    for (int i = 0; i < 300; i++) begin
      int a;
      a = $urandom_range(0, D - 1);
      raddr <= a[$clog2(D)-1:0];
      @(posedge clk);
      #1;
      checks++;
      if (rdata !== model[a]) begin
        failures++;
        $display("FAIL h[%0d] = %h expected %h", a, rdata, model[a]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
