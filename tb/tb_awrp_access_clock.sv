// tb_awrp_access_clock: checks that the access clock counts accepted
// references, holds otherwise, wraps modulo 2^NW and resets to 0.
// A narrow NW = 4 makes the wrap happen within the run.
module tb_awrp_access_clock;
  localparam int unsigned NW = 4;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic tick = 1'b0;
  logic [NW-1:0] n;
  int checks = 0;
  int failures = 0;
  int wraps = 0;
  int unsigned model = 0;

  awrp_access_clock #(.NW(NW)) dut (.clk(clk), .rst_n(rst_n), .tick(tick), .n(n));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    #1 checks++;
    if (n !== '0) begin failures++; $display("FAIL reset value %0d", n); end
    rst_n = 1'b1;
    for (int c = 0; c < 200; c++) begin
      @(negedge clk);
      tick = ($urandom_range(2) != 0);
      @(posedge clk);
      if (tick) begin
        model = (model + 1) % (1 << NW);
        if (model == 0) wraps++;
      end
      #1 checks++;
      if (n !== NW'(model)) begin
        failures++;
        $display("FAIL cycle %0d: n=%0d expected %0d", c, n, model);
      end
    end
    checks++;
    if (wraps == 0) begin failures++; $display("FAIL clock never wrapped"); end
    rst_n = 1'b0;
    #1 checks++;
    if (n !== '0) begin failures++; $display("FAIL async reset"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
