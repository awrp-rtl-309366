// tb_awrp_weight_unit: directed corner cases and random operands for
// W = floor(F * 2^FRAC / ((N - R) mod 2^NW)), with the age-0 case flagged
// invalid. Expected values are computed with 64-bit integers.
module tb_awrp_weight_unit;
  localparam int unsigned NW = 16, FW = 16, FRAC = 16, WW = FW + FRAC;
  logic [FW-1:0] f;
  logic [NW-1:0] r, n;
  logic [WW-1:0] w;
  logic          w_valid;
  int checks = 0;
  int failures = 0;

  awrp_weight_unit #(.NW(NW), .FW(FW), .FRAC(FRAC)) dut (
    .f(f), .r(r), .n(n), .w(w), .w_valid(w_valid));

  task automatic check(input longint fi, input longint ri, input longint ni);
    longint age, exp_w;
    bit exp_v;
    f = FW'(fi); r = NW'(ri); n = NW'(ni);
    age = (ni - ri) & ((longint'(1) << NW) - 1);
    exp_v = (age != 0);
    exp_w = exp_v ? ((fi << FRAC) / age) : ((longint'(1) << WW) - 1);
    #1;
    checks++;
    if (w_valid !== exp_v || w !== WW'(exp_w)) begin
      failures++;
      $display("FAIL F=%0d R=%0d N=%0d: w=%0d v=%0b expected %0d v=%0b", fi, ri, ni, w, w_valid, exp_w, exp_v);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(0, 0, 5);            // empty block weighs 0
    check(1, 4, 5);            // age 1: W = 1.0
    check(3, 2, 8);            // 3/6
    check(1, 1, 0);            // wrapped age 65535: smallest nonzero weight
    check(7, 9, 9);            // N == R: not weighed
    check(16'hFFFF, 10, 11);   // largest weight
    check(2, 65530, 4);        // age across the wrap = 10
    for (int t = 0; t < 5000; t++)
      check(longint'($urandom_range(16'hFFFF)) >> $urandom_range(15),
            longint'($urandom_range(16'hFFFF)), longint'($urandom_range(16'hFFFF)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
