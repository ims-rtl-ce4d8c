// tb_sigmoid_act: checks the sigmoid score against the PLAN formula in real
// arithmetic (within one score step) and against the exact logistic
// function (within 0.02 + one step), over a sweep of the whole input range
// and its saturation ends. Also checks monotonicity.
module tb_sigmoid_act;
  import ims_pkg::*;
  import ims_ref_pkg::*;

  act_t  x;
  prob_t y;
  int checks = 0, failures = 0;

  sigmoid_act dut (.x, .y);

  task automatic check_one(input int xv);
    real yr, yt, ys;
    int  exp8;
    x = act_t'(xv);
    #1;
    yr = sigmoid_real(xv);
    exp8 = int'($floor(yr * 256.0));
    if (exp8 > 255) exp8 = 255;
    ys = real'(y) / 256.0;
    yt = sigmoid_true(xv);
    checks++;
    if (int'(y) - exp8 > 1 || exp8 - int'(y) > 1) begin
      failures++;
      $display("FAIL x=%0d y=%0d plan=%0d", xv, y, exp8);
    end
    checks++;
    if ((ys - yt) > 0.0235 || (yt - ys) > 0.0235) begin
      failures++;
      $display("FAIL x=%0d y=%0d far from logistic %f", xv, y, yt);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int prev;
    prev = -1;
    for (int xv = -32768; xv <= 32767; xv += 37) begin
      check_one(xv);
      checks++;
      if (int'(y) < prev) begin failures++; $display("FAIL not monotonic at %0d", xv); end
      prev = int'(y);
    end
    check_one(0);
    check_one(-1);
    check_one(32767);
    check_one(-32768);
    check_one(1024);
    check_one(-2432);
    check_one(5120);
    // fixed points: sigmoid(0) = 0.5, saturation at both ends
    x = '0; #1; checks++; if (y != 8'd128) begin failures++; $display("FAIL y(0)=%0d", y); end
    x = 16'sh7FFF; #1; checks++; if (y != 8'd255) begin failures++; $display("FAIL y(max)=%0d", y); end
    x = 16'sh8000; #1; checks++; if (y != 8'd0) begin failures++; $display("FAIL y(min)=%0d", y); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
