// Self-checking testbench of the ring oscillator model.
//
// Two rings (L = 3 and L = 5) run for a few thousand half periods. Every
// half period must lie within L stage delays plus or minus L peak
// jitters (the inverter is delay-free), the mean must be close to L stage
// delays, and the half
// periods must actually vary (there is jitter to harvest).
module ring_oscillator_tb;
  timeunit 1ns;
  timeprecision 1ps;

  int checks = 0, failures = 0;
  logic q3, q5;

  ring_oscillator #(.L(3), .STAGE_PS(1000), .JITTER_PS(40)) u3 (.q(q3));
  ring_oscillator #(.L(5), .STAGE_PS(450), .JITTER_PS(30)) u5 (.q(q5));

  task automatic measure(input int unsigned l, input int unsigned st,
                         input int unsigned jit, input bit which);
    realtime t0, t1;
    int unsigned h, hmin, hmax, lo, hi;
    longint unsigned sum;
    int nedges = 2000;
    lo = l * (st - jit);
    hi = l * (st + jit);
    hmin = '1; hmax = 0; sum = 0;
    if (which) @(q5); else @(q3);
    t0 = $realtime;
    for (int k = 0; k < nedges; k++) begin
      if (which) @(q5); else @(q3);
      t1 = $realtime;
      h = int'((t1 - t0) * 1000.0);
      t0 = t1;
      sum += h;
      if (h < hmin) hmin = h;
      if (h > hmax) hmax = h;
      checks++;
      if (h < lo || h > hi) begin
        failures++;
        if (failures < 10) $display("L=%0d half period %0d ps outside [%0d,%0d]", l, h, lo, hi);
      end
    end
    checks++;
    if (sum / nedges < l * st - 10 || sum / nedges > l * st + 10) begin
      failures++;
      $display("L=%0d mean half period %0d ps, expected %0d", l, sum / nedges, l * st);
    end
    checks++;
    if (hmax - hmin < jit) begin
      failures++;
      $display("L=%0d no jitter: half periods %0d..%0d ps", l, hmin, hmax);
    end
  endtask

  initial begin
    fork
      measure(3, 1000, 40, 1'b0);
      measure(5, 450, 30, 1'b1);
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100us;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
