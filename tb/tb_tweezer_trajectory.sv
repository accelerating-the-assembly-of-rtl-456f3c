// tb_tweezer_trajectory: random sweeps up and down in frequency. Per clock it
// checks that the frequency moves only toward the destination, never faster
// than vmax, and that the step changes by no more than accel between clocks;
// at the end that it lands exactly on f_dst, and that the sweep time agrees
// with an ideal trapezoidal (or triangular) profile.
module tb_tweezer_trajectory;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic load = 0, go = 0;
  logic [23:0] f_src, f_dst, freq;
  logic [31:0] accel, vmax;
  logic arrived;

  tweezer_trajectory u_dut (.clk, .rst_n, .load, .f_src, .f_dst, .go, .accel, .vmax, .freq, .arrived);

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      int d, cyc, prev, prevstep;
      real a, v, tideal, dd;
      f_src = 24'($urandom_range(1_000_000, 9_000_000));
      d     = (t % 5 == 0) ? 0 : $urandom_range(1, 400_000);
      f_dst = ($urandom_range(0, 1) == 1) ? f_src + 24'(d) : f_src - 24'(d);
      accel = 32'($urandom_range(200, 20000));            // 16 fraction bits
      vmax  = 32'($urandom_range(65536 * 20, 65536 * 3000));
      @(negedge clk); load = 1; @(negedge clk); load = 0;
      checks++;
      if (freq != f_src) begin failures++; $display("FAIL load freq %0d exp %0d", freq, f_src); end
      go = 1; @(negedge clk); go = 0;
      cyc = 1; prev = int'(f_src); prevstep = 0;
      while (!arrived && cyc < 200000) begin
        int step, dstep;
        @(negedge clk);
        cyc++;
        step = int'(freq) - prev;
        if (f_dst < f_src) step = -step;
        dstep = step - prevstep;
        if (dstep < 0) dstep = -dstep;
        // the landing step is clipped to the remaining distance
        if (step < 0 || real'(step) > real'(vmax) / 65536.0 + 1.0 ||
            (!arrived && real'(dstep) > real'(accel) / 65536.0 + 2.0)) begin
          failures++;
          if (failures < 6) $display("FAIL t=%0d cyc=%0d step=%0d prev=%0d", t, cyc, step, prevstep);
        end
        prev = int'(freq); prevstep = step;
      end
      checks++;
      if (freq != f_dst || !arrived) begin failures++; $display("FAIL t=%0d end %0d exp %0d", t, freq, f_dst); end
      // ideal duration
      a = real'(accel) / 65536.0; v = real'(vmax) / 65536.0; dd = real'(d);
      if (dd >= v * v / a) tideal = dd / v + v / a;
      else                 tideal = 2.0 * $sqrt(dd / a);
      checks++;
      if (d > 0 && (real'(cyc) < 0.9 * tideal - 2.0 || real'(cyc) > 1.15 * tideal + 10.0)) begin
        failures++;
        $display("FAIL t=%0d duration %0d ideal %f", t, cyc, tideal);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
