// tb_dds: drives one DDS with random frequency and amplitude changes (every
// few clocks), phase reloads, and compares all 8 lane samples with A*cos(phase)
// computed here from the exact 24-bit accumulated phase, 3 clocks later. The
// tolerance covers the 10-bit phase quantisation of the cosine table.
module tb_dds;
  localparam int LANES = rearr_pkg::LANES;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic load_phase = 0;
  logic [23:0] phase0 = 0, freq = 0;
  logic [15:0] amp = 0;
  logic signed [LANES-1:0][15:0] samples;

  dds u_dut (.clk, .rst_n, .load_phase, .phase0, .freq, .amp, .samples);

  typedef struct { real v[LANES]; real a; } exp_t;
  exp_t q[$];
  logic [23:0] acc_m = 0;
  bit model_on = 0;
  int cyc = 0;

  always @(posedge clk) if (rst_n) begin
    exp_t e;
    cyc++;
    // reference for the inputs the DUT samples at this edge
    if (load_phase) begin acc_m = phase0; model_on = 1; end
    for (int j = 0; j < LANES; j++) begin
      logic [23:0] ph;
      ph = acc_m + 24'(j) * freq;
      e.v[j] = 32767.0 * $cos(2.0 * 3.14159265358979 * real'(ph) / 16777216.0) * real'(amp) / 65536.0;
    end
    e.a = real'(amp) / 65536.0;
    acc_m = acc_m + 24'(LANES) * freq;
    q.push_back(e);
    // stimulus for the next edge
    load_phase <= ($urandom_range(0, 99) == 0) || (cyc == 2);
    phase0     <= 24'($urandom);
    if ($urandom_range(0, 3) == 0) freq <= 24'($urandom);
    if ($urandom_range(0, 3) == 0) amp  <= 16'($urandom);
  end

  // compared mid-cycle: samples are visible 2 edges after the sampling edge
  always @(negedge clk) if (rst_n && q.size() == 3) begin
    exp_t o;
    o = q.pop_front();
    if (model_on && cyc > 8) for (int j = 0; j < LANES; j++) begin
      real d;
      d = real'($signed(samples[j])) - o.v[j];
      if (d < 0) d = -d;
      checks++;
      if (d > 210.0 * o.a + 2.0) begin
        failures++;
        if (failures < 6) $display("FAIL cyc %0d lane %0d got %0d exp %f", cyc, j, $signed(samples[j]), o.v[j]);
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
