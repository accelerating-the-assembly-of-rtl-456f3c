// tb_amp_compensation: loads a random gain table, then drives random tweezer
// frequencies, activity and ramp levels and checks every amplitude one clock
// later against level*gain(f)/2^16 (0 for inactive tweezers). Also checks the
// unity table after reset.
module tb_amp_compensation;
  localparam int K = rearr_pkg::N_TWEEZ;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [K-1:0][23:0] freq;
  logic [K-1:0] active;
  logic [15:0] level;
  logic we = 0;
  logic [5:0] waddr = 0;
  logic [15:0] wdata = 0;
  logic [K-1:0][15:0] amp;
  logic [15:0] gain_m [64];

  amp_compensation u_dut (.clk, .rst_n, .freq, .active, .level, .we, .waddr, .wdata, .amp);

  task automatic check_cycle();
    logic [K-1:0][23:0] f;
    logic [K-1:0] act;
    logic [15:0] lv;
    for (int k = 0; k < K; k++) f[k] = 24'($urandom);
    act = K'({$urandom, $urandom});
    lv = 16'($urandom);
    @(negedge clk); freq = f; active = act; level = lv;
    @(negedge clk);
    for (int k = 0; k < K; k++) begin
      logic [31:0] p;
      p = 32'(lv) * 32'(gain_m[f[k][23:18]]);
      checks++;
      if (amp[k] != (act[k] ? p[31:16] : 16'd0)) begin
        failures++;
        if (failures < 6) $display("FAIL k=%0d amp=%h exp=%h", k, amp[k], p[31:16]);
      end
    end
  endtask

  initial begin
    freq = '0; active = '0; level = '0;
    for (int a = 0; a < 64; a++) gain_m[a] = 16'hFFFF;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (5) check_cycle();
    for (int a = 0; a < 64; a++) begin
      @(negedge clk); we = 1; waddr = 6'(a); wdata = 16'($urandom_range(30000, 65535)); gain_m[a] = wdata;
    end
    @(negedge clk); we = 0;
    repeat (100) check_cycle();
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
