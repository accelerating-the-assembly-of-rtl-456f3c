// tb_addition_tree: random signed inputs every clock into a 32-input and a
// 5-input tree; each sum must appear exactly LEVELS clocks later.
module tb_addition_tree;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic signed [31:0][15:0] in32;
  logic signed [4:0][15:0]  in5;
  logic signed [20:0] s32;
  logic signed [18:0] s5;

  addition_tree u_a (.clk, .rst_n, .in(in32), .sum(s32));
  addition_tree #(.N(5), .W(16)) u_b (.clk, .rst_n, .in(in5), .sum(s5));

  longint q32[$], q5[$];
  int cyc = 0;
  always @(posedge clk) if (rst_n) begin
    longint t;
    cyc++;
    t = 0; for (int i = 0; i < 32; i++) t += longint'($signed(in32[i])); q32.push_back(t);
    t = 0; for (int i = 0; i < 5; i++)  t += longint'($signed(in5[i]));  q5.push_back(t);
    for (int i = 0; i < 32; i++) in32[i] <= ($urandom_range(0, 9) == 0) ? 16'sh8000 : 16'($urandom);
    for (int i = 0; i < 5; i++)  in5[i]  <= ($urandom_range(0, 9) == 0) ? 16'sh7fff : 16'($urandom);
  end

  // outputs are compared mid-cycle: a sum is visible LEVELS-1 edges after the
  // edge that sampled its inputs
  always @(negedge clk) if (rst_n) begin
    longint t;
    if (q32.size() == 5) begin
      t = q32.pop_front();
      if (cyc > 8) begin checks++; if (longint'(s32) != t) begin failures++; if (failures < 5) $display("FAIL32 %0d exp %0d", s32, t); end end
    end
    if (q5.size() == 3) begin
      t = q5.pop_front();
      if (cyc > 8) begin checks++; if (longint'(s5) != t) begin failures++; if (failures < 5) $display("FAIL5 %0d exp %0d", s5, t); end end
    end
  end

  initial begin
    in32 = '0; in5 = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2000) @(posedge clk);
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
