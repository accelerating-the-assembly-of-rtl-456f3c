// tb_pair_matcher: random source/destination masks (including more than K
// pairs); checks the count, the truncation flag and every pair against an
// independently built list of set-bit positions.
module tb_pair_matcher;
  localparam int N = rearr_pkg::N_COLS;
  localparam int K = rearr_pkg::N_TWEEZ;
  logic [N-1:0] src, dst;
  logic [$clog2(K+1)-1:0] count;
  logic [K-1:0][$clog2(N)-1:0] src_idx, dst_idx;
  logic trunc;
  int checks = 0, failures = 0;

  pair_matcher u_dut (.src, .dst, .count, .src_idx, .dst_idx, .trunc);

  initial begin
    for (int t = 0; t < 500; t++) begin
      int s[$], d[$], m;
      int ps, pd;
      s = {}; d = {};
      ps = $urandom_range(0, 8); pd = $urandom_range(0, 8);
      for (int b = 0; b < N; b++) begin
        src[b] = ($urandom_range(0, 8) < ps);
        dst[b] = ($urandom_range(0, 8) < pd);
        if (src[b]) s.push_back(b);
        if (dst[b]) d.push_back(b);
      end
      m = (s.size() < d.size()) ? s.size() : d.size();
      #1;
      checks++;
      if (int'(count) != ((m > K) ? K : m) || trunc != (m > K)) begin
        failures++;
        $display("FAIL t=%0d count=%0d m=%0d", t, count, m);
      end
      for (int k = 0; k < K && k < m; k++) begin
        checks++;
        if (int'(src_idx[k]) != s[k] || int'(dst_idx[k]) != d[k]) begin
          failures++;
          if (failures < 5) $display("FAIL t=%0d pair %0d: %0d->%0d exp %0d->%0d", t, k, src_idx[k], dst_idx[k], s[k], d[k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
