// tb_clf_edu: self-checking testbench of the Event Decision Unit.
// Random blocks of four stored events, biased to lie near the input event
// in coordinate and time, are compared with the count worked out here:
// valid, |c_in - c_s| <= D_TH and (t_in - t_s) mod 256 <= T_th. Includes
// timestamps that wrap around the 8-bit range and both D_TH = 1 and 2.
module tb_clf_edu;
  localparam int unsigned S = 4, BWT = 8, CW = 11, EW = 1 + BWT + CW;
  logic [S*EW-1:0] blk;
  logic [CW-1:0]   c_in;
  logic [BWT-1:0]  t_in, t_th;
  logic [2:0]      cnt1, cnt2;
  int checks = 0, failures = 0, hits = 0;

  clf_edu #(.S(S), .BW_T(BWT), .CW(CW), .D_TH(1)) dut1 (.blk, .c_in, .t_in, .t_th, .count(cnt1));
  clf_edu #(.S(S), .BW_T(BWT), .CW(CW), .D_TH(2)) dut2 (.blk, .c_in, .t_in, .t_th, .count(cnt2));

  initial begin
    for (int i = 0; i < 20000; i++) begin
      int e1, e2;
      c_in = CW'($urandom_range(2047));
      t_in = BWT'($urandom);
      t_th = BWT'($urandom_range(255));
      e1 = 0; e2 = 0;
      for (int k = 0; k < S; k++) begin
        int cs, ts, dc, dt;
        bit v;
        v  = ($urandom_range(5) != 0);
        cs = ($urandom_range(3) == 0) ? int'($urandom_range(2047))
                                      : int'(c_in) + int'($urandom_range(6)) - 3;
        cs = cs & 2047;
        ts = (int'(t_in) - int'($urandom_range(300))) & 255;
        blk[k*EW +: EW] = {v, BWT'(ts), CW'(cs)};
        dc = int'(c_in) - cs; if (dc < 0) dc = -dc;
        dt = (int'(t_in) - ts) & 255;
        if (v && dc <= 1 && dt <= int'(t_th)) e1++;
        if (v && dc <= 2 && dt <= int'(t_th)) e2++;
      end
      #1;
      hits += e1;
      checks += 2;
      if (int'(cnt1) != e1) begin failures++; if (failures < 10) $display("D_TH=1 count %0d expected %0d", cnt1, e1); end
      if (int'(cnt2) != e2) begin failures++; if (failures < 10) $display("D_TH=2 count %0d expected %0d", cnt2, e2); end
    end
    checks++;
    if (hits == 0) begin failures++; $display("no correlated event generated"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
