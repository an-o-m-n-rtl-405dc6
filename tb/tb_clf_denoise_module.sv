// tb_clf_denoise_module: self-checking testbench of the Row/Column Denoising
// Module, three instances fed the same event stream on a 24-line sensor:
//   u0: 4 banks, 4 events per block, 3-line window, read cancellation on
//   u1: 4 banks, 2 events per block, 3-line window, read cancellation off
//   u2: 8 banks, 4 events per block, 5-line window (D_TH = 2), cancellation on
//   u3: 4 banks, 4 events per block, 3-line window, unpipelined (PIPELINED = 0)
// Events are presented in the module's stage-A inputs, one per cycle with
// random gaps, clustered so that own-line hits, neighbour hits, repeated
// lines (block forwarding), FIFO replacement and the border all occur. Each
// d_count is compared with the reference model, and d_valid must follow the
// stage-A event by three clock edges (two for the unpipelined u3). Also checks the clearing time after
// reset and that forwarding and cancellation occurred.
module tb_clf_denoise_module;
  import clf_pkg::*;
  import clf_ref_pkg::*;

  localparam int unsigned LINES = 24, OTHN = 40, BWT = 8, T_TH = 50, N_EV = 20000;

  logic            clk = 1'b0, rst_n = 1'b0;
  logic            a_valid = 1'b0;
  logic [9:0]      a_own = '0;
  logic [10:0]     a_oth = '0;
  logic [BWT-1:0]  a_t = '0;
  logic [BWT-1:0]  t_th = BWT'(T_TH);
  logic            done  [4];
  logic            dv    [4];
  logic [CNT_W-1:0] dc   [4];
  logic            canc  [4];
  logic            fwd   [4];

  always #5 clk = ~clk;

  clf_denoise_module #(.LINES(LINES), .N_BANK(4), .S(4), .D_TH(1), .BW_T(BWT),
                       .OWN_W(10), .OTH_W(11), .READ_CANCEL(1)) u0 (
    .clk, .rst_n, .init_done(done[0]), .a_valid, .a_own, .a_oth, .a_t, .t_th,
    .d_valid(dv[0]), .d_count(dc[0]), .stat_cancel(canc[0]), .stat_fwd(fwd[0]));
  clf_denoise_module #(.LINES(LINES), .N_BANK(4), .S(2), .D_TH(1), .BW_T(BWT),
                       .OWN_W(10), .OTH_W(11), .READ_CANCEL(0)) u1 (
    .clk, .rst_n, .init_done(done[1]), .a_valid, .a_own, .a_oth, .a_t, .t_th,
    .d_valid(dv[1]), .d_count(dc[1]), .stat_cancel(canc[1]), .stat_fwd(fwd[1]));
  clf_denoise_module #(.LINES(LINES), .N_BANK(8), .S(4), .D_TH(2), .BW_T(BWT),
                       .OWN_W(10), .OTH_W(11), .READ_CANCEL(1)) u2 (
    .clk, .rst_n, .init_done(done[2]), .a_valid, .a_own, .a_oth, .a_t, .t_th,
    .d_valid(dv[2]), .d_count(dc[2]), .stat_cancel(canc[2]), .stat_fwd(fwd[2]));
  clf_denoise_module #(.LINES(LINES), .N_BANK(4), .S(4), .D_TH(1), .BW_T(BWT),
                       .OWN_W(10), .OTH_W(11), .READ_CANCEL(1), .PIPELINED(0)) u3 (
    .clk, .rst_n, .init_done(done[3]), .a_valid, .a_own, .a_oth, .a_t, .t_th,
    .d_valid(dv[3]), .d_count(dc[3]), .stat_cancel(canc[3]), .stat_fwd(fwd[3]));

  localparam int unsigned DELAY [4] = '{3, 3, 3, 2};
  clf_model    model [4];
  int unsigned expq  [4][$];
  longint      accq  [4][$];
  longint      cyc = 0;
  int          checks = 0, failures = 0;
  int unsigned n_fwd [4] = '{0, 0, 0, 0};
  int unsigned n_canc[4] = '{0, 0, 0, 0};
  int unsigned n_clear = 0, n_out = 0, n_hit = 0;

  always @(negedge clk) cyc <= cyc + 1;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0d: %s", cyc, what); end
  endtask

  always @(posedge clk) begin
    if (rst_n && !done[0]) n_clear++;
    if (rst_n && a_valid) begin
      for (int k = 0; k < 4; k++) begin
        int unsigned rc, cc;
        bit sig;
        void'(model[k].process(a_oth, a_own, a_t, T_TH, 1, rc, cc, sig));
        expq[k].push_back(rc);
        accq[k].push_back(cyc);
      end
    end
    for (int k = 0; k < 4; k++) begin
      n_fwd[k]  += fwd[k];
      n_canc[k] += canc[k];
    end
    if (rst_n && dv[0]) n_out++;
    for (int k = 0; k < 4; k++) begin
      if (rst_n && dv[k]) begin
        int unsigned e;
        longint a;
        if (expq[k].size() == 0) chk(0, "result without event");
        else begin
          a = accq[k].pop_front();
          chk(cyc - a == longint'(DELAY[k]), $sformatf("u%0d delay %0d edges, expected %0d", k, cyc - a, DELAY[k]));
          e = expq[k].pop_front();
          if (e != 0) n_hit++;
          chk(int'(dc[k]) == int'(e), $sformatf("u%0d count %0d, model %0d", k, dc[k], e));
        end
      end
    end
  end

  initial begin
    int unsigned oo, ot;
    longint unsigned ts;
    model[0] = new(2048, LINES, 4, 0, BWT, 1, 1);
    model[1] = new(2048, LINES, 2, 0, BWT, 1, 0);
    model[2] = new(2048, LINES, 4, 0, BWT, 2, 1);
    model[3] = new(2048, LINES, 4, 0, BWT, 1, 0);
    oo = 12; ot = 20; ts = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    while (!(done[0] && done[1] && done[2] && done[3])) @(negedge clk);
    chk(n_clear == (LINES + 3) / 4, $sformatf("clearing took %0d cycles", n_clear));
    for (int i = 0; i < N_EV; i++) begin
      @(negedge clk);
      if ($urandom_range(7) == 0) begin a_valid = 1'b0; continue; end
      if ($urandom_range(19) == 0) begin oo = $urandom_range(LINES - 1); ot = $urandom_range(OTHN - 1); end
      ts += ($urandom_range(99) == 0) ? 200 + $urandom_range(300) : $urandom_range(5);
      if ($urandom_range(3) == 0) begin
        a_own = 10'($urandom_range(LINES - 1));
        a_oth = 11'($urandom_range(OTHN - 1));
      end else begin
        int o, t;
        o = int'(oo) + int'($urandom_range(4)) - 2;
        t = int'(ot) + int'($urandom_range(4)) - 2;
        a_own = 10'((o < 0) ? 0 : (o >= int'(LINES)) ? LINES - 1 : o);
        a_oth = 11'((t < 0) ? 0 : t);
      end
      a_t     = BWT'(ts);
      a_valid = 1'b1;
    end
    @(negedge clk);
    a_valid = 1'b0;
    repeat (6) @(negedge clk);
    for (int k = 0; k < 4; k++) chk(accq[k].size() == 0, "events without result");
    chk(n_hit > 0, "no correlated event seen");
    chk(n_fwd[0] > 0, "forwarding never happened");
    chk(n_canc[0] == model[0].n_cancel, $sformatf("cancellations %0d, model %0d", n_canc[0], model[0].n_cancel));
    chk(n_canc[0] > 0 && n_canc[2] > 0, "read cancellation never happened");
    chk(n_canc[1] == 0 && n_canc[3] == 0, "cancellation with READ_CANCEL = 0 or unpipelined");
    chk(n_fwd[3] > 0, "forwarding never happened in the unpipelined module");
    chk(model[0].n_border > 0, "border never reached");
    chk(model[0].n_evict() > 0, "FIFO replacement never happened");
    $display("outputs=%0d forward=%0d cancel=%0d/%0d border=%0d", n_out, n_fwd[0], n_canc[0], n_canc[2], model[0].n_border);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
