// tb_clf_workloads: the filter, at its default parameters (1280 x 800,
// N_RM = N_CM = 4, s_RM = s_CM = 4, BW_T = 8, D_TH = 1), run on synthetic
// stand-ins for the labelled benchmark scenes used to evaluate it: a moving
// box on an 800 x 600 sensor and on a 346 x 260 sensor, each at two
// noise-to-signal ratios (1.29 / 6.44 / 5.47 / 16.44 for the large sensor and
// 0.51 / 1.69 / 0.41 / 1.63 for the small one, the ratios of the benchmark
// recordings). The recordings themselves are not used: signal events are
// drawn on the outline of a 40 x 40 box moving one pixel every 60 time
// units, and noise events uniformly over the sensor, with about one event per
// time unit (read as microseconds) and T_th = 200, N_CR = 1.
//
// Per scene it checks every output against the reference model, then
// reports precision, recall and accuracy against the ground-truth label and
// checks that the filter separates the classes: precision well above the
// signal share of the stream (twice it, or 75%) and recall above 30%.
module tb_clf_workloads;
  import clf_pkg::*;
  import clf_ref_pkg::*;

  localparam int unsigned N_EV = 20000;  // events per scene
  localparam int unsigned T_TH = 200;

  logic             clk = 1'b0, rst_n = 1'b0;
  logic             in_valid = 1'b0, in_ready;
  event_t           in_event = '0;
  logic [7:0]       cfg_t_th = 8'(T_TH);
  logic [CNT_W-1:0] cfg_n_cr = 1;
  logic             out_valid, out_is_signal;
  event_t           out_event;
  logic [CNT_W-1:0] out_count;
  logic [1:0]       stat_rd_cancel, stat_fwd;

  always #5 clk = ~clk;

  clf_top dut (.*);

  int       checks = 0, failures = 0;
  clf_model model;
  bit       labq [$];
  bit       expq [$];
  int unsigned tp, fp, tn, fn;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) begin
    if (in_valid && in_ready) begin
      int unsigned rc, cc;
      bit sig;
      void'(model.process(in_event.x, in_event.y, in_event.t, T_TH, 1, rc, cc, sig));
      expq.push_back(sig);
    end
    if (rst_n && out_valid) begin
      bit e, l;
      e = expq.pop_front();
      l = labq.pop_front();
      chk(out_is_signal == e, "decision differs from the reference model");
      if (l && out_is_signal) tp++;
      else if (l) fn++;
      else if (out_is_signal) fp++;
      else tn++;
    end
  end

  task automatic scene(string name, int unsigned w, int unsigned h, real nsr);
    longint unsigned ts = 0;
    int unsigned bx = 20, by = h / 2 - 20, nsig = 0;
    real p, r, a, share;
    tp = 0; fp = 0; tn = 0; fn = 0;
    // a fresh filter state per scene, as for a separate recording
    model = new(1280, 800, 4, 4, 8, 1, 1);
    rst_n = 1'b0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    while (!in_ready) @(negedge clk);
    for (int unsigned i = 0; i < N_EV; i++) begin
      bit is_sig;
      @(negedge clk);
      ts += $urandom_range(2);
      bx = 20 + int'((ts / 60) % (w - 60));
      is_sig = ($urandom_range(9999) < int'(10000.0 / (1.0 + nsr)));
      if (is_sig) begin
        int unsigned k = $urandom_range(159);
        nsig++;
        case (k / 40)
          0: begin in_event.x = X_W'(bx + k % 40); in_event.y = Y_W'(by); end
          1: begin in_event.x = X_W'(bx + k % 40); in_event.y = Y_W'(by + 39); end
          2: begin in_event.x = X_W'(bx);          in_event.y = Y_W'(by + k % 40); end
          default: begin in_event.x = X_W'(bx + 39); in_event.y = Y_W'(by + k % 40); end
        endcase
      end else begin
        in_event.x = X_W'($urandom_range(w - 1));
        in_event.y = Y_W'($urandom_range(h - 1));
      end
      in_event.t = TS_W'(ts);
      in_event.p = 1'($urandom_range(1));
      in_valid   = 1'b1;
      labq.push_back(is_sig);
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (8) @(negedge clk);
    chk(labq.size() == 0 && expq.size() == 0, "events left in flight");
    p = (tp + fp) ? real'(tp) / real'(tp + fp) : 0.0;
    r = (tp + fn) ? real'(tp) / real'(tp + fn) : 0.0;
    a = real'(tp + tn) / real'(tp + tn + fp + fn);
    share = real'(nsig) / real'(N_EV);
    $display("%-28s %0dx%0d noise/signal=%5.2f  P=%6.2f%% R=%6.2f%% A=%6.2f%%",
             name, w, h, nsr, 100.0 * p, 100.0 * r, 100.0 * a);
    chk(p > ((2.0 * share < 0.75) ? 2.0 * share : 0.75),
        $sformatf("%s: precision %f too close to signal share %f", name, p, share));
    chk(r > 0.3, $sformatf("%s: recall %f", name, r));
  endtask

  initial begin
    scene("box, large sensor (a)", 800, 600, 1.29);
    scene("box, large sensor (b)", 800, 600, 6.44);
    scene("box, large sensor (c)", 800, 600, 5.47);
    scene("box, large sensor (d)", 800, 600, 16.44);
    scene("box, small sensor (a)", 346, 260, 0.51);
    scene("box, small sensor (b)", 346, 260, 1.69);
    scene("box, small sensor (c)", 346, 260, 0.41);
    scene("box, small sensor (d)", 346, 260, 1.63);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
