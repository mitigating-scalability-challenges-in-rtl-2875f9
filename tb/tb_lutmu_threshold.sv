// tb_lutmu_threshold: loads random (unsorted) 12-bit thresholds for O = 8
// outputs with W = 3 (7 thresholds each), sends packages of N = 4 sums for
// slides 0 and 1 and checks each activation against a count of thresholds
// the sum reaches, computed in the testbench. Sums equal to a threshold are
// included to check the ">=" convention. Random back-pressure; checks the
// one-cycle latency.
module tb_lutmu_threshold;
  import lutmu_pkg::*;
  import lutmu_tb_pkg::*;

  localparam int N = 4, O = 8, W = 3, T = (1 << W) - 1, E = O / N;

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  cfg_wr_t               cfg = CFG_IDLE;
  logic                  in_valid = 0, in_ready, in_last = 0;
  logic [0:0]            in_slide = '0;
  logic [N-1:0][4*W-1:0] in_sums = '0;
  logic                  out_valid, out_ready = 0, out_last;
  logic [0:0]            out_slide;
  logic [N-1:0][W-1:0]   out_act;

  lutmu_threshold #(.N(N), .O(O), .W(W)) dut (.*);

  int checks = 0, failures = 0, cycle = 0;
  int thr [O][T];
  int exp_q [$];
  int exp_sl [$];

  always @(posedge clk) cycle++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) out_ready <= ($urandom_range(3, 0) != 0);

  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      int sl;
      sl = exp_sl.pop_front();
      checks++;
      if (int'(out_slide) != sl || out_last != (sl == E - 1)) begin
        failures++; $display("slide/last mismatch");
      end
      for (int j = 0; j < N; j++) begin
        int ex;
        ex = exp_q.pop_front();
        checks++;
        if (int'(out_act[j]) != ex) begin
          failures++; $display("act %0d expected %0d", out_act[j], ex);
        end
      end
    end
  end

  initial begin
    int x, cnt, sl, t0;
    #2 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int o = 0; o < O; o++)
      for (int t = 0; t < T; t++) begin
        thr[o][t] = rand_signed(8);
        cfg.we = 1; cfg.target = CFG_THRESH; cfg.addr = 32'(o*T + t); cfg.data = 32'(thr[o][t]);
        @(negedge clk);
      end
    cfg = CFG_IDLE;

    // Latency: one cycle.
    in_valid = 1; in_slide = 0; in_last = 0; in_sums = '0;
    for (int j = 0; j < N; j++) begin
      cnt = 0;
      for (int t = 0; t < T; t++) if (0 >= thr[j][t]) cnt++;
      exp_q.push_back(cnt);
    end
    exp_sl.push_back(0);
    t0 = cycle;
    @(posedge clk); #1 in_valid = 0;
    checks++;
    if (!out_valid) begin failures++; $display("latency"); end
    while (exp_sl.size() != 0) @(posedge clk);

    for (int v = 0; v < 2000; v++) begin
      @(negedge clk);
      sl = v % E;
      in_valid = 1; in_slide = 1'(sl); in_last = (sl == E - 1);
      for (int j = 0; j < N; j++) begin
        int o;
        o = sl*N + j;
        x = ($urandom_range(3, 0) == 0) ? thr[o][$urandom_range(T - 1, 0)] : rand_signed(10);
        in_sums[j] = (4*W)'(x);
        cnt = 0;
        for (int t = 0; t < T; t++) if (x >= thr[o][t]) cnt++;
        exp_q.push_back(cnt);
      end
      exp_sl.push_back(sl);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      #1 in_valid = 0;
    end
    while (exp_sl.size() != 0) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
