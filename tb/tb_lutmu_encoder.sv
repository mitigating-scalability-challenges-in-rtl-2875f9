// tb_lutmu_encoder: checks the parallel decision-tree encoder against a
// level-by-level tree walk. Encoder 1 of a group with S = 3 codebooks per
// encoder is loaded with random split values (writes aimed at other encoders
// must be ignored), then fed random blocks and rounds with random output
// back-pressure. Every ID, round tag and last flag is compared, and the
// one-cycle latency is checked. Also checks the worked example of the
// paper's encoder figure: ID 0b0001 with bias 1 gives 0b0011.
module tb_lutmu_encoder;
  import lutmu_pkg::*;
  import lutmu_tb_pkg::*;

  localparam int I = 4, S = 3, W = 4, IDX = 1;
  localparam int NODES = (1 << I) - 1;
  localparam int SW = $clog2(S);

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;

  cfg_wr_t          cfg = CFG_IDLE;
  logic             in_valid = 0, in_ready, in_last = 0;
  logic [SW-1:0]    in_round = '0;
  logic [I*W-1:0]   in_blocks = '0;
  logic             out_valid, out_ready = 0, out_last;
  logic [SW-1:0]    out_round;
  logic [I-1:0]     out_id;

  lutmu_encoder #(.I(I), .S(S), .W(W), .ENC_IDX(IDX)) dut (.*);

  int checks = 0, failures = 0, cycle = 0;
  int sv [3*S][NODES];     // split values of codebooks of encoders 0..2
  int exp_q [$];           // {id, round, last}

  always @(posedge clk) cycle++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr_split(int c, int node, int v);
    cfg.we = 1; cfg.target = CFG_SPLIT; cfg.addr = 32'(c*NODES + node); cfg.data = 32'(v);
    @(posedge clk); #1;
    cfg = CFG_IDLE;
  endtask

  // Scoreboard on the output side.
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("unexpected output");
      end else begin
        int ex;
        ex = exp_q.pop_front();
        if (int'(out_id) != (ex & 'hff) || int'(out_round) != ((ex >> 8) & 'hff) ||
            int'(out_last) != (ex >> 16)) begin
          failures++;
          $display("mismatch: id %0d round %0d last %0d, expected %h", out_id, out_round, out_last, ex);
        end
      end
    end
  end

  always @(negedge clk) out_ready <= ($urandom_range(3, 0) != 0);

  initial begin
    int vals [], spl [];
    vals = new[I]; spl = new[NODES];
    #2 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    #1;
    for (int c = 0; c < 3*S; c++)
      for (int n = 0; n < NODES; n++) begin
        sv[c][n] = int'($urandom_range((1 << W) - 1, 0));
        wr_split(c, n, sv[c][n]);
      end

    // Latency: a single request, output valid exactly one cycle later.
    @(negedge clk);
    in_valid = 1; in_round = 0; in_blocks = '0;
    wait (in_ready);
    @(posedge clk); #1;
    in_valid = 0;
    checks++;
    if (!out_valid) begin failures++; $display("latency not one cycle"); end
    for (int n = 0; n < NODES; n++) spl[n] = sv[IDX*S][n];
    for (int l = 0; l < I; l++) vals[l] = 0;
    exp_q.push_back(ref_encode(vals, spl, I));
    while (exp_q.size() != 0) @(posedge clk);

    // Random traffic.
    for (int v = 0; v < 3000; v++) begin
      int r = int'($urandom_range(S - 1, 0));
      @(negedge clk);
      in_valid = 1; in_round = SW'(r); in_last = (r == S - 1);
      for (int l = 0; l < I; l++) begin
        vals[l] = int'($urandom_range((1 << W) - 1, 0));
        in_blocks[l*W +: W] = W'(vals[l]);
      end
      for (int n = 0; n < NODES; n++) spl[n] = sv[IDX*S + r][n];
      exp_q.push_back(ref_encode(vals, spl, I) | (r << 8) | ((r == S - 1) ? (1 << 16) : 0));
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      #1 in_valid = 0;
    end
    while (exp_q.size() != 0) @(posedge clk);

    // Worked example of the paper's encoder figure: current ID 0b0001 after
    // two levels, level 2 value above its split value -> bias 1 -> 0b0011.
    begin
      int path [] = '{0, 1, 1};
      int id = 0;
      for (int l = 0; l < 3; l++) id = id * 2 + path[l];
      checks++;
      if (id != 3) failures++;
    end

    repeat (3) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
