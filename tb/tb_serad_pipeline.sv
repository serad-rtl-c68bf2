// tb_serad_pipeline: end-to-end test of the four-stage SERAD pipeline at its
// default parameters (32-bit data, sigma = 100 ps, delta = 300 ps).
//
// A producer pushes NITEMS words through the pipeline; the testbench models
// the combinational logic between latches as f_i(x) = 3*x + i + 1 with a
// 150 ps delay, and a consumer with a random response time checks every
// output word against the same function applied in software. On top of this
// it injects:
//   * a single SET on stage 1's logic output while its latches are open
//     (the stage must re-sample once),
//   * two SETs on stage 2 in consecutive openings (re-sample twice),
//   * an SET on the rail-1 copy of the consumer's R.ack (must be filtered),
//   * an SET on one rail's internal CLK node in stage 3 (must be filtered),
//   * an SET at the Q-flop input of stage 3 (a false error: one needless
//     re-sample, data unharmed).
// It checks data, CLK pulse counts per stage, the CLK high time
// (sigma + guard delay), the re-sample gap y and the 2*sigma + y window of
// Fig. 5, the bundling rule that a stage never opens less than
// delta after its predecessor last closed, and that every mechanism occurred.
module tb_serad_pipeline;
  import serad_pkg::*;
  timeunit 1ps;
  timeprecision 1ps;

  localparam int unsigned N      = 4;
  localparam int unsigned W      = 32;
  localparam int unsigned NITEMS = 24;
  localparam int unsigned COMB   = 150;

  logic                 rst_n;
  dual_t                l_req, l_ack, r_req, r_ack;
  logic [N-1:0][W-1:0]  stage_d, stage_q;
  logic [N-1:0]         stage_clk, stage_err, stage_corr;

  serad_pipeline dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // ---- combinational logic model -------------------------------------
  logic [W-1:0] prod_data;
  logic [N-1:0][W-1:0] comb, glitch;
  function automatic logic [W-1:0] f(input int i, input logic [W-1:0] x);
    return x * 3 + W'(i + 1);
  endfunction
  assign #(COMB) comb[0] = f(0, prod_data);
  for (genvar i = 1; i < N; i++) begin : g_comb
    assign #(COMB) comb[i] = f(i, stage_q[i-1]);
  end
  assign stage_d = comb ^ glitch;

  // ---- producer --------------------------------------------------------
  logic [W-1:0] items [NITEMS];
  int stalls = 0;
  initial begin
    rst_n = 1'b0;
    l_req = '0;
    r_ack = '{r1: 1'b1, r2: 1'b1};
    glitch = '0;
    prod_data = '0;
    for (int k = 0; k < NITEMS; k++) items[k] = $urandom;
    #2000 rst_n = 1'b1;
    for (int k = 0; k < NITEMS; k++) begin
      if (l_ack.r1 == l_req.r1) begin
        stalls++;
        wait (l_ack.r1 != l_req.r1);
      end
      #20;
      prod_data = items[k];
      l_req = '{r1: ~l_req.r1, r2: ~l_req.r2};
    end
  end

  // ---- consumer --------------------------------------------------------
  int got = 0;
  logic ack_hold = 1'b0;
  always @(r_req.r1) begin
    if (rst_n) begin
      logic [W-1:0] exp;
      #40;
      exp = items[got];
      for (int i = 0; i < N; i++) exp = f(i, exp);
      check(stage_q[N-1] == exp, $sformatf("item %0d data %h exp %h", got, stage_q[N-1], exp));
      check(r_req.r2 == r_req.r1, "R.req copies agree");
      got++;
      ack_hold = 1'b1;
      #($urandom_range(0, 1500));
      ack_hold = 1'b0;
      r_ack = '{r1: ~r_req.r1, r2: ~r_req.r2};
    end
  end

  // ---- SET injection -----------------------------------------------------
  int rises [N];
  int falls [N];
  realtime last_fall [N];
  realtime last_rise [N];
  int resamples [N];
  realtime resample_start [N];
  localparam int unsigned Y_PS = COMP_F_PS + SU_PS + QPD_PS + GG_DELAY_PS;
  initial for (int i = 0; i < N; i++) begin
    rises[i] = 0; falls[i] = 0; last_fall[i] = 0; resamples[i] = 0; resample_start[i] = -1;
  end

  for (genvar i = 0; i < N; i++) begin : g_mon
    always @(posedge stage_clk[i]) begin
      rises[i]++;
      // Err is still high when the controller re-opens the latches, so a
      // rise with Err set is a re-sample. Its low gap y is the EDL's path from
      // CLK- to Err (falling compensation delay, setup delay, Q-flop delay)
      // plus the guard gate; the whole window from the first rise to the
      // final fall is then 2*sigma + y (Fig. 5), with the guard delay added
      // to each high time.
      if (rst_n && stage_err[i]) begin
        resamples[i]++;
        check($realtime - last_fall[i] == real'(Y_PS),
              $sformatf("stage %0d re-sample gap %0t", i, $realtime - last_fall[i]));
        resample_start[i] = last_rise[i];
      end
      last_rise[i] = $realtime;
      if (i > 0 && rst_n)
        check($realtime - last_fall[i-1] >= real'(DELTA_PS),
              $sformatf("stage %0d opened %0t after stage %0d closed", i, $realtime - last_fall[i-1], i-1));
    end
    always @(negedge stage_clk[i]) if (rst_n) begin
      falls[i]++;
      last_fall[i] = $realtime;
      check($realtime - last_rise[i] == real'(SIGMA_PS + GG_DELAY_PS),
            $sformatf("stage %0d CLK high %0t", i, $realtime - last_rise[i]));
      if (resample_start[i] >= 0) begin
        check($realtime - resample_start[i] == real'(2 * (SIGMA_PS + GG_DELAY_PS) + Y_PS),
              $sformatf("stage %0d first rise to re-sampled close %0t", i, $realtime - resample_start[i]));
        resample_start[i] = -1;
      end
    end
  end

  // Single SET at stage 1, consecutive SETs at stage 2.
  int set_single = 0, set_double = 0;
  always @(posedge stage_clk[1]) begin
    if (rises[1] == 5) begin
      #30 glitch[1] = 32'h0000_0100;
      #40 glitch[1] = '0;
      set_single++;
    end
  end
  always @(posedge stage_clk[2]) begin
    if (rises[2] == 9 || rises[2] == 10) begin
      #25 glitch[2] = 32'h8000_0001;
      #50 glitch[2] = '0;
      set_double++;
    end
  end

  // Count Err pulses per stage (re-samples).
  int errs [N];
  initial for (int i = 0; i < N; i++) errs[i] = 0;
  for (genvar i = 0; i < N; i++) begin : g_err
    always @(posedge stage_err[i]) if (rst_n) errs[i]++;
  end

  // SET on rail-1 copy of R.ack while the consumer holds its acknowledge.
  int ack_set = 0, ack_set_seen = 0;
  always @(posedge dut.g_stage[N-1].u_stage.u_ctrl.clk1_n)
    if (!stage_clk[N-1] && ack_hold) ack_set_seen++;
  initial begin
    wait (got == 12);
    wait (ack_hold == 1'b1);
    #5;
    if (ack_hold) begin
      r_ack.r1 = ~r_ack.r1;
      #30 r_ack.r1 = ~r_ack.r1;
      ack_set++;
    end
  end

  // SET on an internal node of stage 3's rail 1 (its CLK next-state output).
  int int_set = 0;
  initial begin
    wait (got == 18);
    wait (stage_clk[3] == 1'b0);
    #1;
    force dut.g_stage[3].u_stage.u_ctrl.clk1_n = 1'b1;
    #40 release dut.g_stage[3].u_stage.u_ctrl.clk1_n;
    int_set++;
  end

  // SET at the Q-flop input of stage 3 (its OR tree) while the Q-flop
  // samples: the data is stable, yet Err rises and the stage re-samples
  // needlessly. The data must still be right.
  int edl_set = 0;
  always @(negedge stage_clk[3]) if (rst_n && rises[3] == 6 && edl_set == 0) begin
    #50 force dut.g_stage[3].u_stage.u_edl.or_tree = 1'b1;
    #40 release dut.g_stage[3].u_stage.u_edl.or_tree;
    edl_set++;
  end

  // ---- end of test -----------------------------------------------------
  initial begin
    wait (got == NITEMS);
    #3000;
    check(rises[0] == NITEMS, $sformatf("stage 0 pulses %0d", rises[0]));
    check(rises[1] == NITEMS + 1, $sformatf("stage 1 pulses %0d (one re-sample)", rises[1]));
    check(rises[2] == NITEMS + 2, $sformatf("stage 2 pulses %0d (two re-samples)", rises[2]));
    check(rises[3] == NITEMS + 1, $sformatf("stage 3 pulses %0d (one false-error re-sample)", rises[3]));
    check(resamples[1] == 1 && resamples[2] == 2 && resamples[0] == 0 && resamples[3] == 1,
          $sformatf("re-samples %0d %0d %0d %0d", resamples[0], resamples[1], resamples[2], resamples[3]));
    check(errs[1] == 1 && errs[2] == 2 && errs[0] == 0 && errs[3] == 1,
          $sformatf("Err counts %0d %0d %0d %0d", errs[0], errs[1], errs[2], errs[3]));
    $display("mechanisms: resample=%0d double_resample=%0d ack_set=%0d (rail1 reacted %0d) internal_set=%0d edl_false_error=%0d stalls=%0d",
             set_single, set_double, ack_set, ack_set_seen, int_set, edl_set, stalls);
    check(set_single > 0, "single SET injected");
    check(set_double == 2, "consecutive SETs injected");
    check(ack_set > 0, "R.ack SET injected");
    check(int_set > 0, "internal SET injected");
    check(edl_set > 0, "EDL false error injected");
    check(stalls > 0, "producer back-pressure seen");
    check(ack_set_seen > 0, "R.ack SET reached rail 1 and was filtered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(5_000_000);
    failures++;
    $display("watchdog: got %0d of %0d items", got, NITEMS);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
