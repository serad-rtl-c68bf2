// tb_serad_pipeline_ring: the four-stage SERAD pipeline closed into a ring,
// with a token controller in stage 0 (TOKEN_MASK = 4'b0001).
//
// R.req of the last stage drives L.req of the first and L.ack of the first
// drives R.ack of the last, so only the token can start the ring moving.
// The logic in front of stage i is modelled as f_i(x) = 3*x + i + 1 with a
// 150 ps delay. The latches have no reset, so the test reads every stage's
// content when reset is released and predicts all later captures from it.
//
// How many items circulate: the token stage starts with R.req high (its
// item) and L.ack low. Its predecessor's R.req is low, so the token stage
// sees a request as soon as its successor has taken the token, and also
// takes its predecessor's reset-time content as an item. Two items thus
// circulate. The k-th capture of stage i must equal f_i of the k-th value
// in its predecessor's history, where stage 0's history and stage 3's
// history start with their reset-time contents.
//
// It also injects one SET on stage 2's logic output while its latches are
// open and checks that the stage re-samples and no value is lost, that no
// stage opens less than delta after its predecessor closed, and that the
// ring keeps moving (every stage captures NCAP values).
module tb_serad_pipeline_ring;
  import serad_pkg::*;
  timeunit 1ps;
  timeprecision 1ps;

  localparam int unsigned N    = 4;
  localparam int unsigned W    = 32;
  localparam int unsigned NCAP = 20;
  localparam int unsigned COMB = 150;
  localparam logic [N-1:0] TOKENS = 4'b0001;

  logic                 rst_n;
  dual_t                l_req, l_ack, r_req, r_ack;
  logic [N-1:0][W-1:0]  stage_d, stage_q;
  logic [N-1:0]         stage_clk, stage_err, stage_corr;

  serad_pipeline #(.TOKEN_MASK(TOKENS)) dut (.*);

  assign l_req = r_req;
  assign r_ack = l_ack;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic logic [W-1:0] f(input int i, input logic [W-1:0] x);
    return x * 3 + W'(i + 1);
  endfunction

  logic [N-1:0][W-1:0] comb, glitch;
  for (genvar i = 0; i < N; i++) begin : g_comb
    assign #(COMB) comb[i] = f(i, stage_q[(i + N - 1) % N]);
  end
  assign stage_d = comb ^ glitch;

  // Value histories and capture counts.
  logic [W-1:0] hist [N][$];
  int caps [N];
  int errs [N];
  realtime last_fall [N];

  initial begin
    rst_n = 1'b0;
    glitch = '0;
    for (int i = 0; i < N; i++) begin caps[i] = 0; errs[i] = 0; last_fall[i] = 0; end
    #2000;
    for (int i = 0; i < N; i++)
      if (TOKENS[i] || TOKENS[(i + 1) % N]) hist[i].push_back(stage_q[i]);
    rst_n = 1'b1;
  end

  for (genvar i = 0; i < N; i++) begin : g_mon
    localparam int P = (i + N - 1) % N;
    always @(posedge stage_clk[i]) if (rst_n)
      check($realtime - last_fall[P] >= real'(DELTA_PS),
            $sformatf("stage %0d opened %0t after stage %0d closed", i, $realtime - last_fall[P], P));
    always @(posedge stage_err[i]) if (rst_n) errs[i]++;
    // A capture is final when Corr rises.
    always @(posedge stage_corr[i]) if (rst_n) begin
      logic [W-1:0] exp;
      if (caps[i] < hist[P].size()) begin
        exp = f(i, hist[P][caps[i]]);
        check(stage_q[i] == exp, $sformatf("stage %0d capture %0d: %h, expected %h", i, caps[i], stage_q[i], exp));
      end else begin
        check(1'b0, $sformatf("stage %0d capture %0d has no predecessor value", i, caps[i]));
      end
      hist[i].push_back(stage_q[i]);
      caps[i]++;
    end
    always @(negedge stage_clk[i]) last_fall[i] = $realtime;
  end

  // One SET on stage 2's input during its 6th opening.
  int rises2 = 0, set_done = 0;
  always @(posedge stage_clk[2]) if (rst_n) begin
    rises2++;
    if (rises2 == 6) begin
      #30 glitch[2] = 32'h0001_0000;
      #40 glitch[2] = '0;
      set_done++;
    end
  end

  initial begin
    wait (rst_n);
    wait (caps[0] >= NCAP && caps[1] >= NCAP && caps[2] >= NCAP && caps[3] >= NCAP);
    #2000;
    check(set_done == 1, "SET injected in the ring");
    check(errs[2] == 1 && errs[0] == 0 && errs[1] == 0 && errs[3] == 0,
          $sformatf("Err counts %0d %0d %0d %0d", errs[0], errs[1], errs[2], errs[3]));
    $display("ring: captures %0d %0d %0d %0d, re-samples in stage 2: %0d",
             caps[0], caps[1], caps[2], caps[3], errs[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("watchdog: ring stopped (captures %0d %0d %0d %0d)", caps[0], caps[1], caps[2], caps[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
