// tb_reduced_softmax: end-to-end testbench of the reduced softmax layer at its default
// size (10 classes, 16-bit scores), with no parameter overridden.
//
// A stream of score vectors is driven into the unit, with idle cycles, back-to-back
// vectors and a reset in the middle. Every accepted vector is pushed on a scoreboard
// with its expected class: the three hand-known 10-class example sets (all negative,
// all positive, mixed around zero) carry their known winners; every other vector is
// checked against the class of largest real-valued softmax exp(x_i)/sum exp(x_j)
// (first class on ties), computed with $exp. Each cycle the testbench checks that
// out_valid is in_valid of the cycle before (one cycle of latency, one vector per
// cycle), that class_idx and max_val match, that outputs hold through idle cycles and
// that reset clears them. It counts how often each behaviour occurred (ties, idle
// holds, back-to-back vectors, resets, example sets, extreme codes) and counts a
// failure for any that never did. Scores are 8.8 fixed point.
module tb_reduced_softmax;
  import rs_pkg::*;

  localparam int unsigned K    = K_DEFAULT;
  localparam int unsigned W    = W_DEFAULT;
  localparam int unsigned IW   = idx_width(K);
  localparam int unsigned FRAC = 8;

  int checks = 0;
  int failures = 0;

  logic                clk = 1'b0;
  logic                rst_n;
  logic                in_valid;
  logic signed [W-1:0] x [K];
  logic                out_valid;
  logic [IW-1:0]       class_idx;
  logic signed [W-1:0] max_val;

  reduced_softmax dut (
    .clk, .rst_n, .in_valid, .x, .out_valid, .class_idx, .max_val
  );

  always #5 clk = ~clk;

  // Counts of each behaviour that must occur at least once.
  int n_sets = 0, n_ties = 0, n_idle_hold = 0, n_b2b = 0, n_reset = 0, n_extreme = 0;
  int n_out = 0;

  function automatic logic signed [W-1:0] fx(real v);
    return W'($rtoi(v * real'(1 << FRAC) + ((v < 0.0) ? -0.5 : 0.5)));
  endfunction

  function automatic real to_real(logic signed [W-1:0] v);
    return real'(v) / real'(1 << FRAC);
  endfunction

  function automatic int softmax_argmax(logic signed [W-1:0] v [K]);
    real e [K];
    real sum, best;
    int  bi;
    sum = 0.0;
    for (int i = 0; i < int'(K); i++) begin
      e[i] = $exp(to_real(v[i]));
      sum += e[i];
    end
    bi = 0;
    best = e[0] / sum;
    for (int i = 1; i < int'(K); i++) begin
      if (e[i] / sum > best) begin
        best = e[i] / sum;
        bi = i;
      end
    end
    return bi;
  endfunction

  real set_neg [10] = '{-67.98, -33.07, -76.26, -92.96, -90.64, -10.83, -16.15, -89.70, -36.38, -60.84};
  real set_pos [10] = '{ 62.31,  87.20,  10.66,  83.53,  45.06,  73.87,  49.77,  66.38,  23.36,  95.52};
  real set_mix [10] = '{ -0.95,  -0.83,  -0.69,   0.58,  -0.55,   0.16,   0.23,   0.91,   0.07,   0.18};

  // Expected result of the vector accepted at the last edge.
  logic          exp_valid = 1'b0;
  int            exp_idx;
  logic signed [W-1:0] exp_max;
  logic          prev_in_valid = 1'b0;
  logic [IW-1:0] last_idx;
  logic signed [W-1:0] last_max;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Checker: sample just after each rising edge.
  always @(posedge clk) begin
    #1;
    if (!rst_n) begin
      // A reset edge: outputs must be cleared.
      checks++;
      if (out_valid || class_idx != '0 || max_val != '0) begin
        failures++;
        $display("FAIL reset did not clear outputs");
      end
    end else begin
      checks++;
      if (out_valid != exp_valid) begin
        failures++;
        $display("FAIL out_valid=%0b expected %0b", out_valid, exp_valid);
      end
      if (exp_valid) begin
        checks++;
        n_out++;
        if (int'(class_idx) != exp_idx || max_val != exp_max) begin
          failures++;
          $display("FAIL class_idx=%0d max_val=%0d expected %0d %0d",
                   class_idx, max_val, exp_idx, exp_max);
        end
        if (prev_in_valid) n_b2b++;
      end else begin
        checks++;
        if (class_idx != last_idx || max_val != last_max) begin
          failures++;
          $display("FAIL outputs changed on an idle cycle");
        end
        n_idle_hold++;
      end
    end
    prev_in_valid = exp_valid;
    last_idx = class_idx;
    last_max = max_val;
  end

  // Drive one cycle (called between edges); record what the unit must show after
  // the edge.
  task automatic drive(logic v, int known = -1);
    int e;
    int nmax;
    logic signed [W-1:0] mx;
    in_valid <= v;
    @(posedge clk);
    if (!rst_n) begin
      exp_valid = 1'b0;
    end else if (v) begin
      e = (known >= 0) ? known : softmax_argmax(x);
      exp_valid = 1'b1;
      exp_idx = e;
      exp_max = x[e];
      mx = x[e];
      nmax = 0;
      foreach (x[i]) if (x[i] == mx) nmax++;
      if (nmax > 1) n_ties++;
      if (mx == {1'b0, {(W-1){1'b1}}} || mx == {1'b1, {(W-1){1'b0}}}) n_extreme++;
    end else begin
      exp_valid = 1'b0;
    end
    // New stimulus is applied away from the sampling edge.
    @(negedge clk);
  endtask

  task automatic load_random(int mode);
    foreach (x[i]) begin
      case (mode)
        0: x[i] = W'($urandom);
        1: x[i] = W'($urandom_range(0, 5)) - 16'sd2;
        2: x[i] = ($urandom_range(0, 3) == 0) ? {1'b1, {(W-1){1'b0}}} : W'($urandom);
        3: x[i] = ($urandom_range(0, 3) == 0) ? {1'b0, {(W-1){1'b1}}} : W'($urandom);
        default: x[i] = fx(($urandom_range(0, 2000) - 1000) / 1000.0);
      endcase
    end
  endtask

  initial begin
    rst_n = 1'b0;
    in_valid = 1'b0;
    foreach (x[i]) x[i] = '0;
    repeat (3) @(posedge clk);
    n_reset++;
    rst_n <= 1'b1;
    @(posedge clk);
    exp_valid = 1'b0;
    @(negedge clk);

    // The three example sets, back to back.
    foreach (x[i]) x[i] = fx(set_neg[i]);
    drive(1'b1, 5);
    foreach (x[i]) x[i] = fx(set_pos[i]);
    drive(1'b1, 9);
    foreach (x[i]) x[i] = fx(set_mix[i]);
    drive(1'b1, 7);
    n_sets += 3;
    drive(1'b0);

    // Random stream with idle cycles.
    for (int n = 0; n < 3000; n++) begin
      load_random(n % 5);
      drive($urandom_range(0, 3) != 0);
      if (n == 1500) begin
        // Reset in the middle of the stream.
        rst_n <= 1'b0;
        load_random(0);
        drive(1'b1);
        drive(1'b1);
        n_reset++;
        rst_n <= 1'b1;
        drive(1'b0);
      end
    end
    drive(1'b0);
    drive(1'b0);

    if (n_sets == 0)      begin failures++; $display("FAIL no example set run"); end
    if (n_ties == 0)      begin failures++; $display("FAIL no tie occurred"); end
    if (n_idle_hold == 0) begin failures++; $display("FAIL no idle hold occurred"); end
    if (n_b2b == 0)       begin failures++; $display("FAIL no back-to-back vectors"); end
    if (n_reset < 2)      begin failures++; $display("FAIL no reset in the stream"); end
    if (n_extreme == 0)   begin failures++; $display("FAIL no extreme code won"); end
    $display("results=%0d sets=%0d ties=%0d idle_holds=%0d back_to_back=%0d resets=%0d extremes=%0d",
             n_out, n_sets, n_ties, n_idle_hold, n_b2b, n_reset, n_extreme);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
