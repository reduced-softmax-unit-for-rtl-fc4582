// tb_argmax_tree: self-checking testbench of the combinational MAXIMUM block.
//
// Three instances are driven: the default size (10 classes), an odd size (7, which
// exercises the padded leaves) and the degenerate single class. Expected results come
// from two sources independent of the tree: the three 10-class example sets whose
// winners are known by hand (all negative, all positive, mixed around zero), and, for
// random and tie-heavy vectors, the class whose real-valued softmax exp(x_i)/sum exp(x_j)
// is largest (first such class on ties), computed with $exp. Scores are 8.8 fixed point.
// The block has no clock; each vector is applied and checked after a 1 ns settle time.
// A watchdog ends the run with a failure if it does not finish in time.
module tb_argmax_tree;
  import rs_pkg::*;

  localparam int unsigned W    = W_DEFAULT;
  localparam int unsigned FRAC = 8;
  localparam int unsigned KA   = K_DEFAULT;
  localparam int unsigned KB   = 7;
  localparam int unsigned KC   = 1;

  int checks = 0;
  int failures = 0;

  logic signed [W-1:0] xa [KA];
  logic signed [W-1:0] xb [KB];
  logic signed [W-1:0] xc [KC];
  logic [idx_width(KA)-1:0] ia;
  logic [idx_width(KB)-1:0] ib;
  logic [idx_width(KC)-1:0] ic;
  logic signed [W-1:0] ma, mb, mc;

  argmax_tree #(.K(KA), .W(W)) dut_a (.x(xa), .idx(ia), .max_val(ma));
  argmax_tree #(.K(KB), .W(W)) dut_b (.x(xb), .idx(ib), .max_val(mb));
  argmax_tree #(.K(KC), .W(W)) dut_c (.x(xc), .idx(ic), .max_val(mc));

  // Real value to 8.8 fixed point, rounded to nearest.
  function automatic logic signed [W-1:0] fx(real v);
    return W'($rtoi(v * real'(1 << FRAC) + ((v < 0.0) ? -0.5 : 0.5)));
  endfunction

  function automatic real to_real(logic signed [W-1:0] v);
    return real'(v) / real'(1 << FRAC);
  endfunction

  // Argmax of the real softmax of a score vector (first class on ties).
  function automatic int softmax_argmax(logic signed [W-1:0] v [], int n);
    real e [];
    real sum, best;
    int  bi;
    e = new[n];
    sum = 0.0;
    for (int i = 0; i < n; i++) begin
      e[i] = $exp(to_real(v[i]));
      sum += e[i];
    end
    bi = 0;
    best = e[0] / sum;
    for (int i = 1; i < n; i++) begin
      if (e[i] / sum > best) begin
        best = e[i] / sum;
        bi = i;
      end
    end
    return bi;
  endfunction

  function automatic logic signed [W-1:0] rnd_score(int mode);
    case (mode)
      0: return W'($urandom);                       // full range
      1: return W'($urandom_range(0, 7)) - 16'sd4;  // tiny range: many ties
      2: return ($urandom_range(0, 1) != 0) ? {1'b0, {(W-1){1'b1}}} : {1'b1, {(W-1){1'b0}}};
      default: return fx(($urandom_range(0, 2000) - 1000) / 1000.0);  // [-1, 1]
    endcase
  endfunction

  task automatic check_a(int exp_idx, string what);
    logic signed [W-1:0] dv [];
    #1;
    dv = new[KA];
    foreach (xa[i]) dv[i] = xa[i];
    checks++;
    if (int'(ia) != exp_idx || ma != xa[exp_idx]) begin
      failures++;
      $display("FAIL %s: K=%0d idx=%0d max=%0d, expected idx=%0d max=%0d",
               what, KA, ia, ma, exp_idx, xa[exp_idx]);
    end
  endtask

  // Example sets with a hand-known winner (10 classes each).
  real set_neg [10] = '{-67.98, -33.07, -76.26, -92.96, -90.64, -10.83, -16.15, -89.70, -36.38, -60.84};
  real set_pos [10] = '{ 62.31,  87.20,  10.66,  83.53,  45.06,  73.87,  49.77,  66.38,  23.36,  95.52};
  real set_mix [10] = '{ -0.95,  -0.83,  -0.69,   0.58,  -0.55,   0.16,   0.23,   0.91,   0.07,   0.18};

  initial begin : watchdog
    #10ms;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic signed [W-1:0] dv [];
    int e;

    // The three example sets.
    foreach (xa[i]) xa[i] = fx(set_neg[i]);
    check_a(5, "all-negative set");
    foreach (xa[i]) xa[i] = fx(set_pos[i]);
    check_a(9, "all-positive set");
    foreach (xa[i]) xa[i] = fx(set_mix[i]);
    check_a(7, "mixed set");

    // All equal: class 0 must win.
    foreach (xa[i]) xa[i] = fx(-3.25);
    check_a(0, "all equal");
    // Winner in each position, including the most negative and positive codes.
    for (int p = 0; p < int'(KA); p++) begin
      foreach (xa[i]) xa[i] = {1'b1, {(W-1){1'b0}}};
      xa[p] = xa[p] + 16'sd1;
      check_a(p, "single winner over minimum");
      foreach (xa[i]) xa[i] = fx(-0.5);
      xa[p] = {1'b0, {(W-1){1'b1}}};
      check_a(p, "single maximum code");
    end

    // Random vectors, checked against the real softmax argmax.
    dv = new[KA];
    for (int n = 0; n < 4000; n++) begin
      foreach (xa[i]) xa[i] = rnd_score(n % 4);
      foreach (xa[i]) dv[i] = xa[i];
      e = softmax_argmax(dv, KA);
      check_a(e, "random K=10");
    end

    // Seven classes (padded tree).
    dv = new[KB];
    for (int n = 0; n < 2000; n++) begin
      foreach (xb[i]) xb[i] = rnd_score(n % 4);
      foreach (xb[i]) dv[i] = xb[i];
      e = softmax_argmax(dv, KB);
      #1;
      checks++;
      if (int'(ib) != e || mb != xb[e]) begin
        failures++;
        $display("FAIL random K=7: idx=%0d expected %0d", ib, e);
      end
    end

    // One class: always class 0.
    for (int n = 0; n < 20; n++) begin
      xc[0] = rnd_score(0);
      #1;
      checks++;
      if (ic != '0 || mc != xc[0]) begin
        failures++;
        $display("FAIL K=1: idx=%0d max=%0d input=%0d", ic, mc, xc[0]);
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
