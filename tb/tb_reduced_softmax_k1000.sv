// tb_reduced_softmax_k1000: the reduced softmax layer sized for a 1000-class output
// layer, the size of a large image-classification network.
//
// The unit is built with 1000 classes (default 16-bit scores) and fed back-to-back
// random 1000-score vectors of several kinds: full-range scores, scores in [-10, 10],
// scores in a narrow band with many ties, and vectors whose winner is planted at a
// random position. Each result is checked one cycle after its vector against the class
// of largest real-valued softmax exp(x_i)/sum exp(x_j), computed with $exp (first class
// on ties); to keep the sums finite in double precision the softmax is evaluated as
// exp(x_i - c)/sum exp(x_j - c) with c the largest score, which does not change it.
// Checks also cover the one-vector-per-cycle rate: n vectors give n results in n
// consecutive cycles. Scores are 8.8 fixed point.
module tb_reduced_softmax_k1000;
  import rs_pkg::*;

  localparam int unsigned K    = 1000;
  localparam int unsigned W    = W_DEFAULT;
  localparam int unsigned IW   = idx_width(K);
  localparam int unsigned FRAC = 8;
  localparam int          NVEC = 400;

  int checks = 0;
  int failures = 0;

  logic                clk = 1'b0;
  logic                rst_n;
  logic                in_valid;
  logic signed [W-1:0] x [K];
  logic                out_valid;
  logic [IW-1:0]       class_idx;
  logic signed [W-1:0] max_val;

  reduced_softmax #(.K(K), .W(W)) dut (
    .clk, .rst_n, .in_valid, .x, .out_valid, .class_idx, .max_val
  );

  always #5 clk = ~clk;

  function automatic int softmax_argmax(logic signed [W-1:0] v [K]);
    real e [K];
    real c, sum, best;
    int  bi;
    c = -1.0e9;
    for (int i = 0; i < int'(K); i++)
      if (real'(v[i]) > c) c = real'(v[i]);
    sum = 0.0;
    for (int i = 0; i < int'(K); i++) begin
      e[i] = $exp((real'(v[i]) - c) / real'(1 << FRAC));
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

  int exp_q [$];
  int n_results = 0;
  int first_out = -1, last_out = -1, cycle = 0;

  initial begin : watchdog
    repeat (NVEC * 4 + 100) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cycle++;
    #1;
    if (rst_n && out_valid) begin
      int e;
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
        $display("FAIL result with no vector outstanding");
      end else begin
        e = exp_q.pop_front();
        if (int'(class_idx) != e) begin
          failures++;
          $display("FAIL class_idx=%0d expected %0d", class_idx, e);
        end
      end
      if (first_out < 0) first_out = cycle;
      last_out = cycle;
      n_results++;
    end
  end

  initial begin
    int p;
    rst_n = 1'b0;
    in_valid = 1'b0;
    foreach (x[i]) x[i] = '0;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < NVEC; n++) begin
      case (n % 4)
        0: foreach (x[i]) x[i] = W'($urandom);
        1: foreach (x[i]) x[i] = W'($urandom_range(0, 5120)) - 16'sd2560;
        2: foreach (x[i]) x[i] = W'($urandom_range(0, 3)) + 16'sd100;
        default: begin
          foreach (x[i]) x[i] = W'($urandom_range(0, 20000)) - 16'sd10000;
          p = $urandom_range(0, K - 1);
          x[p] = 16'sd10001;
        end
      endcase
      exp_q.push_back(softmax_argmax(x));
      in_valid = 1'b1;
      @(negedge clk);
    end
    in_valid = 1'b0;
    repeat (3) @(negedge clk);
    checks++;
    if (n_results != NVEC || last_out - first_out + 1 != NVEC) begin
      failures++;
      $display("FAIL %0d results over %0d cycles, expected %0d in %0d",
               n_results, last_out - first_out + 1, NVEC, NVEC);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
