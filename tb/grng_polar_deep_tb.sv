// grng_polar_deep_tb: the end-to-end test of grng_polar_tb, run with deeper
// arithmetic units (convertor 2, multipliers 3, adder 2, logarithm 5,
// divider 4, square root 3 register stages; latency 25 clocks) to check that
// the top's alignment delays follow the units' latencies.
//
// As in grng_polar_tb:
// A cycle-level reference model runs beside the design: four software
// shift registers (multiplication by x modulo the polynomial), U = k/(2^32-1)
// rounded to binary32, the quadrant sequence, x^2 and y^2 and their sum
// rounded to binary32 exactly as the design's correctly rounded units do,
// the acceptance test s < 1, and alpha, beta = x, y * sqrt(-2 ln s / s) in
// double precision. For every enabled clock the testbench checks that the
// output belongs to the candidate pair of 25 enabled clocks earlier: valid
// must equal that pair's acceptance and alpha/beta must match within the
// logarithm unit's accuracy. clk_en is dropped at random (the pipeline must
// hold), aclr is pulsed in mid-run (the sequence must restart from the
// seeds), and the statistics of the accepted samples are checked: mean near
// 0, variance near 1, about pi/4 of pairs accepted, all four sign
// combinations present. fp_error must never rise.
module grng_polar_deep_tb;
  import fp32_pkg::*;
  import fp_ref_pkg::*;

  localparam int LATENCY  = 2 + 3 * 3 + 2 + 5 + 4 + 3;
  localparam int L_CONV   = 2;   // convertor latency: sets the quadrant a pair meets
  localparam int CYCLES   = 200000;

  logic clock = 0, clk_en = 0, aclr = 1;
  fp32_t alpha, beta;
  logic valid, fp_error;
  int checks = 0, failures = 0;

  grng_polar #(.L_CONV(L_CONV), .L_MUL(3), .L_ADD(2), .L_LOG(5), .L_DIV(4), .L_SQRT(3)) dut (.clock, .clk_en, .aclr, .coeff(MSRG_POLY32_COEFF), .alpha, .beta, .valid, .fp_error);
  always #5 clock = ~clock;

  initial begin
    repeat (CYCLES * 2) @(posedge clock);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct {
    logic  accept;
    real   a, b;
  } pair_t;

  function automatic logic [31:0] mulx(input logic [31:0] v);
    return {v[30:0], 1'b0} ^ (v[31] ? 32'h0000_0125 : 32'h0);
  endfunction

  function automatic fp32_t uni(input logic [31:0] k);
    return real_to_fp32(real'(k) / 4294967295.0);
  endfunction

  function automatic pair_t candidate(input logic [31:0] k1, k2, k3, k4, input int quad);
    pair_t p;
    real x, y, s, r;
    fp32_t xx, yy, sf;
    x  = (quad % 2 == 1) ? -fp32_to_real(uni(k3)) : fp32_to_real(uni(k1));
    y  = (quad / 2 == 1) ? -fp32_to_real(uni(k4)) : fp32_to_real(uni(k2));
    xx = real_to_fp32(x * x);
    yy = real_to_fp32(y * y);
    sf = real_to_fp32(fp32_to_real(xx) + fp32_to_real(yy));
    s  = fp32_to_real(sf);
    p.accept = s < 1.0;
    r  = p.accept ? $sqrt(-2.0 * $ln(s) / s) : 0.0;
    p.a = x * r;
    p.b = y * r;
    return p;
  endfunction

  function automatic logic close(input real got, input real want);
    real err, tol;
    err = got - want;
    if (err < 0) err = -err;
    tol = 1.0e-4 + 1.0e-5 * (want < 0 ? -want : want);
    return err <= tol;
  endfunction

  // reference state
  logic [31:0] m1, m2, m3, m4;
  int          j, n;
  pair_t       q[$];

  task automatic model_reset();
    m1 = 32'h0000_0001; m2 = 32'hFFFF_FFFE; m3 = 32'h2545_F491; m4 = 32'h9E37_79B9;
    j = 0; n = 0;
    q.delete();
  endtask

  // statistics and event counters
  longint n_acc = 0, n_rej = 0, n_stall = 0, n_reset = 0, n_quad [4] = '{0, 0, 0, 0};
  real sum_a = 0, sum_b = 0, sq_a = 0, sq_b = 0, sum_ab = 0;
  fp32_t hold_a, hold_b;
  logic  hold_v;

  initial begin
    model_reset();
    repeat (2) @(posedge clock);
    #1 aclr = 0;
    for (int cyc = 0; cyc < CYCLES; cyc++) begin
      clk_en = ($urandom % 10) != 0;
      hold_a = alpha; hold_b = beta; hold_v = valid;
      if (cyc == CYCLES / 2) begin
        // restart in mid-run
        aclr = 1; #1 aclr = 0;
        model_reset();
        n_reset++;
        checks++;
        if (valid) begin
          failures++;
          $display("FAIL valid right after aclr");
        end
      end
      @(posedge clock); #1;
      if (!clk_en) begin
        n_stall++;
        checks++;
        if (alpha != hold_a || beta != hold_b || valid != hold_v) begin
          failures++;
          if (failures < 10) $display("FAIL output moved during stall");
        end
        continue;
      end
      // one enabled clock: the model's next candidate enters
      q.push_back(candidate(m1, m2, m3, m4, (j + L_CONV) % 4));
      m1 = mulx(m1); m2 = mulx(m2); m3 = mulx(m3); m4 = mulx(m4);
      j++; n++;
      if (n < LATENCY) begin
        checks++;
        if (valid) begin
          failures++;
          $display("FAIL valid during pipeline fill");
        end
        continue;
      end
      begin
        pair_t p;
        real ga, gb;
        p  = q.pop_front();
        ga = fp32_to_real(alpha);
        gb = fp32_to_real(beta);
        checks++;
        if (valid != p.accept) begin
          failures++;
          if (failures < 10) $display("FAIL cycle %0d valid=%b want %b", cyc, valid, p.accept);
        end
        checks++;
        if (fp_error) begin
          failures++;
          if (failures < 10) $display("FAIL fp_error at cycle %0d", cyc);
        end
        if (p.accept) begin
          n_acc++;
          checks++;
          if (!close(ga, p.a) || !close(gb, p.b)) begin
            failures++;
            if (failures < 10) $display("FAIL cycle %0d alpha %f want %f beta %f want %f", cyc, ga, p.a, gb, p.b);
          end
          sum_a += ga; sum_b += gb; sq_a += ga * ga; sq_b += gb * gb; sum_ab += ga * gb;
          n_quad[{beta[31], alpha[31]}]++;
        end else begin
          n_rej++;
        end
      end
    end
    begin
      real ma, mb, va, vb, rate, cab;
      ma = sum_a / n_acc; mb = sum_b / n_acc;
      va = sq_a / n_acc - ma * ma; vb = sq_b / n_acc - mb * mb;
      cab = sum_ab / n_acc - ma * mb;
      rate = real'(n_acc) / real'(n_acc + n_rej);
      $display("accepted %0d rejected %0d (rate %f), stalls %0d, resets %0d", n_acc, n_rej, rate, n_stall, n_reset);
      $display("alpha mean %f var %f, beta mean %f var %f, cov %f", ma, va, mb, vb, cab);
      $display("sign quadrants (++,-+,+-,--): %0d %0d %0d %0d", n_quad[0], n_quad[1], n_quad[2], n_quad[3]);
      checks++; if (ma > 0.02 || ma < -0.02 || mb > 0.02 || mb < -0.02) begin failures++; $display("FAIL mean"); end
      checks++; if (va < 0.97 || va > 1.03 || vb < 0.97 || vb > 1.03) begin failures++; $display("FAIL variance"); end
      checks++; if (rate < 0.775 || rate > 0.795) begin failures++; $display("FAIL acceptance rate"); end
      // every mechanism must have happened
      checks++; if (n_acc == 0)   begin failures++; $display("FAIL no accepted pair"); end
      checks++; if (n_rej == 0)   begin failures++; $display("FAIL no rejected pair"); end
      checks++; if (n_stall == 0) begin failures++; $display("FAIL no stall"); end
      checks++; if (n_reset == 0) begin failures++; $display("FAIL no restart"); end
      for (int i = 0; i < 4; i++) begin
        checks++;
        if (n_quad[i] < n_acc / 8) begin failures++; $display("FAIL sign quadrant %0d rare", i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
