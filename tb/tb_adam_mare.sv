// tb_adam_mare: accuracy workload for the AdAM multiplier.
//
// 1. Mean absolute relative error (MARE) over all 255 x 255 non-zero 8-bit
//    operand pairs, against the exact product. The published figure for
//    this multiplier is 4.7 %; the check accepts 4.2 % .. 5.2 %. Mitchell's
//    method never overestimates, so every product must also be <= exact.
// 2. Convolution-like dot products as they occur in the evaluated CNNs:
//    25-term (5 x 5 kernels, as in LeNet-5) and 9-term (3 x 3 kernels, as in
//    VGG-16) sums of products of random 8-bit unsigned activations and
//    weights. The relative error of each sum must stay below 12 %, and the
//    mean below 6 %.
// 3. A single-fault campaign: random operands, one random PFA output
//    flipped. The outcomes (product unchanged, bit zeroed, bit flipped) are
//    counted and reported; the check only requires every fault to land in
//    one of those classes, which the end-to-end test verifies bit-exactly.
module tb_adam_mare;
  import adam_pkg::*;

  logic [N_BITS-1:0]   a, b;
  adam_fault_t         fi;
  logic [2*N_BITS-1:0] p;
  int checks = 0, failures = 0;

  // Statistics of the three experiments.
  real    dot_err, mean_dot;
  longint mare_m, max_m;              // MARE and max error in 0.001 %
  longint sum_ppb, max_ppb;  // relative errors in parts per 10^9
  longint exact, approx, p_clean;
  int     terms, n_dots, same, lower;

  adam_mult dut (.a(a), .b(b), .fi(fi), .p(p));

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Relative error of the current product, in parts per 10^9 (for a, b > 0).
  longint exact_now, err_ppb;
  always_comb begin
    exact_now = longint'(a) * longint'(b);
    err_ppb   = (exact_now == 0) ? 0
              : ((exact_now - longint'(p)) * 1_000_000_000) / exact_now;
  end

  // Sum and maximum of the relative error over all non-zero operand pairs.
  // The pairs are walked by one flat loop index.
  task automatic run_mare(output longint sum_out, output longint max_out);
    sum_out = 0; max_out = 0;
    for (int n = 0; n < 255 * 255; n++) begin
      a = N_BITS'(n / 255 + 1);
      b = N_BITS'(n % 255 + 1);
      #1;
      if (longint'(p) > exact_now) begin
        checks++; failures++;
        $display("overestimate %0d*%0d = %0d", a, b, p);
      end
      sum_out += err_ppb;
      if (err_ppb > max_out) max_out = err_ppb;
    end
  endtask

  initial begin
    // 1. MARE.
    fi = '0;
    run_mare(sum_ppb, max_ppb);
    // In units of 0.001 %: ppb / 10^4 gives 0.001 %, then the mean.
    mare_m = sum_ppb / (64'd10_000 * 255 * 255);
    max_m  = max_ppb / 64'd10_000;
    $display("MARE = %0d.%03d %% (published 4.7 %%), max relative error = %0d.%03d %%",
             mare_m / 1000, mare_m % 1000, max_m / 1000, max_m % 1000);
    checks++;
    if (mare_m < 4200 || mare_m > 5200) failures++;

    // 2. Dot products.
    foreach (terms_list[t]) begin
      terms = terms_list[t];
      n_dots = 2000;
      mean_dot = 0.0;
      for (int d = 0; d < n_dots; d++) begin
        exact = 0; approx = 0;
        for (int q = 0; q < terms; q++) begin
          a = N_BITS'($urandom_range(255, 1));
          b = N_BITS'($urandom_range(255, 1));
          #1;
          exact  += longint'(a) * longint'(b);
          approx += longint'(p);
        end
        dot_err = real'(exact - approx) / real'(exact);
        mean_dot += dot_err;
        checks++;
        if (dot_err < 0.0 || dot_err > 0.12) begin
          failures++;
          $display("%0d-term dot product error %0.3f", terms, dot_err);
        end
      end
      mean_dot = 100.0 * mean_dot / real'(n_dots);
      $display("%0d-term dot products: mean relative error %0.3f %%", terms, mean_dot);
      checks++;
      if (mean_dot > 6.0) failures++;
    end

    // 3. Single-fault campaign.
    same = 0; lower = 0;
    for (int n = 0; n < 20000; n++) begin
      a = N_BITS'($urandom_range(255, 1));
      b = N_BITS'($urandom_range(255, 1));
      fi = '0;
      #1;
      p_clean = longint'(p);
      fi.sum = PFA_NUM'(1 << $urandom_range(PFA_NUM - 1, 0));
      #1;
      if (longint'(p) == p_clean) same++;
      else if (longint'(p) < p_clean) lower++;
    end
    fi = '0;
    $display("single PFA faults: %0d no effect, %0d lowered the product, %0d raised it",
             same, lower, 20000 - same - lower);
    checks++;
    if (same == 0) failures++;

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int terms_list[2] = '{25, 9};
endmodule
