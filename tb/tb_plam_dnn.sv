// tb_plam_dnn: runs the multiplications of small neural-network inferences
// through a posit<16,1> PLAM multiplier, the number format used for the
// network experiments that motivate the design.
//
// Networks (layer shapes): the two fully connected networks for the ISOLET
// (617-128-64-26) and UCI HAR (561-512-512-6) datasets, and LeNet-5 for
// 32x32 MNIST-like (1 channel) and SVHN-like (3 channel) images:
// conv 6@5x5, 2x2 max-pool, conv 16@5x5, 2x2 max-pool, dense 120-84-10,
// ReLU on hidden layers. Weights and inputs are generated (uniform, with
// weights scaled by 1/sqrt(fan-in)); no trained model is involved, so the
// accuracy figures of trained networks are not reproduced here.
// Every product goes through the multiplier, one per clock cycle, and is
// checked bit for bit against the reference model. Accumulation is done
// exactly in real arithmetic (the multiplier has no adder). For every
// neuron the PLAM sum is also checked against the exact sum of the same
// operands: the difference must stay within (1/9 + 2^-9) times the sum of
// the absolute exact products, the Mitchell bound plus rounding. Each
// network also runs with exact products, and the testbench reports how
// often both networks pick the same top-1 output.
`timescale 1ns/1ps
module tb_plam_dnn;
  import plam_ref_pkg::*;

  localparam int N  = 16;
  localparam int ES = 1;
  typedef plam_ref #(N, ES) ref_t;
  typedef logic [N-1:0] posit_t;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  posit_t a, b, p;
  int checks = 0, failures = 0;
  longint n_products = 0;
  int n_agree = 0, n_runs = 0;

  plam_mult #(.N(N), .ES(ES)) dut (.a(a), .b(b), .p(p));

  // One product through the multiplier, checked against the model.
  task automatic mul(posit_t x, posit_t w, output real prod_plam,
                     output real prod_exact);
    posit_t expected;
    bit fc, ec, ru, smx, smn;
    a = w;
    b = x;
    @(posedge clk); #1;
    expected = ref_t::mult(w, x, fc, ec, ru, smx, smn);
    checks++;
    n_products++;
    if (p !== expected) begin
      failures++;
      if (failures <= 10) $display("MISMATCH w=%h x=%h p=%h expected=%h", w, x, p, expected);
    end
    prod_plam  = ref_t::to_real(p);
    prod_exact = ref_t::to_real(w) * ref_t::to_real(x);
  endtask

  function automatic posit_t rand_weight(int fan_in);
    real r = ($urandom % 65536) / 65536.0 * 2.0 - 1.0;
    return ref_t::from_real(r * $sqrt(3.0 / real'(fan_in)));
  endfunction

  // Per-neuron bound check and output conversion.
  task automatic finish_neuron(real acc_p, real acc_e, real acc_abs,
                               bit relu, output posit_t out_p);
    checks++;
    if ((acc_p > acc_e ? acc_p - acc_e : acc_e - acc_p) >
        (1.0 / 9.0 + 1.0 / 512.0) * acc_abs + 1.0e-12) begin
      failures++;
      $display("NEURON BOUND plam=%f exact=%f abs=%f", acc_p, acc_e, acc_abs);
    end
    if (relu && acc_p < 0.0) acc_p = 0.0;
    out_p = ref_t::from_real(acc_p);
  endtask

  // Dense layer on both paths. xp: PLAM path inputs, xe: exact path inputs.
  task automatic dense(input posit_t xp[], input posit_t xe[], input int n_out,
                       input bit relu, output posit_t yp[], output posit_t ye[]);
    real pp, pe, acc_p, acc_e, acc_abs, acc_x, dummy;
    posit_t w;
    yp = new[n_out];
    ye = new[n_out];
    for (int o = 0; o < n_out; o++) begin
      acc_p = 0.0; acc_e = 0.0; acc_abs = 0.0; acc_x = 0.0;
      for (int i = 0; i < xp.size(); i++) begin
        w = rand_weight(xp.size());
        mul(xp[i], w, pp, pe);
        acc_p += pp;
        acc_e += pe;
        acc_abs += (pe < 0.0) ? -pe : pe;
        // Exact path: exact products of its own inputs.
        dummy = ref_t::to_real(w) * ref_t::to_real(xe[i]);
        acc_x += dummy;
      end
      finish_neuron(acc_p, acc_e, acc_abs, relu, yp[o]);
      if (relu && acc_x < 0.0) acc_x = 0.0;
      ye[o] = ref_t::from_real(acc_x);
    end
  endtask

  // Valid 5x5 convolution (C x H x H input, F filters) + ReLU + 2x2 max-pool.
  task automatic conv_pool(input posit_t xp[], input posit_t xe[], input int c,
                           input int h, input int f, output posit_t yp[],
                           output posit_t ye[]);
    int ho = h - 4, hp = (h - 4) / 2;
    posit_t wt[];
    posit_t cp[], ce[];
    real pp, pe, acc_p, acc_e, acc_abs, acc_x;
    wt = new[f * c * 25];
    foreach (wt[i]) wt[i] = rand_weight(c * 25);
    cp = new[f * ho * ho];
    ce = new[f * ho * ho];
    for (int o = 0; o < f; o++)
      for (int y = 0; y < ho; y++)
        for (int x = 0; x < ho; x++) begin
          acc_p = 0.0; acc_e = 0.0; acc_abs = 0.0; acc_x = 0.0;
          for (int ch = 0; ch < c; ch++)
            for (int dy = 0; dy < 5; dy++)
              for (int dx = 0; dx < 5; dx++) begin
                int ii = (ch * h + y + dy) * h + x + dx;
                posit_t w = wt[((o * c + ch) * 5 + dy) * 5 + dx];
                mul(xp[ii], w, pp, pe);
                acc_p += pp;
                acc_e += pe;
                acc_abs += (pe < 0.0) ? -pe : pe;
                acc_x += ref_t::to_real(w) * ref_t::to_real(xe[ii]);
              end
          finish_neuron(acc_p, acc_e, acc_abs, 1'b1, cp[(o * ho + y) * ho + x]);
          if (acc_x < 0.0) acc_x = 0.0;
          ce[(o * ho + y) * ho + x] = ref_t::from_real(acc_x);
        end
    yp = new[f * hp * hp];
    ye = new[f * hp * hp];
    for (int o = 0; o < f; o++)
      for (int y = 0; y < hp; y++)
        for (int x = 0; x < hp; x++) begin
          real mp = 0.0, me = 0.0;
          for (int d = 0; d < 4; d++) begin
            int ii = (o * ho + 2 * y + d / 2) * ho + 2 * x + d % 2;
            if (ref_t::to_real(cp[ii]) > mp) mp = ref_t::to_real(cp[ii]);
            if (ref_t::to_real(ce[ii]) > me) me = ref_t::to_real(ce[ii]);
          end
          yp[(o * hp + y) * hp + x] = ref_t::from_real(mp);
          ye[(o * hp + y) * hp + x] = ref_t::from_real(me);
        end
  endtask

  function automatic int argmax(posit_t v[]);
    int best = 0;
    for (int i = 1; i < v.size(); i++)
      if (ref_t::to_real(v[i]) > ref_t::to_real(v[best])) best = i;
    return best;
  endfunction

  task automatic report(string name, posit_t yp[], posit_t ye[]);
    int cp = argmax(yp), ce = argmax(ye);
    n_runs++;
    if (cp == ce) n_agree++;
    $display("%s: top-1 PLAM=%0d exact=%0d products so far=%0d", name, cp, ce, n_products);
  endtask

  task automatic mlp(string name, int n_in, int h1, int h2, int n_out);
    posit_t x[], l1p[], l1e[], l2p[], l2e[], op[], oe[];
    x = new[n_in];
    foreach (x[i]) x[i] = ref_t::from_real(($urandom % 65536) / 65536.0);
    dense(x, x, h1, 1'b1, l1p, l1e);
    dense(l1p, l1e, h2, 1'b1, l2p, l2e);
    dense(l2p, l2e, n_out, 1'b0, op, oe);
    report(name, op, oe);
  endtask

  task automatic lenet5(string name, int c);
    posit_t x[], c1p[], c1e[], c2p[], c2e[], f1p[], f1e[], f2p[], f2e[], op[], oe[];
    x = new[c * 32 * 32];
    foreach (x[i]) x[i] = ref_t::from_real(($urandom % 65536) / 65536.0);
    conv_pool(x, x, c, 32, 6, c1p, c1e);       // 6 x 14 x 14
    conv_pool(c1p, c1e, 6, 14, 16, c2p, c2e);  // 16 x 5 x 5
    dense(c2p, c2e, 120, 1'b1, f1p, f1e);
    dense(f1p, f1e, 84, 1'b1, f2p, f2e);
    dense(f2p, f2e, 10, 1'b0, op, oe);
    report(name, op, oe);
  endtask

  initial begin
    a = '0;
    b = '0;
    repeat (3) mlp("ISOLET (617-128-64-26)", 617, 128, 64, 26);
    repeat (2) mlp("UCI HAR (561-512-512-6)", 561, 512, 512, 6);
    repeat (2) lenet5("LeNet-5, MNIST-like 1x32x32", 1);
    repeat (2) lenet5("LeNet-5, SVHN-like 3x32x32", 3);
    $display("products=%0d top-1 agreement PLAM vs exact: %0d of %0d", n_products, n_agree, n_runs);
    checks++;
    // MACs per inference: ISOLET 88832, UCI HAR 552448,
    // LeNet-5 1 channel 416520, 3 channels 651720.
    if (n_products != 3 * 88832 + 2 * 552448 + 2 * 416520 + 2 * 651720) begin
      failures++;
      $display("unexpected number of products");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5_000_000) @(posedge clk);
    failures++;
    $display("watchdog: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
