// adtt_top_tb: end-to-end test of the transform pair at its default sizes
// (8-bit samples, 11-bit coefficients, 15-bit inverse outputs).
//
// It alternates between two loops, draining both pipelines between them:
//  * analysis -> synthesis: fresh sample vectors x go into the forward
//    core with random gaps; each forward output is checked against T* x
//    and then handed, in the cycle it appears, to the inverse core, whose
//    output is checked against T1 (T* x). Latencies are checked as 3
//    cycles per core.
//  * synthesis -> analysis: small random coefficient vectors c
//    (|c_k| <= 9, so that T1 c fits in 8 bits) go into the inverse core;
//    each inverse output is checked against T1 c and fed back to the
//    forward core, whose output must equal diag(8,10,8,10,4,10,8,10) c,
//    since T* T1 = D1^-1. That check needs neither reference table.
// More than 10,000 vectors pass through the forward core. The bench
// counts how often each situation occurred (vectors on consecutive
// cycles, gaps, both cores producing in the same cycle, corner vectors,
// loop switches) and counts a failure for any that never did.
module adtt_top_tb;
  import adtt_pkg::*;
  import adtt_ref_pkg::*;

  localparam int unsigned W  = 8;
  localparam int unsigned WC = W + FWD_GROWTH;
  localparam int unsigned WY = WC + INV_GROWTH;
  localparam int MAXV = (1 <<< (W - 1)) - 1;
  localparam int MINV = -(1 <<< (W - 1));
  localparam int N_AS = 10240;   // vectors in the analysis -> synthesis loop
  localparam int N_SA = 3072;    // vectors in the synthesis -> analysis loop
  localparam int SEGMENTS = 8;   // loop switches: each loop runs in SEGMENTS/2 parts

  logic clk;
  logic rst_n;
  logic fwd_in_valid, fwd_out_valid, inv_in_valid, inv_out_valid;
  logic signed [W-1:0]  fwd_x [N];
  logic signed [WC-1:0] fwd_X [N];
  logic signed [WC-1:0] inv_X [N];
  logic signed [WY-1:0] inv_y [N];

  adtt_top dut (.*);

  int checks = 0;
  int failures = 0;
  int cyc;

  // Mechanism counters.
  int n_chain_fi = 0;   // forward outputs passed on to the inverse core
  int n_chain_if = 0;   // inverse outputs fed back to the forward core
  int n_b2b_fwd = 0, n_b2b_inv = 0;
  int n_gap = 0;
  int n_both = 0;
  int n_corner = 0;
  int n_switch = 0;
  int n_fwd_vec = 0;

  typedef struct { vec_t v; int t; bit chain; } item_t;
  item_t qf [$];  // expected forward outputs
  item_t qi [$];  // expected inverse outputs

  initial begin
    clk = 1'b0;
    forever #5 clk = ~clk;
  end

  initial begin
    cyc = 0;
    forever begin
      @(posedge clk);
      cyc++;
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic vec_t rand_pixels();
    vec_t v;
    int sel;
    sel = urand_range(0, 9);
    if (sel < 8) begin
      foreach (v[n]) v[n] = urand_range(MINV, MAXV);
    end else begin
      int k;
      bit flip;
      k = urand_range(0, 7);
      flip = bit'(urand_range(0, 1));
      foreach (v[n]) v[n] = ((TSTAR[k][n] >= 0) ^ flip) ? MAXV : MINV;
    end
    return v;
  endfunction

  function automatic bit is_corner(input vec_t v);
    foreach (v[n]) if (v[n] != MAXV && v[n] != MINV) return 1'b0;
    return 1'b1;
  endfunction

  task automatic compare(input string what, input vec_t got, input vec_t exp_v,
                         input int lat, input int exp_lat);
    checks++;
    if (lat != exp_lat) begin
      failures++;
      $display("%s: latency %0d, expected %0d", what, lat, exp_lat);
    end
    foreach (got[k]) begin
      checks++;
      if (got[k] != exp_v[k]) begin
        failures++;
        if (failures < 10)
          $display("%s[%0d] = %0d, expected %0d (cycle %0d)", what, k, got[k], exp_v[k], cyc);
      end
    end
  endtask

  // One cycle of checking and driving; mode 0 is analysis -> synthesis,
  // mode 1 synthesis -> analysis. new_ok allows a fresh input vector.
  task automatic step(input bit mode, input bit new_ok, inout int sent);
    vec_t gf, gi, nv;
    item_t e;
    bit f_out, i_out;
    bit prev_f, prev_i;
    @(negedge clk);
    prev_f = fwd_in_valid;
    prev_i = inv_in_valid;
    f_out = fwd_out_valid;
    i_out = inv_out_valid;
    foreach (gf[k]) gf[k] = int'(fwd_X[k]);
    foreach (gi[k]) gi[k] = int'(inv_y[k]);
    if (f_out && i_out) n_both++;
    fwd_in_valid = 1'b0;
    inv_in_valid = 1'b0;

    if (f_out) begin
      if (qf.size() == 0) begin
        failures++; checks++;
        $display("unexpected forward output at cycle %0d", cyc);
      end else begin
        e = qf.pop_front();
        compare("fwd_X", gf, e.v, cyc - e.t, FWD_LATENCY);
        if (e.chain) begin
          // Hand the coefficients to the inverse core.
          foreach (inv_X[k]) inv_X[k] = fwd_X[k];
          inv_in_valid = 1'b1;
          qi.push_back('{v: inv_ref(e.v), t: cyc, chain: 1'b0});
          n_chain_fi++;
        end
      end
    end
    if (i_out) begin
      if (qi.size() == 0) begin
        failures++; checks++;
        $display("unexpected inverse output at cycle %0d", cyc);
      end else begin
        e = qi.pop_front();
        compare("inv_y", gi, e.v, cyc - e.t, INV_LATENCY);
        if (e.chain) begin
          // Feed the reconstructed samples back to the forward core; the
          // expected result was stored with the item (D1^-1 c) below.
          foreach (fwd_x[n]) fwd_x[n] = W'(inv_y[n]);
          fwd_in_valid = 1'b1;
          // The forward result is checked against D1^-1 c, kept in a
          // queue of its own when c was generated.
          nv = qsa[0];
          qsa.delete(0);
          qf.push_back('{v: nv, t: cyc, chain: 1'b0});
          n_chain_if++;
          n_fwd_vec++;
        end
      end
    end

    if (new_ok && urand_range(0, 4) != 0) begin
      if (mode == 1'b0) begin
        nv = rand_pixels();
        if (is_corner(nv)) n_corner++;
        foreach (fwd_x[n]) fwd_x[n] = W'(nv[n]);
        fwd_in_valid = 1'b1;
        qf.push_back('{v: fwd_ref(nv), t: cyc, chain: 1'b1});
        n_fwd_vec++;
      end else begin
        vec_t d;
        foreach (nv[k]) nv[k] = urand_range(-9, 9);
        foreach (d[k]) d[k] = D1_INV[k] * nv[k];
        foreach (inv_X[k]) inv_X[k] = WC'(nv[k]);
        inv_in_valid = 1'b1;
        qi.push_back('{v: inv_ref(nv), t: cyc, chain: 1'b1});
        qsa.push_back(d);
      end
      sent++;
    end else if (new_ok) begin
      n_gap++;
    end
    if (fwd_in_valid && prev_f) n_b2b_fwd++;
    if (inv_in_valid && prev_i) n_b2b_inv++;
    if (!fwd_in_valid) foreach (fwd_x[n]) fwd_x[n] = W'(urand_range(MINV, MAXV));
    if (!inv_in_valid) foreach (inv_X[k]) inv_X[k] = WC'(urand_range(-1000, 1000));
  endtask

  vec_t qsa [$];  // expected D1^-1 c for the synthesis -> analysis loop

  task automatic run_segment(input bit mode, input int count);
    int sent = 0;
    while (sent < count) step(mode, 1'b1, sent);
    // Drain both pipelines before the next segment.
    while (qf.size() != 0 || qi.size() != 0) step(mode, 1'b0, sent);
    n_switch++;
  endtask

  initial begin
    rst_n = 1'b0;
    fwd_in_valid = 1'b0;
    inv_in_valid = 1'b0;
    foreach (fwd_x[n]) fwd_x[n] = '0;
    foreach (inv_X[k]) inv_X[k] = '0;
    repeat (4) begin
      @(negedge clk);
      checks++;
      if (fwd_out_valid || inv_out_valid) begin
        failures++;
        $display("valid output during reset");
      end
    end
    rst_n = 1'b1;

    for (int s = 0; s < SEGMENTS; s++) begin
      if (s % 2 == 0) run_segment(1'b0, N_AS / (SEGMENTS / 2));
      else            run_segment(1'b1, N_SA / (SEGMENTS / 2));
    end
    repeat (8) begin
      @(negedge clk);
      checks++;
      if (fwd_out_valid || inv_out_valid) begin
        failures++;
        $display("valid output with no input");
      end
    end

    $display("forward vectors=%0d fwd->inv=%0d inv->fwd=%0d", n_fwd_vec, n_chain_fi, n_chain_if);
    $display("back_to_back fwd=%0d inv=%0d gaps=%0d both_out=%0d corners=%0d switches=%0d",
             n_b2b_fwd, n_b2b_inv, n_gap, n_both, n_corner, n_switch);
    checks++;
    if (n_fwd_vec < 10000) begin failures++; $display("fewer than 10000 forward vectors"); end
    checks++;
    if (n_chain_fi != N_AS) begin failures++; $display("fwd->inv count %0d", n_chain_fi); end
    checks++;
    if (n_chain_if != N_SA) begin failures++; $display("inv->fwd count %0d", n_chain_if); end
    checks++;
    if (n_b2b_fwd == 0 || n_b2b_inv == 0 || n_gap == 0 || n_both == 0 ||
        n_corner == 0 || n_switch < 2) begin
      failures++;
      $display("a situation the bench should cover never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
