// adtt_fwd_tb: self-checking test bench of the forward approximate DTT core.
//
// It streams vectors into adtt_fwd with random one-cycle gaps and compares
// every output vector with the matrix product T* x from adtt_ref_pkg. The
// stimulus mixes uniformly random samples with corner vectors: all samples
// at the most negative or most positive value, and for each row k the
// vector whose signs follow row k of T* (which drives X_k to its largest
// magnitude). Each output must arrive exactly FWD_LATENCY cycles after its
// input, and vectors given on consecutive cycles must come out on
// consecutive cycles (one transform per clock). out_valid is also checked
// during and right after reset.
module adtt_fwd_tb;
  import adtt_pkg::*;
  import adtt_ref_pkg::*;

  localparam int unsigned W  = 8;
  localparam int unsigned WO = W + FWD_GROWTH;
  localparam int MAXV = (1 <<< (W - 1)) - 1;
  localparam int MINV = -(1 <<< (W - 1));
  localparam int NVEC = 4000;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic signed [W-1:0]  x [N];
  logic out_valid;
  logic signed [WO-1:0] X [N];

  int checks = 0;
  int failures = 0;
  int cyc = 0;
  int sent = 0, got = 0, corners = 0, b2b = 0;

  typedef struct { vec_t v; int t; } item_t;
  item_t q [$];

  adtt_fwd dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic vec_t make_vec();
    vec_t v;
    int sel;
    sel = urand_range(0, 9);
    if (sel < 7) begin
      foreach (v[n]) v[n] = urand_range(MINV, MAXV);
    end else if (sel == 7) begin
      bit s;
      s = bit'(urand_range(0, 1));
      foreach (v[n]) v[n] = s ? MAXV : MINV;
    end else begin
      int k;
      bit flip;
      k = urand_range(0, 7);
      flip = bit'(urand_range(0, 1));
      foreach (v[n])
        v[n] = ((TSTAR[k][n] >= 0) ^ flip) ? MAXV : MINV;
    end
    return v;
  endfunction

  initial begin
    foreach (x[n]) x[n] = '0;
    // Reset: no valid output while in reset or before any input.
    repeat (4) begin
      @(negedge clk);
      checks++;
      if (out_valid) begin failures++; $display("out_valid during reset"); end
    end
    rst_n = 1'b1;
    repeat (4) begin
      @(negedge clk);
      checks++;
      if (out_valid) begin failures++; $display("out_valid without input"); end
    end

    while (got < NVEC) begin
      @(negedge clk);
      // Check the output visible in this cycle.
      if (out_valid) begin
        item_t e;
        checks++;
        if (q.size() == 0) begin
          failures++;
          $display("unexpected output at cycle %0d", cyc);
        end else begin
          e = q.pop_front();
          if (cyc - e.t != FWD_LATENCY) begin
            failures++;
            $display("latency %0d, expected %0d", cyc - e.t, FWD_LATENCY);
          end
          foreach (X[k]) begin
            checks++;
            if (int'(X[k]) != e.v[k]) begin
              failures++;
              if (failures < 10)
                $display("X[%0d] = %0d, expected %0d", k, X[k], e.v[k]);
            end
          end
        end
        got++;
      end
      // Drive the next input.
      if (sent < NVEC && urand_range(0, 3) != 0) begin
        vec_t v;
        v = make_vec();
        if (in_valid) b2b++;
        foreach (x[n]) x[n] = W'(v[n]);
        if (v[0] == MAXV || v[0] == MINV) corners++;
        q.push_back('{v: fwd_ref(v), t: cyc});
        in_valid = 1'b1;
        sent++;
      end else begin
        in_valid = 1'b0;
        foreach (x[n]) x[n] = W'(urand_range(MINV, MAXV));
      end
      if (cyc > 19000) break;
    end

    checks++;
    if (q.size() != 0 || got != NVEC) begin
      failures++;
      $display("%0d vectors sent, %0d received", sent, got);
    end
    checks++;
    if (b2b == 0 || corners == 0) begin
      failures++;
      $display("stimulus lacked back-to-back or corner vectors");
    end
    $display("vectors=%0d back_to_back=%0d corner_like=%0d", got, b2b, corners);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
