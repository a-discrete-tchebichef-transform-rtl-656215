// adtt_image_rows_tb: the row pass of a 2-D block transform over one
// 512 x 512 8-bit grayscale image, the image size of the JPEG-like
// experiment the transform was evaluated on, run through adtt_top at its
// default sizes.
//
// The bench makes a synthetic image (smooth gradients, a few sharp edges
// and noise), level-shifts it to -128..127 and cuts it into 8 x 8 blocks.
// It sends the 8 rows of every block, 32768 vectors in all, to the forward
// core on consecutive cycles, and checks every coefficient against T* x
// from the reference package. It also checks the rate: the last vector's
// result must appear 32768 + 2 cycles after the first vector went in (one
// vector per clock, 3-cycle latency). The column pass of the 2-D transform
// needs 11-bit inputs and a transposition store, which this design does
// not contain, so the bench stops after the rows.
module adtt_image_rows_tb;
  import adtt_pkg::*;
  import adtt_ref_pkg::*;

  localparam int unsigned W  = 8;
  localparam int unsigned WC = W + FWD_GROWTH;
  localparam int unsigned WY = WC + INV_GROWTH;
  localparam int SIZE = 512;
  localparam int NVEC = SIZE * SIZE / 8;

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
  int cyc = 0;
  int first_in = -1, last_out = -1, got = 0;

  byte unsigned img [SIZE][SIZE];
  vec_t expq [$];

  initial begin
    clk = 1'b0;
    forever #5 clk = ~clk;
  end

  initial begin
    forever begin
      @(posedge clk);
      cyc++;
    end
  end

  initial begin
    repeat (NVEC + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Synthetic test image.
  initial begin
    for (int r = 0; r < SIZE; r++)
      for (int c = 0; c < SIZE; c++) begin
        int p;
        p = (r / 2) + (c / 4) + ((r * c) >> 12);
        if ((r / 64 + c / 64) % 2 == 1) p += 60;     // sharp block edges
        p += int'($urandom % 16) - 8;                // noise
        if (p < 0) p = 0;
        if (p > 255) p = 255;
        img[r][c] = byte'(p);
      end
  end

  // Output checker.
  always @(negedge clk) begin
    if (rst_n && fwd_out_valid) begin
      vec_t e;
      checks++;
      if (expq.size() == 0) begin
        failures++;
        $display("unexpected output at cycle %0d", cyc);
      end else begin
        e = expq[0];
        expq.delete(0);
        foreach (e[k]) begin
          checks++;
          if (int'(fwd_X[k]) != e[k]) begin
            failures++;
            if (failures < 10) $display("X[%0d] = %0d, expected %0d", k, fwd_X[k], e[k]);
          end
        end
      end
      got++;
      last_out = cyc;
    end
  end

  initial begin
    rst_n = 1'b0;
    fwd_in_valid = 1'b0;
    inv_in_valid = 1'b0;
    foreach (fwd_x[n]) fwd_x[n] = '0;
    foreach (inv_X[k]) inv_X[k] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // Blocks in raster order, rows of each block in order.
    for (int br = 0; br < SIZE / 8; br++)
      for (int bc = 0; bc < SIZE / 8; bc++)
        for (int i = 0; i < 8; i++) begin
          vec_t v;
          @(negedge clk);
          foreach (v[n]) v[n] = int'(img[br * 8 + i][bc * 8 + n]) - 128;
          foreach (fwd_x[n]) fwd_x[n] = W'(v[n]);
          fwd_in_valid = 1'b1;
          expq.push_back(fwd_ref(v));
          if (first_in < 0) first_in = cyc;
        end
    @(negedge clk);
    fwd_in_valid = 1'b0;
    repeat (6) @(negedge clk);

    checks++;
    if (got != NVEC) begin
      failures++;
      $display("%0d row vectors out, expected %0d", got, NVEC);
    end
    checks++;
    if (last_out - first_in != NVEC - 1 + FWD_LATENCY) begin
      failures++;
      $display("image took %0d cycles, expected %0d", last_out - first_in, NVEC - 1 + FWD_LATENCY);
    end
    checks++;
    if (inv_out_valid) begin
      failures++;
      $display("inverse core produced output with no input");
    end
    $display("row vectors=%0d cycles from first input to last output=%0d",
             got, last_out - first_in);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
