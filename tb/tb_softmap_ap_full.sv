// tb_softmap_ap_full: end-to-end test of one head's associative processor
// at its default size (2048 rows). It runs one vector for each sequence
// length from 128 to 4096 (64 to 2048 loaded rows, the others left out of
// the sum), then one vector filling 3/4 of the rows.
//
// For every vector it loads random 6-bit words into the rows, runs the
// Softmax program and compares every row's v_approx, sum and v_sm with a
// plain integer model of the algorithm written here (no bit-level AP code).
// It checks the cycle count of each run against the closed form of the
// microprogram, and counts how often each mechanism occurred: Barrett
// quotient one too small, shift by q > 0 and q = 0, restoring and
// non-restoring division steps, rows left out of the sum, and reduction
// levels. A mechanism that never occurred counts as a failure.
// It also compares v_sm with the floating-point Softmax and reports the
// largest difference (reported only).
module tb_softmap_ap_full;
  import ap_pkg::*;

  localparam int ROWS = 2048;   // the default size of softmap_ap
  localparam int NVEC = 7;
  localparam int L = $clog2(ROWS);

  logic                clk = 1'b0;
  logic                rst_n;
  logic                ld_en, start, ready, busy, done;
  logic [L-1:0]        ld_addr, rd_addr;
  logic [W_V-1:0]      ld_data, max_v;
  logic [W_MU-1:0]     mu;
  logic [W_LN2-1:0]    vln2;
  logic [W_VB-1:0]     vb;
  logic [W_VC-1:0]     vc;
  logic [W_QUO-1:0]    rd_sm;
  logic [W_APPROX-1:0] rd_approx;
  logic [W_SUM-1:0]    rd_sum;

  softmap_ap dut (
    .clk, .rst_n, .ld_en, .ld_addr, .ld_data, .max_v, .mu, .vln2, .vb, .vc,
    .start, .ready, .busy, .done, .rd_addr, .rd_sm, .rd_approx, .rd_sum
  );

  int checks = 0, failures = 0;
  int n_barrett_low = 0, n_shift = 0, n_noshift = 0;
  int n_restore = 0, n_nonrestore = 0, n_partial = 0, n_reduce_levels = 0;
  real worst_err = 0.0;

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (NVEC * 30000 + 20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // closed-form cycle count of one run, from the start edge to done
  function automatic int expected_cycles();
    int c;
    c  = 13 * 2;                               // broadcast writes
    c += 3 * (2 + 8 * M);                      // three M-bit subtractions
    c += W_MU * (2 + 8 * M + 2);               // x * mu
    c += W_LN2 * (2 + 8 * W_Q + 2);            // q * v_ln2
    c += 2 * M;                                // copy t
    c += M * (2 + 8 * M + 2);                  // t * t
    c += 2 + 8 * W_VC + 4 * (W_POLY - W_VC);   // + v_c
    for (int sh = 1; sh < (1 << W_Q); sh <<= 1)
      c += 2 * (2 * (W_POLY - sh) + sh);       // shift by q
    c += 2 * W_APPROX;                         // copy v_approx to the sum field
    c += L * (2 + 8 * W_SUM);                  // reduction
    c += 2;                                    // sum into every row
    c += 2 * W_APPROX;                         // copy v_approx to the remainder
    for (int it = 0; it < W_QUO; it++) begin
      c += (it == 0) ? 1 : 2 * (2 * (W_REM - 1) + 1);       // shift left
      c += 2 * (2 + 8 * W_SUM + 4 * (W_REM - W_SUM));       // subtract and restore
      c += 2 + 2 + 2 + 1;                      // flag clear, flag copy, qbit, loop
    end
    c += 1;                                    // end
    c += 1;                                    // done is registered
    return c;
  endfunction

  // constants for S = 7/63 (inputs clipped to [-7, 0] over 63 steps)
  localparam real S = 7.0 / 63.0;

  int  v      [ROWS];
  bit  valid  [ROWS];
  longint e_approx [ROWS];
  longint e_sum;
  int vmax;

  task automatic model(input int nrows);
    int mx = -1000;
    e_sum = 0;
    for (int r = 0; r < nrows; r++) if (v[r] > mx) mx = v[r];
    max_v = W_V'(mx);
    vmax  = mx;
    for (int r = 0; r < ROWS; r++) begin
      int x, q, rr, t, poly;
      x  = (mx - v[r]) & ((1 << W_V) - 1);
      q  = (x * int'(mu)) >> (2 * M);
      rr = (x - q * int'(vln2)) & ((1 << W_V) - 1);
      t  = (int'(vb) - rr) & ((1 << W_V) - 1);
      poly = (t * t + int'(vc)) & ((1 << W_POLY) - 1);
      e_approx[r] = longint'((poly >> q) & ((1 << W_APPROX) - 1));
      if (r < nrows) begin
        if (rr >= int'(vln2)) n_barrett_low++;
        if (q > 0) n_shift++; else n_noshift++;
        e_sum += e_approx[r];
      end
    end
  endtask

  initial begin
    int cyc0, nrows;
    rst_n = 1'b0; ld_en = 1'b0; start = 1'b0; ld_addr = '0; ld_data = '0;
    rd_addr = '0; max_v = '0;
    vln2 = W_LN2'($rtoi($floor(0.6931 / S)));
    mu   = W_MU'((1 << (2 * M)) / int'(vln2));
    vb   = W_VB'($rtoi($floor(1.353 / S)));
    vc   = W_VC'($rtoi($floor(0.344 / (0.3585 * S * S))));
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (ready);
    for (int n = 0; n < NVEC; n++) begin
      // vector 1 leaves a quarter of the rows out; the last one is a single row
      // sequence lengths 128, 256, ..., 4096 (64 to 2048 rows), then one
      // vector of 3/4 of the rows
      nrows = (n < 6) ? (64 << n) : ROWS - ROWS / 4;
      if (nrows < ROWS) n_partial++;
      for (int r = 0; r < ROWS; r++) begin
        // alternate between the full 6-bit range and the clipped range [-63, 0]/...
        v[r] = (n % 2 == 0) ? int'($urandom_range(63)) - 32 : -int'($urandom_range(31));
      end
      model(nrows);
      @(negedge clk);
      for (int r = 0; r < nrows; r++) begin
        ld_en = 1'b1; ld_addr = L'(r); ld_data = W_V'(v[r]);
        @(negedge clk);
      end
      ld_en = 1'b0;
      start = 1'b1;
      @(posedge clk);
      cyc0 = 0;
      @(negedge clk);
      start = 1'b0;
      check(busy, "busy after start");
      while (!done) begin
        @(posedge clk);
        cyc0++;
      end
      check(cyc0 == expected_cycles(), $sformatf("cycles %0d expected %0d", cyc0, expected_cycles()));
      n_reduce_levels += L;
      for (int r = 0; r < nrows; r++) begin
        longint e_sm;
        real fsum, fref, fe;
        e_sm = (e_approx[r] << F_FRAC) / e_sum;
        rd_addr = L'(r);
        @(posedge clk); #1;
        check(longint'(rd_approx) == e_approx[r],
              $sformatf("vec %0d row %0d approx %0d exp %0d", n, r, rd_approx, e_approx[r]));
        check(longint'(rd_sum) == e_sum,
              $sformatf("vec %0d row %0d sum %0d exp %0d", n, r, rd_sum, e_sum));
        check(longint'(rd_sm) == e_sm,
              $sformatf("vec %0d row %0d sm %0d exp %0d", n, r, rd_sm, e_sm));
        for (int b = 0; b < W_QUO; b++)
          if (rd_sm[b]) n_nonrestore++; else n_restore++;
        // floating-point reference, reported only
        fsum = 0.0;
        for (int rr = 0; rr < nrows; rr++) begin fe = S * real'(v[rr] - vmax); fsum = fsum + $exp(fe); end
        fe = S * real'(v[r] - vmax);
        fref = $exp(fe) / fsum;
        fref = real'(rd_sm) / real'(1 << F_FRAC) - fref;
        if (fref < 0.0) fref = -fref;
        if (fref > worst_err) worst_err = fref;
      end
      @(negedge clk);
    end
    $display("mechanisms: barrett_low=%0d shift=%0d noshift=%0d restore=%0d nonrestore=%0d partial=%0d reduce_levels=%0d",
             n_barrett_low, n_shift, n_noshift, n_restore, n_nonrestore, n_partial, n_reduce_levels);
    $display("largest |v_sm - softmax| = %f", worst_err);
    check(n_barrett_low > 0, "Barrett low quotient never occurred");
    check(n_shift > 0, "shift by q never occurred");
    check(n_noshift > 0, "q = 0 never occurred");
    check(n_restore > 0, "restoring step never occurred");
    check(n_nonrestore > 0, "non-restoring step never occurred");
    check(n_partial > 0, "partial vector never occurred");
    check(n_reduce_levels > 0, "reduction never occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
