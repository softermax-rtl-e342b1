// tb_softermax_top: end-to-end Softermax on the tile at its default size
// (4 PEs, 32 lanes, 128 rows per PE), no parameter overrides.
//
// A batch of score rows of the sequence lengths 128, 256, 384 and 512 is
// softmaxed in three phases, as the accelerator would:
//   1. every PE receives one LANES-element slice per cycle; slice s of a row
//      goes to PE s mod 4.  The numerators and LocalMax that come out are
//      kept in a model of the global buffer.
//   2. the four partial (max, sum) of each row are combined along the PE
//      chain (PE0 read, PE1..PE3 cross merges) and PE3's final values are
//      read out, which stores them into the shared Normalization unit.
//   3. a loader, running concurrently with phase 2, sends every stored slice
//      back through the normalisation port as soon as its row is stored;
//      stores steal cycles from it (ld_ready low).
// Expected results are the exact base-2 softmax 2^x_i / sum_k 2^x_k on reals.
// The tolerance is the error budget of the formats: 2.5 % for the LPW
// reciprocal, plus the truncation of the Q(10,6) PowSum at each of the row's
// merges (1/64 each) relative to the true sum, plus one output LSB.
// The row max must be exact.  The test counts how often each mechanism
// occurred (first slice, new max renormalising the running sum, smaller max
// renormalising the incoming sum, cross-PE merge, load stall, numerator
// renormalisation in the Normalization unit) and fails if one never did.
module tb_softermax_top;
  import softermax_pkg::*;
  localparam int NUM_PE = 4, LANES = 32, NR = 16, MAXS = 16;
  localparam int NB = 1;          // batches of NR rows
  localparam bit ALL384 = 0;      // 1: every row 384 long, else 128/256/384/512
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  real err_max = 0.0, err_sum = 0.0;
  int  err_n = 0;
  int n_first = 0, n_run = 0, n_in = 0, n_cross = 0, n_stall = 0, n_nshift = 0, n_loads = 0;

  logic rst_n;
  us_op_e pe_op [NUM_PE];
  logic pe_first [NUM_PE];
  logic [6:0] pe_addr [NUM_PE];
  logic signed [7:0] pe_x [NUM_PE][LANES];
  logic signed [6:0] chain_max_in;
  logic [15:0] chain_sum_in;
  logic pe_un_valid [NUM_PE];
  logic [6:0] pe_un_addr [NUM_PE];
  logic [15:0] pe_un [NUM_PE][LANES];
  logic signed [6:0] pe_local_max [NUM_PE];
  logic pe_stat_valid [NUM_PE];
  logic signed [6:0] pe_max_out [NUM_PE];
  logic [15:0] pe_sum_out [NUM_PE];
  logic pe_shift_run [NUM_PE], pe_shift_in [NUM_PE];
  logic ld_valid, ld_ready;
  logic [8:0] ld_addr;
  logic signed [6:0] ld_local_max;
  logic [15:0] ld_un [LANES];
  logic y_valid;
  logic [8:0] y_addr;
  logic [7:0] y [LANES];

  softermax_top dut (.*);

  // rows
  int  row_len [NR];
  int  xs [NR][MAXS*LANES];
  real denom [NR];       // sum_k 2^(x_k/4 - M) with M = ceil max of row
  int  row_max [NR];
  // global buffer model
  logic [15:0] gb_un [NR][MAXS][LANES];
  int          gb_lm [NR][MAXS];
  bit          stored [NR];
  bit          done_p1 = 0, done_all = 0;
  // issued-slice FIFOs per PE
  int fifo_row [NUM_PE][$];
  int fifo_sl  [NUM_PE][$];

  function automatic real p2r(real e);
    return 2.0 ** e;
  endfunction

  // ---------------- stimulus ----------------
  initial begin
    int lens [4];
    int cyc, nsl, j, s, base;
    int plist_row [NUM_PE][$];
    int plist_sl  [NUM_PE][$];
    real mx;
    lens = '{128, 256, 384, 512};
    rst_n = 0; chain_max_in = 0; chain_sum_in = 0;
    for (int p = 0; p < NUM_PE; p++) begin
      pe_op[p] = US_NOP; pe_first[p] = 0; pe_addr[p] = 0;
      foreach (pe_x[p][i]) pe_x[p][i] = 0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int b = 0; b < NB; b++) begin
    foreach (stored[i]) stored[i] = 0;
    done_p1 = 0; done_all = 0;
    // build rows: even rows ramp up (new maxima keep appearing), odd rows random
    for (int r = 0; r < NR; r++) begin
      row_len[r] = ALL384 ? 384 : lens[r % 4];
      base = $urandom_range(0, 100) - 90;
      row_max[r] = -1000;
      for (int i = 0; i < row_len[r]; i++) begin
        if (r % 2 == 0) xs[r][i] = base + (i * 60) / row_len[r] + $urandom_range(0, 24);
        else            xs[r][i] = base + $urandom_range(0, 80);
        if (xs[r][i] > 127) xs[r][i] = 127;
        if (int'($ceil(real'(xs[r][i]) / 4.0)) > row_max[r]) row_max[r] = int'($ceil(real'(xs[r][i]) / 4.0));
      end
      denom[r] = 0.0;
      for (int i = 0; i < row_len[r]; i++) denom[r] += p2r(real'(xs[r][i]) / 4.0 - real'(row_max[r]));
    end
    for (int r = 0; r < NR; r++) begin
      nsl = row_len[r] / LANES;
      for (s = 0; s < nsl; s++) begin
        plist_row[s % NUM_PE].push_back(r);
        plist_sl[s % NUM_PE].push_back(s);
      end
    end
    // -------- phase 1: one slice per PE per cycle --------
    cyc = 0;
    while (plist_row[0].size() > 0 || plist_row[1].size() > 0 ||
           plist_row[2].size() > 0 || plist_row[3].size() > 0) begin
      @(negedge clk);
      for (int p = 0; p < NUM_PE; p++) begin
        if (plist_row[p].size() > 0) begin
          j = plist_row[p].pop_front();
          s = plist_sl[p].pop_front();
          pe_op[p] = US_SLICE; pe_first[p] = (s < NUM_PE); pe_addr[p] = 7'(j);
          if (s < NUM_PE) n_first++;
          for (int i = 0; i < LANES; i++) pe_x[p][i] = 8'(xs[j][s*LANES + i]);
          fifo_row[p].push_back(j); fifo_sl[p].push_back(s);
        end else begin
          pe_op[p] = US_NOP;
        end
      end
      cyc++;
    end
    @(negedge clk);
    for (int p = 0; p < NUM_PE; p++) pe_op[p] = US_NOP;
    // rate: 1 slice per PE per cycle; the slowest PE had all of its slices
    checks++;
    nsl = 0;
    for (int r = 0; r < NR; r++) nsl += row_len[r] / LANES;
    if (cyc != nsl / NUM_PE) begin
      failures++; $display("FAIL: phase 1 took %0d cycles", cyc);
    end
    repeat (3) @(negedge clk);
    done_p1 = 1;
    // -------- phase 2: cross-PE chain, then store into Normalization --------
    for (int r = 0; r < NR; r++) begin
      pe_op[0] = US_READ; pe_first[0] = 0; pe_addr[0] = 7'(r);
      @(negedge clk); pe_op[0] = US_NOP;
      @(negedge clk);
      for (int p = 1; p < NUM_PE; p++) begin
        checks++;
        if (!pe_stat_valid[p-1]) begin failures++; $display("FAIL: no stat from PE%0d", p-1); end
        pe_op[p] = US_CROSS; pe_first[p] = 0; pe_addr[p] = 7'(r);
        n_cross++;
        @(negedge clk); pe_op[p] = US_NOP;
        @(negedge clk);
      end
      pe_op[NUM_PE-1] = US_READ; pe_addr[NUM_PE-1] = 7'(r);
      @(negedge clk); pe_op[NUM_PE-1] = US_NOP;
      @(negedge clk);
      // PE3's READ answer is on the outputs now and is stored this cycle
      checks++;
      if (!pe_stat_valid[NUM_PE-1] || int'(pe_max_out[NUM_PE-1]) != row_max[r] ||
          real'(pe_sum_out[NUM_PE-1]) / 64.0 > denom[r] + 0.01 ||
          real'(pe_sum_out[NUM_PE-1]) / 64.0 < denom[r] - real'(row_len[r] / LANES + NUM_PE) / 64.0 - 0.01) begin
        failures++;
        $display("FAIL row %0d stats: max %0d exp %0d, sum %f exp %f", r, pe_max_out[NUM_PE-1], row_max[r],
                 real'(pe_sum_out[NUM_PE-1]) / 64.0, denom[r]);
      end
      @(negedge clk);
      stored[r] = 1;
    end
    wait (done_all);
    repeat (3) @(negedge clk);
    end  // batches
    if (n_first == 0 || n_run == 0 || n_in == 0 || n_cross == 0 || n_stall == 0 || n_nshift == 0) begin
      failures++; $display("FAIL: a mechanism never occurred");
    end
    $display("first=%0d renorm-running=%0d renorm-incoming=%0d cross=%0d ld-stalls=%0d norm-shifts=%0d loads=%0d",
             n_first, n_run, n_in, n_cross, n_stall, n_nshift, n_loads);
    $display("output error against exact base-2 softmax: max %0.2f LSB, mean %0.3f LSB (LSB = 1/128)",
             err_max, err_sum / real'(err_n));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- capture numerators (global buffer model) ----------------
  always @(negedge clk) begin
    if (rst_n) begin
      for (int p = 0; p < NUM_PE; p++) begin
        if (pe_un_valid[p]) begin
          int j, s;
          checks++;
          if (fifo_row[p].size() == 0) begin
            failures++; $display("FAIL: unexpected numerators from PE%0d", p);
          end else begin
            j = fifo_row[p].pop_front(); s = fifo_sl[p].pop_front();
            if (int'(pe_un_addr[p]) != j) failures++;
            gb_un[j][s] = pe_un[p];
            gb_lm[j][s] = int'(pe_local_max[p]);
          end
        end
        if (pe_stat_valid[p]) begin
          n_run += int'(pe_shift_run[p]);
          n_in  += int'(pe_shift_in[p]);
        end
      end
    end
  end

  // ---------------- loader and result check ----------------
  real exp_y [$];
  int  exp_tol_row [$];

  always @(negedge clk) begin
    if (rst_n && y_valid) begin
      real e [LANES];
      real tol;
      int r;
      checks++;
      if (exp_tol_row.size() == 0) begin
        failures++; $display("FAIL: unexpected result");
      end else begin
        for (int i = 0; i < LANES; i++) e[i] = exp_y.pop_front();
        r = exp_tol_row.pop_front();
        if (int'(y_addr) != (3 << 7) + r) failures++;
        for (int i = 0; i < LANES; i++) begin
          tol = e[i] * (0.025 + real'(row_len[r] / LANES + NUM_PE) / 64.0 / denom[r]) + 1.0;
          err_n++;
          err_sum += (real'(y[i]) > e[i]) ? real'(y[i]) - e[i] : e[i] - real'(y[i]);
          if (((real'(y[i]) > e[i]) ? real'(y[i]) - e[i] : e[i] - real'(y[i])) > err_max)
            err_max = (real'(y[i]) > e[i]) ? real'(y[i]) - e[i] : e[i] - real'(y[i]);
          checks++;
          if (real'(y[i]) > e[i] + tol || real'(y[i]) < e[i] - tol) begin
            failures++;
            if (failures < 10) $display("FAIL row %0d lane %0d: y=%0d exp %f", r, i, y[i], e[i]);
          end
        end
      end
    end
  end

  initial begin
    real e [LANES];
    int nsl;
    ld_valid = 0; ld_addr = 0; ld_local_max = 0;
    foreach (ld_un[i]) ld_un[i] = 0;
    for (int b = 0; b < NB; b++) begin
    wait (done_p1 && !done_all);
    for (int r = 0; r < NR; r++) begin
      nsl = row_len[r] / LANES;
      while (!stored[r]) @(negedge clk);
      for (int s = 0; s < nsl; s++) begin
        ld_valid = 1; ld_addr = 9'((3 << 7) + r); ld_local_max = 7'(gb_lm[r][s]); ld_un = gb_un[r][s];
        if (gb_lm[r][s] != row_max[r]) n_nshift++;
        for (int i = 0; i < LANES; i++) begin
          e[i] = p2r(real'(xs[r][s*LANES + i]) / 4.0 - real'(row_max[r])) / denom[r] * 128.0;
          if (e[i] > 128.0) e[i] = 128.0;
        end
        #1;
        while (!ld_ready) begin
          n_stall++;
          @(negedge clk);
          #1;
        end
        for (int i = 0; i < LANES; i++) exp_y.push_back(e[i]);
        exp_tol_row.push_back(r);
        n_loads++;
        @(negedge clk);
      end
      ld_valid = 0;
    end
    repeat (3) @(negedge clk);
    checks++;
    if (exp_tol_row.size() != 0) begin failures++; $display("FAIL: %0d results missing", exp_tol_row.size()); end
    done_all = 1;
    end  // batches
  end

  initial begin
    repeat (20000 * NB) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
