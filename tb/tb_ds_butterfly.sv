// tb_ds_butterfly: end-to-end test of the digit-slicing butterfly at its
// default sizes (64-point twiddle ROM, 16-bit data, 4x4-bit digits).
//
// A scoreboard predicts every result from the operands with plain 64-bit
// integer multiplication and its own cos/sin twiddle table (rounded to
// Q1.15, cos(0) saturated to 32767):
//   xr = floor((ar*2^15 + br*wr + bi*wi) / 2^15)   xi = floor((ai*2^15 + bi*wr - br*wi) / 2^15)
//   yr = floor((ar*2^15 - br*wr - bi*wi) / 2^15)   yi = floor((ai*2^15 - bi*wr + br*wi) / 2^15)
// and checks that each result appears exactly LATENCY cycles after its
// operands and that out_valid never rises without a pending result.
//
// Phases: directed corner operands; a long random stream with random idle
// cycles; a reset in the middle of a burst (the pipeline must drop what it
// holds); and a complete 64-point radix-2 DIT FFT (six stages of 32
// butterflies, each stage streamed back to back, outputs halved between
// stages) compared with a directly computed DFT. The mechanisms counted, each
// of which must occur at least once: back-to-back issue, idle cycles inside
// a stream, every twiddle index, a negative top digit in A and in B, the most
// negative input, a pipeline flush by reset.
module tb_ds_butterfly;
  localparam int FFT_N   = ds_pkg::FFT_N;
  localparam int AW      = $clog2(FFT_N / 2);
  localparam int LATENCY = 4;

  logic               clk = 0;
  logic               rst_n = 0;
  logic               in_valid = 0;
  logic signed [15:0] ar = 0, ai = 0, br = 0, bi = 0;
  logic [AW-1:0]      tw_idx = 0;
  logic               out_valid;
  logic signed [17:0] xr, xi, yr, yi;

  ds_butterfly dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid),
    .ar(ar), .ai(ai), .br(br), .bi(bi), .tw_idx(tw_idx),
    .out_valid(out_valid), .xr(xr), .xi(xi), .yr(yr), .yi(yi)
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // ---------------- watchdog ----------------
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference twiddles ----------------
  longint tw_r[FFT_N/2], tw_i[FFT_N/2];
  initial begin
    real a;
    for (int r = 0; r < FFT_N / 2; r++) begin
      a = 2.0 * 3.14159265358979323846 * r / FFT_N;
      tw_r[r] = longint'($cos(a) * 32768.0);
      tw_i[r] = longint'($sin(a) * 32768.0);
      if (tw_r[r] > 32767) tw_r[r] = 32767;
      if (tw_i[r] > 32767) tw_i[r] = 32767;
    end
  end

  function automatic longint floor15(longint v);
    return (v >= 0) ? v / 32768 : -((-v + 32767) / 32768);
  endfunction

  // ---------------- scoreboard ----------------
  typedef struct {
    longint due;
    longint xr, xi, yr, yi;
  } exp_t;

  exp_t   pending[$];
  longint cyc = 0;
  longint got_xr[$], got_xi[$], got_yr[$], got_yi[$];  // results in arrival order

  // mechanism counters
  int n_back_to_back = 0, n_idle_in_stream = 0, n_neg_msd_a = 0, n_neg_msd_b = 0;
  int n_most_negative = 0, n_flush = 0, n_results = 0;
  bit tw_seen[FFT_N/2];
  bit prev_valid = 0, in_stream = 0;

  always @(posedge clk) begin
    cyc++;
    if (!rst_n) begin
      if (pending.size() != 0) n_flush++;
      pending.delete();
      prev_valid = 0;
    end else begin
      if (in_valid) begin
        exp_t e;
        longint pr, pi;
        pr = longint'(br) * tw_r[tw_idx] + longint'(bi) * tw_i[tw_idx];
        pi = longint'(bi) * tw_r[tw_idx] - longint'(br) * tw_i[tw_idx];
        e.due = cyc + LATENCY - 1;
        e.xr = floor15(longint'(ar) * 32768 + pr);
        e.xi = floor15(longint'(ai) * 32768 + pi);
        e.yr = floor15(longint'(ar) * 32768 - pr);
        e.yi = floor15(longint'(ai) * 32768 - pi);
        pending.push_back(e);
        if (prev_valid) n_back_to_back++;
        tw_seen[tw_idx] = 1;
        if (ar < 0 || ai < 0) n_neg_msd_a++;
        if (br < 0 || bi < 0) n_neg_msd_b++;
        if (ar == -32768 || ai == -32768 || br == -32768 || bi == -32768) n_most_negative++;
      end else if (in_stream) begin
        n_idle_in_stream++;
      end
      prev_valid = in_valid;
    end
    #1;
    if (out_valid) begin
      checks++;
      if (pending.size() == 0) begin
        failures++;
        $display("FAIL cycle %0d: out_valid with nothing pending", cyc);
      end else begin
        exp_t e;
        e = pending.pop_front();
        n_results++;
        if (e.due != cyc) begin
          failures++;
          $display("FAIL result due at cycle %0d arrived at %0d", e.due, cyc);
        end
        checks += 4;
        if (longint'(xr) != e.xr || longint'(xi) != e.xi ||
            longint'(yr) != e.yr || longint'(yi) != e.yi) begin
          failures++;
          $display("FAIL cycle %0d: X=(%0d,%0d) Y=(%0d,%0d) expected X=(%0d,%0d) Y=(%0d,%0d)",
                   cyc, xr, xi, yr, yi, e.xr, e.xi, e.yr, e.yi);
        end
        got_xr.push_back(longint'(xr));
        got_xi.push_back(longint'(xi));
        got_yr.push_back(longint'(yr));
        got_yi.push_back(longint'(yi));
      end
    end else if (pending.size() != 0 && pending[0].due <= cyc) begin
      checks++;
      failures++;
      $display("FAIL cycle %0d: result due at %0d missing", cyc, pending[0].due);
      void'(pending.pop_front());
    end
  end

  // ---------------- driver ----------------
  task automatic issue(logic signed [15:0] a_r, a_i, b_r, b_i, int r);
    @(negedge clk);
    ar = a_r; ai = a_i; br = b_r; bi = b_i; tw_idx = AW'(r);
    in_valid = 1;
  endtask

  task automatic idle(int n);
    repeat (n) begin
      @(negedge clk);
      in_valid = 0;
      ar = 16'($urandom); ai = 16'($urandom); br = 16'($urandom); bi = 16'($urandom);
    end
  endtask

  task automatic drain();
    idle(LATENCY + 2);
  endtask

  function automatic logic signed [15:0] rnd16();
    return 16'($urandom);
  endfunction

  // ---------------- 64-point FFT through the butterfly ----------------
  longint fr[FFT_N], fi[FFT_N];
  real    xin_r[FFT_N], xin_i[FFT_N];
  int     fft_max_err = 0;

  function automatic int bitrev(int v, int bits);
    int o = 0;
    for (int i = 0; i < bits; i++) o |= ((v >> i) & 1) << (bits - 1 - i);
    return o;
  endfunction

  task automatic run_fft();
    int lg = $clog2(FFT_N);
    int idx[$];
    // input: random complex samples of magnitude below 1/2
    for (int n = 0; n < FFT_N; n++) begin
      int vr = int'($urandom_range(0, 22000)) - 11000;
      int vi = int'($urandom_range(0, 22000)) - 11000;
      xin_r[n] = real'(vr);
      xin_i[n] = real'(vi);
      fr[bitrev(n, lg)] = vr;
      fi[bitrev(n, lg)] = vi;
    end
    for (int s = 1; s <= lg; s++) begin
      int m = 1 << s, half = m / 2, base;
      idx.delete();
      got_xr.delete(); got_xi.delete(); got_yr.delete(); got_yi.delete();
      for (int k = 0; k < FFT_N; k += m)
        for (int j = 0; j < half; j++) begin
          idx.push_back(k + j);
          issue(16'(fr[k + j]), 16'(fi[k + j]), 16'(fr[k + j + half]), 16'(fi[k + j + half]),
                j * (FFT_N / m));
        end
      in_stream = 0;
      drain();
      if (got_xr.size() != idx.size()) begin
        failures++;
        $display("FAIL FFT stage %0d: %0d results for %0d butterflies", s, got_xr.size(), idx.size());
        return;
      end
      // write back, halved (arithmetic shift) to keep the next stage in Q1.15
      foreach (idx[b]) begin
        base = idx[b];
        fr[base]        = got_xr[b] >>> 1;
        fi[base]        = got_xi[b] >>> 1;
        fr[base + half] = got_yr[b] >>> 1;
        fi[base + half] = got_yi[b] >>> 1;
      end
    end
    // compare with the DFT divided by N
    for (int k = 0; k < FFT_N; k++) begin
      real sr = 0.0, si = 0.0, er, ei;
      for (int n = 0; n < FFT_N; n++) begin
        real a = -2.0 * 3.14159265358979323846 * k * n / FFT_N;
        sr += xin_r[n] * $cos(a) - xin_i[n] * $sin(a);
        si += xin_r[n] * $sin(a) + xin_i[n] * $cos(a);
      end
      sr /= FFT_N; si /= FFT_N;
      er = real'(fr[k]) - sr; ei = real'(fi[k]) - si;
      if (er < 0) er = -er;
      if (ei < 0) ei = -ei;
      if (int'(er) > fft_max_err) fft_max_err = int'(er);
      if (int'(ei) > fft_max_err) fft_max_err = int'(ei);
      checks++;
      if (er > 12.0 || ei > 12.0) begin
        failures++;
        $display("FAIL FFT bin %0d: (%0d,%0d) expected (%f,%f)", k, fr[k], fi[k], sr, si);
      end
    end
    $display("64-point FFT: largest error %0d LSB of Q1.15", fft_max_err);
  endtask

  task automatic require(string what, int n);
    checks++;
    if (n == 0) begin
      failures++;
      $display("FAIL mechanism never exercised: %s", what);
    end else
      $display("  %-34s %0d", what, n);
  endtask

  initial begin
    int tw_count;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;

    // directed corners
    in_stream = 1;
    issue(16'sh7FFF, 16'sh7FFF, 16'sh7FFF, 16'sh7FFF, 0);
    issue(16'sh8000, 16'sh8000, 16'sh8000, 16'sh8000, 0);
    issue(16'sh8000, 16'sh7FFF, 16'sh8000, 16'sh8000, FFT_N / 8);
    issue(16'sh7FFF, 16'sh8000, 16'sh8000, 16'sh7FFF, FFT_N / 8);
    issue(16'sh0000, 16'sh0000, 16'sh8000, 16'sh8000, FFT_N / 4 - 1);
    issue(16'shFFFF, 16'sh0001, 16'shFFFF, 16'sh0001, 3);
    idle(2);
    for (int r = 0; r < FFT_N / 2; r++) issue(rnd16(), rnd16(), rnd16(), rnd16(), r);
    in_stream = 0;
    drain();

    // random stream with random idle cycles
    in_stream = 1;
    for (int i = 0; i < 3000; i++) begin
      issue(rnd16(), rnd16(), rnd16(), rnd16(), int'($urandom_range(0, FFT_N / 2 - 1)));
      if ($urandom_range(0, 3) == 0) idle(int'($urandom_range(1, 3)));
    end
    in_stream = 0;
    drain();

    // reset in the middle of a burst: the in-flight results must vanish
    in_stream = 1;
    for (int i = 0; i < 3; i++) issue(rnd16(), rnd16(), rnd16(), rnd16(), i);
    @(negedge clk);
    in_valid = 0;
    rst_n = 0;
    in_stream = 0;
    @(negedge clk);
    rst_n = 1;
    drain();

    // a full 64-point FFT
    run_fft();

    $display("mechanisms exercised:");
    require("back-to-back issue", n_back_to_back);
    require("idle cycles inside a stream", n_idle_in_stream);
    require("negative top digit of A", n_neg_msd_a);
    require("negative top digit of B", n_neg_msd_b);
    require("most negative input -1.0", n_most_negative);
    require("pipeline flush by reset", n_flush);
    tw_count = 0;
    foreach (tw_seen[r]) tw_count += int'(tw_seen[r]);
    checks++;
    if (tw_count != FFT_N / 2) begin
      failures++;
      $display("FAIL only %0d of %0d twiddle indexes used", tw_count, FFT_N / 2);
    end else
      $display("  %-34s %0d", "twiddle indexes used", tw_count);
    $display("  %-34s %0d", "results checked", n_results);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
