// tb_ecg_workload - one minute of ECG-like input through nine copies of the
// acquisition unit, approximated on 0 %, 10 %, ..., 80 % of their adder bits.
//
// The evaluation setting is one minute of a 360 Hz ECG record (21600 samples),
// compressed window by window (256 samples -> 128 measurements, two ones per row).
// 84 full windows are processed. The record itself is not available here, so the
// input is a synthetic normalized ECG: a 72 beats-per-minute train of Gaussian P,
// QRS and T waves plus a slow baseline wander, generated in the testbench. The same
// random index vector z and the same samples go to all nine units, which run in
// lockstep.
//
// Checks: every measurement of every unit equals the bit-level model of its adder.
// The 0 % unit gives exact sums. The total squared error never decreases as the
// approximated share grows. The measurement-domain SNR of each unit against the
// exact sums is printed.
module tb_ecg_workload;
  import tb_ref_pkg::*;

  localparam int N = 256, M = 128, R = 2, W = 36, FRAC = 33;
  localparam int NCFG = 9;          // 0 %, 10 %, ..., 80 %
  localparam int SAMPLES = 21600;   // one minute at 360 Hz
  localparam int WINDOWS = SAMPLES / N;

  logic clk = 1'b0, rst_n = 1'b0;
  logic cfg_we = 1'b0;
  logic [7:0] cfg_addr = '0, cfg_idx = '0;
  logic x_valid = 1'b0;
  logic [W-1:0] x_data = '0;
  logic [NCFG-1:0] x_ready, cfg_ready, y_valid, y_last;
  logic [W-1:0] y_data [NCFG];
  logic [6:0]   y_row [NCFG];

  logic [W-1:0] xwin [N];
  logic [7:0]   z [M*R];
  int checks = 0, failures = 0;
  int rows_seen [NCFG];
  real err2 [NCFG];
  real sig2 = 0.0;

  for (genvar g = 0; g < NCFG; g++) begin : g_unit
    approxcs_top #(.APPROX_PCT(10 * g)) u_top (
      .clk(clk), .rst_n(rst_n),
      .cfg_we(cfg_we), .cfg_addr(cfg_addr), .cfg_idx(cfg_idx), .cfg_ready(cfg_ready[g]),
      .x_valid(x_valid), .x_ready(x_ready[g]), .x_data(x_data),
      .y_valid(y_valid[g]), .y_ready(1'b1), .y_data(y_data[g]), .y_row(y_row[g]), .y_last(y_last[g])
    );

    always @(posedge clk) begin
      if (rst_n && y_valid[g]) begin
        longint unsigned e, ex;
        real d;
        int m;
        m = int'(y_row[g]);
        e = 64'(xwin[z[m*R]]);
        ex = e;
        e  = ref_add(e, 64'(xwin[z[m*R+1]]), W, (W * 10 * g) / 100, 8'h17, 8'hE8);
        ex = ref_add(ex, 64'(xwin[z[m*R+1]]), W, 0, 8'h17, 8'hE8);
        checks++;
        if (64'(y_data[g]) != e) begin
          failures++;
          if (failures < 20) $display("FAIL unit %0d row %0d got %h exp %h", g, m, y_data[g], e);
        end
        d = (real'(longint'(signed'(W'(e)))) - real'(longint'(signed'(W'(ex))))) / (2.0 ** FRAC);
        err2[g] += d * d;
        if (g == 0) sig2 += (real'(longint'(signed'(W'(ex)))) / (2.0 ** FRAC)) ** 2;
        rows_seen[g]++;
      end
    end
  end

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // synthetic normalized ECG value at sample n (360 Hz), in about [-0.6, 0.95]
  function automatic real ecg(input int n);
    real t = real'(n % 300) / 360.0;   // 72 bpm -> 300 samples per beat
    real v;
    v = 0.12 * $exp(-((t - 0.20) ** 2) / (2 * 0.025 ** 2))     // P
      - 0.15 * $exp(-((t - 0.36) ** 2) / (2 * 0.008 ** 2))     // Q
      + 0.85 * $exp(-((t - 0.39) ** 2) / (2 * 0.010 ** 2))     // R
      - 0.25 * $exp(-((t - 0.42) ** 2) / (2 * 0.009 ** 2))     // S
      + 0.30 * $exp(-((t - 0.65) ** 2) / (2 * 0.040 ** 2))     // T
      + 0.05 * $sin(2.0 * 3.14159265 * 0.3 * real'(n) / 360.0); // baseline wander
    return v;
  endfunction

  function automatic logic [W-1:0] quant(input real v);
    return W'(longint'(v * (2.0 ** FRAC)));
  endfunction

  initial begin
    for (int g = 0; g < NCFG; g++) begin
      rows_seen[g] = 0;
      err2[g] = 0.0;
    end
    for (int m = 0; m < M; m++) begin
      int c0, c1;
      c0 = int'($urandom_range(N - 2));
      c1 = int'($urandom_range(N - 1, c0 + 1));
      z[m*R] = 8'(c0);
      z[m*R+1] = 8'(c1);
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int e = 0; e < M * R; e++) begin
      @(negedge clk);
      cfg_we = 1'b1; cfg_addr = 8'(e); cfg_idx = z[e];
    end
    @(negedge clk);
    cfg_we = 1'b0;
    for (int w = 0; w < WINDOWS; w++) begin
      for (int i = 0; i < N; i++) begin
        @(negedge clk);
        while (!(&x_ready)) @(negedge clk);
        x_valid = 1'b1;
        x_data = quant(ecg(w * N + i));
        xwin[i] = x_data;
        @(negedge clk);
        x_valid = 1'b0;
      end
      // wait until all units have delivered the window
      @(negedge clk);
      while (!(&x_ready)) @(negedge clk);
    end
    for (int g = 0; g < NCFG; g++) begin
      checks++;
      if (rows_seen[g] != WINDOWS * M) begin
        failures++;
        $display("FAIL unit %0d delivered %0d measurements, exp %0d", g, rows_seen[g], WINDOWS * M);
      end
      $display("approx %0d %% (%0d bits): squared error %e, measurement SNR %0.1f dB", 10 * g,
               (W * 10 * g) / 100, err2[g], (err2[g] > 0.0) ? 10.0 * $log10(sig2 / err2[g]) : 999.0);
      if (g > 0) begin
        checks++;
        if (err2[g] < err2[g-1]) begin
          failures++;
          $display("FAIL error decreased from %0d %% to %0d %%", 10 * (g - 1), 10 * g);
        end
      end
    end
    checks++;
    if (err2[0] != 0.0) begin
      failures++;
      $display("FAIL 0 %% unit is not exact");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
