// tb_approxcs_top - end-to-end test of the acquisition unit at its default size
// (N = 256 samples, M = 128 measurements, R = 2, 36-bit samples, 40 % approximate
// adder bits).
//
// Three windows are run. Before each window, the testbench writes a fresh random
// sorted index vector z. It then streams a window of random normalized samples in
// [-1, 1) with random gaps. Every measurement is compared with a reference built
// from the testbench's own copies of x and z and the bit-level adder model. The
// testbench also checks:
//   - latency: with y_ready high, the last measurement is accepted 1 + M*(3R+1)
//     cycles after the last sample of the window (window 0);
//   - input stall: a sample offered while the window is computed waits (x_ready low);
//   - output back-pressure: y_ready is randomly low in windows 1 and 2;
//   - z writes offered while computing are ignored (cfg_ready low);
//   - z reprogramming between windows changes the selection;
//   - the approximation acts: some measurements differ from the exact sums.
// Each of these mechanisms must occur at least once.
module tb_approxcs_top;
  import tb_ref_pkg::*;

  localparam int N = 256, M = 128, R = 2, W = 36, K = 14, WINDOWS = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  logic cfg_we = 1'b0, cfg_ready;
  logic [7:0] cfg_addr = '0, cfg_idx = '0;
  logic x_valid = 1'b0, x_ready;
  logic [W-1:0] x_data = '0;
  logic y_valid, y_ready = 1'b0, y_last;
  logic [W-1:0] y_data;
  logic [6:0] y_row;

  logic [W-1:0] xwin [WINDOWS][N];
  logic [7:0]   zwin [WINDOWS][M*R];

  int checks = 0, failures = 0;
  longint cycle = 0;
  longint last_sample_cycle = 0, last_y_cycle = 0;
  int n_input_stall = 0, n_output_stall = 0, n_cfg_blocked = 0, n_approx = 0, n_reprog = 0, n_gap = 0;

  approxcs_top dut (
    .clk(clk), .rst_n(rst_n),
    .cfg_we(cfg_we), .cfg_addr(cfg_addr), .cfg_idx(cfg_idx), .cfg_ready(cfg_ready),
    .x_valid(x_valid), .x_ready(x_ready), .x_data(x_data),
    .y_valid(y_valid), .y_ready(y_ready), .y_data(y_data), .y_row(y_row), .y_last(y_last)
  );

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", msg);
    end
  endtask

  // random sample in [-1, 1): 34-bit two's complement value sign-extended to W bits
  function automatic logic [W-1:0] rand_sample();
    logic [33:0] v = 34'({$urandom, $urandom});
    return W'(signed'(v));
  endfunction

  task automatic program_z(input int w);
    for (int m = 0; m < M; m++) begin
      int c0 = int'($urandom_range(N - 2));
      int c1 = int'($urandom_range(N - 1, c0 + 1));
      zwin[w][m*R] = 8'(c0);
      zwin[w][m*R+1] = 8'(c1);
    end
    for (int e = 0; e < M * R; e++) begin
      @(negedge clk);
      check(cfg_ready, "cfg_ready while idle");
      cfg_we = 1'b1; cfg_addr = 8'(e); cfg_idx = zwin[w][e];
    end
    @(negedge clk);
    cfg_we = 1'b0;
    if (w > 0) n_reprog++;
  endtask

  // Send one sample; returns when it has been accepted.
  task automatic send(input logic [W-1:0] v, input bit count_stall);
    if ($urandom_range(7) == 0) begin
      x_valid = 1'b0;
      n_gap++;
      @(negedge clk);
    end
    x_valid = 1'b1; x_data = v;
    @(posedge clk);
    while (!x_ready) begin
      if (count_stall) n_input_stall++;
      @(posedge clk);
    end
    @(negedge clk);
    x_valid = 1'b0;
  endtask

  function automatic logic [W-1:0] expected(input int w, input int m, input bit exact);
    longint unsigned acc = 64'(xwin[w][zwin[w][m*R]]);
    for (int q = 1; q < R; q++)
      acc = ref_add(acc, 64'(xwin[w][zwin[w][m*R+q]]), W, exact ? 0 : K, 8'h17, 8'hE8);
    return W'(acc);
  endfunction

  initial begin : driver
    for (int w = 0; w < WINDOWS; w++)
      for (int i = 0; i < N; i++) xwin[w][i] = rand_sample();
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int w = 0; w < WINDOWS; w++) begin
      program_z(w);
      for (int i = 0; i < N; i++) begin
        send(xwin[w][i], 0);
        if (i == N - 1) last_sample_cycle = cycle;
      end
      if (w + 1 < WINDOWS) begin
        // offer the next window's first sample at once: it must wait for the computation
        x_valid = 1'b1; x_data = xwin[w+1][0];
        @(posedge clk);
        check(!x_ready, "x_ready low while computing");
        @(negedge clk);
        x_valid = 1'b0;
        // a z write offered while computing must be ignored
        if (!x_ready) begin
          check(!cfg_ready, "cfg_ready low while computing");
          // a different index that keeps the last row sorted
          cfg_we = 1'b1; cfg_addr = 8'(M * R - 1);
          cfg_idx = (zwin[w][M * R - 1] == 8'(N - 1)) ? zwin[w][M * R - 2] + 8'd1 : 8'(N - 1);
          n_cfg_blocked++;
          @(negedge clk);
          cfg_we = 1'b0;
        end
        n_input_stall++;
        wait (x_ready);
      end
    end
  end

  initial begin : monitor
    for (int w = 0; w < WINDOWS; w++) begin
      int row;
      row = 0;
      while (row < M) begin
        @(negedge clk);
        y_ready = (w == 0) ? 1'b1 : 1'($urandom_range(3) != 0);
        @(posedge clk);
        if (y_valid && !y_ready) n_output_stall++;
        if (y_valid && y_ready) begin
          logic [W-1:0] e;
          e = expected(w, row, 0);
          check(int'(y_row) == row, $sformatf("w%0d row order got %0d exp %0d", w, y_row, row));
          check(y_data == e, $sformatf("w%0d row %0d got %h exp %h", w, row, y_data, e));
          check(y_last == (row == M - 1), "y_last");
          if (e != expected(w, row, 1)) n_approx++;
          if (row == M - 1) begin
            #1;  // let the cycle counter of this edge settle
            last_y_cycle = cycle;
          end
          row++;
        end
      end
      if (w == 0)
        check(last_y_cycle - last_sample_cycle == 1 + M * (3 * R + 1),
              $sformatf("window latency %0d exp %0d", last_y_cycle - last_sample_cycle, 1 + M * (3 * R + 1)));
      $display("window %0d done, latency %0d cycles (window 0 only without back-pressure)", w,
               last_y_cycle - last_sample_cycle);
    end
    repeat (2) @(negedge clk);
    check(n_input_stall > 0, "input stall never happened");
    check(n_output_stall > 0, "output back-pressure never happened");
    check(n_cfg_blocked > 0, "blocked z write never happened");
    check(n_reprog > 0, "z reprogramming never happened");
    check(n_approx > 0, "approximation never changed a measurement");
    check(n_gap > 0, "input gaps never happened");
    $display("mechanisms: input_stall=%0d output_stall=%0d cfg_blocked=%0d z_reprogram=%0d approx_differs=%0d input_gaps=%0d",
             n_input_stall, n_output_stall, n_cfg_blocked, n_reprog, n_approx, n_gap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
