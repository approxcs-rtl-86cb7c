// tb_sparse_multiplier - checks the sparse-multiplier controller and accumulator.
//
// The testbench plays both memories itself (synchronous read, output held between
// reads) with a random window x and random sorted index rows z. Each measurement is
// compared with a reference sum built by the bit-level approximate-adder model:
// y_m = add(...add(x(z_m,0), x(z_m,1))..., x(z_m,R-1)). The first window runs with
// y_ready held high and its length is checked: M*(3R+1) cycles from start to the
// last accepted measurement. The second window applies random back-pressure and
// checks that measurements hold while stalled and arrive in row order.
module tb_sparse_multiplier;
  import tb_ref_pkg::*;

  localparam int N = 256, M = 128, R = 2, W = 36, K = 14;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, busy;
  logic idx_re, smp_re, y_valid, y_ready = 1'b0, y_last;
  logic [7:0] idx_raddr, idx_rdata = '0, smp_raddr;
  logic [W-1:0] smp_rdata = '0, y_data;
  logic [6:0] y_row;

  logic [7:0]   zmem [M*R];
  logic [W-1:0] xmem [N];
  int checks = 0, failures = 0;
  int stall_cycles = 0;

  sparse_multiplier dut (
    .clk(clk), .rst_n(rst_n), .start(start), .busy(busy),
    .idx_re(idx_re), .idx_raddr(idx_raddr), .idx_rdata(idx_rdata),
    .smp_re(smp_re), .smp_raddr(smp_raddr), .smp_rdata(smp_rdata),
    .y_valid(y_valid), .y_ready(y_ready), .y_data(y_data), .y_row(y_row), .y_last(y_last)
  );

  always #5 clk = ~clk;

  always_ff @(posedge clk) begin
    if (idx_re) idx_rdata <= zmem[idx_raddr];
    if (smp_re) smp_rdata <= xmem[smp_raddr];
  end

  initial begin
    repeat (20000) @(posedge clk);
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

  function automatic logic [W-1:0] expected(input int m);
    longint unsigned acc = 64'(xmem[zmem[m*R]]);
    for (int q = 1; q < R; q++) acc = ref_add(acc, 64'(xmem[zmem[m*R+q]]), W, K, 8'h17, 8'hE8);
    return W'(acc);
  endfunction

  task automatic fill();
    for (int i = 0; i < N; i++) xmem[i] = W'({$urandom, $urandom});
    for (int m = 0; m < M; m++) begin
      int c0 = int'($urandom_range(N - 2));
      int c1 = int'($urandom_range(N - 1, c0 + 1));
      zmem[m*R] = 8'(c0);
      zmem[m*R+1] = 8'(c1);
    end
  endtask

  task automatic run_frame(input bit backpressure, output int cycles);
    int row = 0;
    logic [W-1:0] held;
    bit was_stalled = 0;
    cycles = 0;
    @(negedge clk); start = 1'b1;
    @(negedge clk); start = 1'b0;
    cycles = 1;
    check(busy, "busy after start");
    while (row < M) begin
      y_ready = backpressure ? 1'($urandom_range(1)) : 1'b1;
      @(posedge clk);
      if (y_valid) begin
        if (was_stalled) check(y_data == held, "y held while stalled");
        if (y_ready) begin
          check(int'(y_row) == row, $sformatf("row order got %0d exp %0d", y_row, row));
          check(y_data == expected(row), $sformatf("row %0d got %h exp %h", row, y_data, expected(row)));
          check(y_last == (row == M - 1), "y_last");
          row++;
          was_stalled = 0;
        end else begin
          stall_cycles++;
          held = y_data;
          was_stalled = 1;
        end
      end
      @(negedge clk);
      if (row < M) cycles++;
    end
    y_ready = 1'b0;
    check(!busy, "idle after frame");
  endtask

  initial begin
    int cyc;
    fill();
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    check(!busy && !y_valid, "idle after reset");
    run_frame(0, cyc);
    check(cyc == M * (3 * R + 1), $sformatf("frame length %0d exp %0d", cyc, M * (3 * R + 1)));
    $display("frame cycles (no back-pressure): %0d", cyc);
    fill();
    run_frame(1, cyc);
    check(stall_cycles > 0, "back-pressure exercised");
    $display("stall cycles: %0d", stall_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
