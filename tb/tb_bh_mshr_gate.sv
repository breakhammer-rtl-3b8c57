// tb_bh_mshr_gate -- per-thread miss-buffer occupancy against quotas.
// Random quotas (changing now and then, sometimes below the current
// occupancy) and random allocation / release traffic that obeys alloc_ok.
// Every cycle the occupancy and alloc_ok of each thread are compared with a
// reference count; denied allocations are counted and must occur.
module tb_bh_mshr_gate;
  localparam int unsigned N = 4, NUM_MSHR = 64, QW = 7, TW = 2;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [N-1:0][QW-1:0] quota;
  logic alloc_valid = 1'b0, free_valid = 1'b0;
  logic [TW-1:0] alloc_thread = '0, free_thread = '0;
  logic [N-1:0] alloc_ok;
  logic [N-1:0][QW-1:0] occupancy;
  int checks = 0, failures = 0, denied = 0, granted = 0, over = 0;

  bh_mshr_gate dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int occ [N];
  int q [N];

  initial begin
    for (int i = 0; i < N; i++) begin occ[i] = 0; q[i] = 64; quota[i] = QW'(64); end
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int cyc = 0; cyc < 30000; cyc++) begin
      @(negedge clk);
      for (int i = 0; i < N; i++) begin
        checks++;
        if (int'(occupancy[i]) != occ[i] || alloc_ok[i] !== (occ[i] < q[i])) begin
          failures++;
          $display("cyc %0d thread %0d occ=%0d ok=%0b exp %0d %0b (q=%0d)", cyc, i,
                   occupancy[i], alloc_ok[i], occ[i], occ[i] < q[i], q[i]);
        end
        if (occ[i] > q[i]) over++;
      end
      // quota changes
      if ($urandom_range(0, 199) == 0) begin
        int t;
        t = $urandom_range(0, 3);
        q[t] = (($urandom_range(0, 1) == 0) ? 64 : $urandom_range(0, 8));
        quota[t] = QW'(q[t]);
      end
      // an allocation request from a random thread, issued only if allowed
      alloc_thread = TW'($urandom_range(0, 3));
      alloc_valid  = 1'b0;
      if ($urandom_range(0, 1) == 0) begin
        if (occ[alloc_thread] < q[alloc_thread]) begin alloc_valid = 1'b1; granted++; end
        else denied++;
      end
      // a release from a thread that holds a buffer
      free_thread = TW'($urandom_range(0, 3));
      free_valid  = ($urandom_range(0, 2) == 0) && (occ[free_thread] > 0);
      if (alloc_valid) occ[alloc_thread]++;
      if (free_valid)  occ[free_thread]--;
    end
    checks++;
    if (denied == 0 || granted < 1000 || over == 0) begin
      failures++; $display("coverage denied=%0d granted=%0d over=%0d", denied, granted, over);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
