// tb_global_avg_pool: self-checking test of the global average pooling unit.
// Samples of random length (1..200 events) with random feature vectors are
// streamed in, the last event flagged; the pooled vector must equal the exact
// rounded mean within one code (the unit divides once and multiplies by the
// reciprocal), the event count must match, and the result must wait for
// out_ready. The time from the last event to out_valid (divider, 32 cycles,
// plus 3 cycles of control) is checked too.
module tb_global_avg_pool;
  localparam int F = 8;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, in_last, out_valid, out_ready;
  logic [F-1:0][7:0] in_feat, out_feat;
  logic [15:0] out_count;
  int checks = 0, failures = 0;

  global_avg_pool #(.F(F)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_last = 0; out_ready = 0; in_feat = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < 40; s++) begin
      int n, cyc;
      longint sum [F];
      n = (s == 0) ? 1 : 1 + int'($urandom % 200);
      for (int i = 0; i < F; i++) sum[i] = 0;
      for (int e = 0; e < n; e++) begin
        @(negedge clk);
        in_valid = ($urandom % 3 != 0);
        while (!in_valid) begin @(negedge clk); in_valid = ($urandom % 3 != 0); end
        for (int i = 0; i < F; i++) begin
          in_feat[i] = (s % 4 == 1) ? 8'd255 : 8'($urandom);
          sum[i] += in_feat[i];
        end
        in_last = (e == n - 1);
        checks++;
        if (!in_ready) begin failures++; $display("not ready in sample"); end
        @(posedge clk);
      end
      @(negedge clk);
      in_valid = 0; in_last = 0;
      cyc = 1;
      while (!out_valid) begin
        checks++;
        if (in_ready) begin failures++; $display("ready while dividing"); end
        @(negedge clk); cyc++;
      end
      checks++;
      if (cyc > 40) begin failures++; $display("latency %0d", cyc); end
      repeat ($urandom % 5) @(negedge clk);
      checks++;
      if (out_count != 16'(n)) begin failures++; $display("count %0d exp %0d", out_count, n); end
      for (int i = 0; i < F; i++) begin
        int ex, d;
        ex = int'((sum[i] + n / 2) / n);
        d  = int'(out_feat[i]) - ex;
        checks++;
        if (d > 1 || d < -1) begin failures++; $display("s%0d f%0d got %0d exp %0d", s, i, out_feat[i], ex); end
      end
      out_ready = 1;
      @(negedge clk);
      out_ready = 0;
      checks++;
      if (out_valid || !in_ready) begin failures++; $display("did not return to accumulate"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
