// tb_event_fifo: self-checking test of the event FIFO.
// Random pushes and pops (with back-pressure on both sides) are compared with
// a queue model; the test also fills the FIFO to check in_ready drops at DEPTH
// and that the data comes out in order.
module tb_event_fifo;
  import gnn_pkg::*;
  localparam int DEPTH = 8;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  event_t in_data, out_data;
  logic [$clog2(DEPTH+1)-1:0] level;
  int checks = 0, failures = 0;
  event_t q[$];

  event_fifo #(.DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // fill completely
    for (int i = 0; i < DEPTH + 2; i++) begin
      @(negedge clk);
      in_valid = 1; in_data = event_t'({1'b0, 10'(i), 20'(i * 7)});
      if (in_ready) q.push_back(in_data);
      @(posedge clk);
    end
    @(negedge clk);
    in_valid = 0;
    checks++; if (in_ready !== 1'b0 || level != DEPTH) begin failures++; $display("full not flagged"); end
    // random traffic
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      in_valid  = ($urandom % 3) != 0;
      in_data   = event_t'({1'($urandom), 10'($urandom % 700), 20'($urandom)});
      out_ready = ($urandom % 2) != 0;
      if (out_valid) begin
        checks++;
        if (q.size() == 0 || out_data != q[0]) begin failures++; $display("data mismatch"); end
      end
      @(posedge clk);
      if (out_valid && out_ready) void'(q.pop_front());
      if (in_valid && in_ready) q.push_back(in_data);
    end
    @(negedge clk);
    in_valid = 0; out_ready = 1;
    while (q.size() != 0) begin
      checks++;
      if (!out_valid || out_data != q[0]) begin failures++; $display("drain mismatch"); end
      @(posedge clk);
      void'(q.pop_front());
      @(negedge clk);
    end
    @(negedge clk);
    checks++; if (out_valid) begin failures++; $display("not empty"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
