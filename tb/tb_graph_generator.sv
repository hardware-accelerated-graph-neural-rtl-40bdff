// tb_graph_generator: self-checking test of the skip-step graph generator.
// Events with clustered channels (so that many skip-step neighbours exist) and
// increasing timestamps are sent; a reference model keeps the last timestamp
// per channel and derives the 21-entry edge list, the neighbour average and
// its 8-bit codes. Every output field and the per-event cycle count (channel
// search 11 cycles + divider 32 cycles + write, within 48) are checked, and an
// event flagged 'last' must clear the graph.
module tb_graph_generator;
  import gnn_pkg::*;
  localparam int NE = 21;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  event_t in_ev, out_ev;
  edge_t [NE-1:0] out_edges;
  logic [1:0][7:0] out_feat;
  int checks = 0, failures = 0;

  int last_t [700];
  bit has_t  [700];

  graph_generator dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send_and_check(input int ch, input int t, input bit last);
    int n, sch, st, cyc, qch, qt;
    edge_t [NE-1:0] exp_e;
    n = 0; sch = 0; st = 0; exp_e = '0;
    for (int k = 0; k < NE; k++) begin
      int c;
      c = ch + (k - 10) * 10;
      if (c >= 0 && c < 700 && has_t[c] && (t - last_t[c]) <= 20000) begin
        exp_e[k].valid  = 1'b1;
        exp_e[k].t_diff = 20'(t - last_t[c]);
        n++; sch += c; st += last_t[c];
      end
    end
    if (n == 0) begin
      qch = (ch * ((255 * 65536) / 699)) >>> 16;
      qt  = t >> 12;
    end else begin
      qch = ((sch / n) * ((255 * 65536) / 699)) >>> 16;
      qt  = (st / n) >> 12;
    end
    @(negedge clk);
    in_valid = 1; in_ev = '{last: last, ch: 10'(ch), t: 20'(t)};
    while (!in_ready) @(negedge clk);
    @(posedge clk);
    cyc = 0;
    @(negedge clk);
    in_valid = 0;
    while (!out_valid) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc > 48) begin failures++; $display("too slow: %0d cycles", cyc); end
    checks++;
    if (out_ev.ch != 10'(ch) || out_ev.t != 20'(t) || out_ev.last != last) begin
      failures++; $display("event mismatch");
    end
    for (int k = 0; k < NE; k++) begin
      checks++;
      if (out_edges[k].valid != exp_e[k].valid ||
          (exp_e[k].valid && out_edges[k].t_diff != exp_e[k].t_diff)) begin
        failures++;
        $display("edge %0d mismatch ch=%0d: got %0d/%0d exp %0d/%0d", k, ch,
                 out_edges[k].valid, out_edges[k].t_diff, exp_e[k].valid, exp_e[k].t_diff);
      end
    end
    checks++;
    if (out_feat[0] != 8'(qch) || out_feat[1] != 8'(qt)) begin
      failures++; $display("feature mismatch ch=%0d got %0d,%0d exp %0d,%0d", ch, out_feat[0], out_feat[1], qch, qt);
    end
    out_ready = 1;
    @(negedge clk);
    out_ready = 0;
    if (last) begin
      for (int c = 0; c < 700; c++) has_t[c] = 0;
    end else begin
      last_t[ch] = t; has_t[ch] = 1;
    end
  endtask

  initial begin
    int t;
    in_valid = 0; out_ready = 0; in_ev = '0;
    for (int c = 0; c < 700; c++) begin has_t[c] = 0; last_t[c] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    t = 1000;
    for (int i = 0; i < 300; i++) begin
      int ch;
      ch = (i % 3 == 0) ? int'($urandom % 700) : 300 + 10 * (int'($urandom % 21) - 10) + ((i % 7 == 0) ? 3 : 0);
      if (i % 50 == 0) ch = (i % 100 == 0) ? 0 : 699;
      t += int'($urandom % 3000);
      send_and_check(ch, t, i == 150);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
