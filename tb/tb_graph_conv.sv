// tb_graph_conv: self-checking test of one graph-convolution layer.
// Random weights and biases are loaded through the load port. Events with
// random input features and random edge lists (edges only to channels whose
// feature the layer has already stored) are sent; a reference model keeps its
// own per-channel feature table and computes, for every output,
//   max(0, max over self-loop and valid edges of ((W.[X_j, q_dch, q_dt] + b) * M) >> S)
// clamped to 255. The output, the forwarded event/edge list and the cycle
// count (11 pairs x OUT_F/2 row pairs, plus at most 5 pipeline cycles) are
// checked, with random output back-pressure.
module tb_graph_conv;
  import gnn_pkg::*;
  localparam int IN_F = 6, OUT_F = 8, NE = 21, IN_DIM = IN_F + 2;
  localparam int M = 3, S = 9;
  logic clk = 0, rst_n = 0;
  wload_t wload;
  logic in_valid, in_ready, out_valid, out_ready;
  event_t in_ev, out_ev;
  edge_t [NE-1:0] in_edges, out_edges;
  logic [IN_F-1:0][7:0] in_feat;
  logic [OUT_F-1:0][7:0] out_feat;
  int checks = 0, failures = 0;

  int W [OUT_F][IN_DIM];
  int B [OUT_F];
  int fm [700][IN_F];
  bit has [700];

  graph_conv #(.IN_F(IN_F), .OUT_F(OUT_F), .REQ_M(M), .REQ_S(S), .SEL(4'd2)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int req(input longint acc);
    longint v;
    v = (acc * M) >>> S;
    if (v < 0) return 0;
    if (v > 255) return 255;
    return int'(v);
  endfunction

  task automatic load(input int sel, input int row, input int col, input int data);
    @(negedge clk);
    wload = '{valid: 1'b1, sel: 4'(sel), row: 10'(row), col: 8'(col), data: 32'(data)};
    @(negedge clk);
    wload = '0;
  endtask

  initial begin
    int t;
    in_valid = 0; out_ready = 0; in_ev = '0; in_edges = '0; in_feat = '0; wload = '0;
    for (int c = 0; c < 700; c++) has[c] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < OUT_F; r++) begin
      for (int c = 0; c < IN_DIM; c++) begin
        W[r][c] = int'($urandom % 256);
        load(2, r, c, W[r][c]);
      end
      B[r] = int'($urandom % 20001) - 10000;
      load(2, r, IN_DIM, B[r]);
    end
    // writes to another select must be ignored
    load(1, 0, 0, 8'h5a);
    t = 5000;
    for (int e = 0; e < 120; e++) begin
      int ch, cyc, wait_cyc;
      int expv [OUT_F];
      ch = 200 + 10 * int'($urandom % 15) + ((e % 5 == 0) ? 1 : 0);
      if (e == 7) ch = 5;
      t += int'($urandom % 2000);
      in_ev = '{last: 1'b0, ch: 10'(ch), t: 20'(t)};
      for (int i = 0; i < IN_F; i++) in_feat[i] = 8'($urandom);
      in_edges = '0;
      for (int k = 0; k < NE; k++) begin
        int c;
        c = ch + (k - 10) * 10;
        if (c >= 0 && c < 700 && has[c] && ($urandom % 4 != 0)) begin
          in_edges[k].valid  = 1'b1;
          in_edges[k].t_diff = 20'((k == 3) ? 20000 : ($urandom % 20001));
        end
      end
      // reference
      for (int o = 0; o < OUT_F; o++) begin
        longint acc;
        expv[o] = 0;
        acc = B[o];
        for (int i = 0; i < IN_F; i++) acc += longint'(in_feat[i]) * (W[o][i] - 128);
        acc += 127 * (W[o][IN_F] - 128);
        if (req(acc) > expv[o]) expv[o] = req(acc);
        for (int k = 0; k < NE; k++) begin
          if (in_edges[k].valid) begin
            int c, qd, qt;
            c  = ch + (k - 10) * 10;
            qd = (k * 10 * 255) / 200;
            qt = int'((longint'(in_edges[k].t_diff) * ((255 * 65536) / 20000)) >>> 16);
            if (qt > 255) qt = 255;
            acc = B[o];
            for (int i = 0; i < IN_F; i++) acc += longint'(fm[c][i]) * (W[o][i] - 128);
            acc += qd * (W[o][IN_F] - 128) + qt * (W[o][IN_F+1] - 128);
            if (req(acc) > expv[o]) expv[o] = req(acc);
          end
        end
      end
      @(negedge clk);
      in_valid = 1;
      while (!in_ready) @(negedge clk);
      @(posedge clk);
      cyc = 0;
      @(negedge clk);
      in_valid = 0;
      while (!out_valid) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc < 11 * OUT_F / 2 || cyc > 11 * OUT_F / 2 + 5) begin
        failures++; $display("cycle count %0d", cyc);
      end
      wait_cyc = int'($urandom % 4);
      repeat (wait_cyc) @(negedge clk);
      for (int o = 0; o < OUT_F; o++) begin
        checks++;
        if (out_feat[o] != 8'(expv[o])) begin
          failures++; $display("event %0d out %0d got %0d exp %0d", e, o, out_feat[o], expv[o]);
        end
      end
      checks++;
      if (out_ev != in_ev || out_edges != in_edges) begin failures++; $display("passthrough mismatch"); end
      out_ready = 1;
      @(negedge clk);
      out_ready = 0;
      for (int i = 0; i < IN_F; i++) fm[ch][i] = int'(in_feat[i]);
      has[ch] = 1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
