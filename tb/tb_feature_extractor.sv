// tb_feature_extractor: self-checking test of the graph backbone (graph
// generator plus four graph-convolution layers) with small layers (4 features
// each). Random weights are loaded into the four layers; events stream in
// back to back with random output back-pressure, so the layers work on
// different events at the same time. A reference model runs the generator
// (context memory, skip-step and temporal search, mean position code) and the
// four layers (self-loop and edges, positional codes, requantisation, ReLU,
// max, per-channel feature tables) event by event; every output vector and
// event must match in order. The latency of an event through an empty
// pipeline (generator 48 cycles plus 4 layers of 11*C/2 + 5) is checked, and
// the 'last' flag must clear the graph.
module tb_feature_extractor;
  import gnn_pkg::*;
  localparam int C = 4, NE = 21, M = 1, S = 7, NEV = 400;
  logic clk = 0, rst_n = 0;
  wload_t wload;
  logic in_valid, in_ready, out_valid, out_ready;
  event_t in_ev, out_ev;
  logic [C-1:0][7:0] out_feat;
  int checks = 0, failures = 0;

  int W [4][C][C+2];
  int B [4][C];
  int last_t [700];
  bit has_t [700];
  int fm [4][700][C];
  int exp_f [NEV][C];
  event_t exp_ev [NEV];
  int n_out = 0;

  feature_extractor #(.C1(C), .C2(C), .C3(C), .C4(C), .REQ_M(M), .REQ_S(S)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired after %0d outputs", n_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int req(input longint a);
    longint v;
    v = (a * M) >>> S;
    return (v < 0) ? 0 : (v > 255) ? 255 : int'(v);
  endfunction

  task automatic load(input int sel, input int row, input int col, input int data);
    @(negedge clk);
    wload = '{valid: 1'b1, sel: 4'(sel), row: 10'(row), col: 8'(col), data: 32'(data)};
    @(negedge clk);
    wload = '0;
  endtask

  // Reference model of one event through generator and layers.
  function automatic void model(input int e, input int ch, input int t, input bit last);
    int n, sch, st, nin;
    bit ev_ok [NE];
    int dtv [NE];
    int x [C];
    int y [C];
    n = 0; sch = 0; st = 0;
    for (int k = 0; k < NE; k++) begin
      int c;
      c = ch + (k - 10) * 10;
      ev_ok[k] = (c >= 0 && c < 700 && has_t[c] && (t - last_t[c]) <= 20000);
      dtv[k] = ev_ok[k] ? t - last_t[c] : 0;
      if (ev_ok[k]) begin n++; sch += c; st += last_t[c]; end
    end
    for (int i = 0; i < C; i++) x[i] = 0;
    if (n == 0) begin
      x[0] = (ch * ((255 * 65536) / 699)) >>> 16;
      x[1] = t >> 12;
    end else begin
      x[0] = ((sch / n) * ((255 * 65536) / 699)) >>> 16;
      x[1] = (st / n) >> 12;
    end
    nin = 2;
    for (int l = 0; l < 4; l++) begin
      for (int o = 0; o < C; o++) begin
        longint a;
        y[o] = 0;
        a = B[l][o];
        for (int i = 0; i < nin; i++) a += longint'(x[i]) * (W[l][o][i] - 128);
        a += 127 * (W[l][o][nin] - 128);
        if (req(a) > y[o]) y[o] = req(a);
        for (int k = 0; k < NE; k++) begin
          if (ev_ok[k]) begin
            int c, qd, qt;
            c  = ch + (k - 10) * 10;
            qd = (k * 10 * 255) / 200;
            qt = int'((longint'(dtv[k]) * ((255 * 65536) / 20000)) >>> 16);
            if (qt > 255) qt = 255;
            a = B[l][o];
            for (int i = 0; i < nin; i++) a += longint'(fm[l][c][i]) * (W[l][o][i] - 128);
            a += qd * (W[l][o][nin] - 128) + qt * (W[l][o][nin+1] - 128);
            if (req(a) > y[o]) y[o] = req(a);
          end
        end
      end
      for (int i = 0; i < C; i++) begin fm[l][ch][i] = x[i]; x[i] = y[i]; end
      nin = C;
    end
    for (int i = 0; i < C; i++) exp_f[e][i] = x[i];
    exp_ev[e] = '{last: last, ch: 10'(ch), t: 20'(t)};
    if (last) for (int c = 0; c < 700; c++) has_t[c] = 0;
    else begin last_t[ch] = t; has_t[ch] = 1; end
  endfunction

  // Output checker with random back-pressure.
  initial begin
    out_ready = 0;
    forever begin
      @(negedge clk);
      out_ready = ($urandom % 3 != 0);
      if (out_valid && out_ready && n_out < NEV) begin
        checks++;
        if (out_ev != exp_ev[n_out]) begin failures++; $display("event %0d mismatch", n_out); end
        for (int i = 0; i < C; i++) begin
          checks++;
          if (out_feat[i] != 8'(exp_f[n_out][i])) begin
            failures++; $display("event %0d f%0d got %0d exp %0d", n_out, i, out_feat[i], exp_f[n_out][i]);
          end
        end
        n_out++;
      end
    end
  end

  initial begin
    int t, cyc;
    in_valid = 0; in_ev = '0; wload = '0;
    for (int c = 0; c < 700; c++) begin has_t[c] = 0; last_t[c] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int l = 0; l < 4; l++) begin
      int nin;
      nin = (l == 0) ? 2 : C;
      for (int o = 0; o < C; o++) begin
        for (int i = 0; i < nin + 2; i++) begin
          W[l][o][i] = 128 + int'($urandom % 41) - 20;
          load(l, o, i, W[l][o][i]);
        end
        B[l][o] = int'($urandom % 3001) - 1000;
        load(l, o, nin + 2, B[l][o]);
      end
    end
    t = 1000;
    for (int e = 0; e < NEV; e++) begin
      int ch;
      ch = (e % 4 == 0) ? int'($urandom % 700) : 350 + 10 * (int'($urandom % 21) - 10) + ((e % 9 == 0) ? 5 : 0);
      t += int'($urandom % 2500);
      model(e, ch, t, e == 200);
      @(negedge clk);
      in_valid = 1; in_ev = exp_ev[e];
      while (!in_ready) @(negedge clk);
      @(negedge clk);
      in_valid = 0;
      if (e == 0) begin
        cyc = 1;
        while (n_out == 0) begin @(negedge clk); cyc++; end
        checks++;
        if (cyc > 48 + 4 * (11 * C / 2 + 5) + 4) begin failures++; $display("latency %0d", cyc); end
        $display("single-event latency %0d cycles", cyc);
      end
    end
    while (n_out < NEV) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
