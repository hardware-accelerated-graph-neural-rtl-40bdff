// tb_event_gnn_top: end-to-end test of the accelerator at reduced size
// (4-feature convolutions, 8-unit MLP with 5 classes, 6-unit GRU head with 3
// classes, 500-cycle pooling windows, 8-entry FIFO).
// Random weights are loaded into every memory. Three samples of clustered
// events are sent in bursts faster than the extractor can take them. The test
// watches the whole chain and counts each mechanism:
//   fifo_full   the FIFO fills and ev_ready drops (back-pressure)
//   edges       the graph generator finds skip-step/temporal edges
//   extract     one feature vector per event leaves the extractor
//   avg_pool    per sample, the pooled vector equals the mean of that sample's
//               vectors (within one code) and counts its events
//   classify    per sample, class scores equal a reference MLP of the pooled
//               vector and the class is their argmax
//   window      the KWS head answers once per window (count checked against
//               elapsed time), class = argmax of its scores
//   h_clear     clearing the KWS hidden state zeroes it
// A mechanism that never happened counts as a failure.
module tb_event_gnn_top;
  import gnn_pkg::*;
  localparam int C = 4, MH = 8, NC = 5, KH = 6, KC = 3, WIN = 500, FD = 8;
  localparam int NS = 3, NEV = 120;
  logic clk = 0, rst_n = 0;
  logic ev_valid, ev_ready;
  event_t ev_data;
  wload_t wload;
  logic cls_valid, avg_valid, kws_h_clear, kws_valid, fe_valid, fe_ready;
  logic [7:0] cls_class, kws_class, kws_conf;
  logic signed [NC-1:0][31:0] cls_scores;
  logic signed [KC-1:0][31:0] kws_scores;
  logic [C-1:0][7:0] avg_feat;
  logic [$clog2(FD+1)-1:0] fifo_level;
  int checks = 0, failures = 0;

  event_gnn_top #(.C1(C), .C2(C), .C3(C), .C4(C), .MLP_H(MH), .NCLS(NC), .KWS_H(KH),
                  .KWS_NCLS(KC), .WINDOW_CYCLES(WIN), .FIFO_DEPTH(FD), .REQ_S_CONV(7),
                  .REQ_S_HEAD(8)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_full = 0, n_edges = 0, n_fe = 0, n_avg = 0, n_cls = 0, n_kws = 0, n_clear = 0;
  int W1 [MH][C], B1 [MH], W2 [NC][MH], B2 [NC];
  longint sum [C];
  int cnt = 0;
  int exp_avg [$];
  int exp_cnt [$];
  int exp_cls [$];
  int exp_sc [$];
  bit avg_prev = 0;
  longint cyc = 0;
  bit sent_all = 0;

  task automatic load(input int sel, input int row, input int col, input int data);
    @(negedge clk);
    wload = '{valid: 1'b1, sel: 4'(sel), row: 10'(row), col: 8'(col), data: 32'(data)};
    @(negedge clk);
    wload = '0;
  endtask

  // Monitors.
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (fifo_level == ($clog2(FD+1))'(FD) && !ev_ready) n_full++;
    if (dut.u_fe.u_gen.out_valid && dut.u_fe.u_gen.out_ready && (|dut.u_fe.u_gen.out_edges)) begin
      for (int k = 0; k < 21; k++) if (dut.u_fe.u_gen.out_edges[k].valid) n_edges++;
    end
    if (fe_valid && fe_ready) begin
      n_fe++;
      for (int i = 0; i < C; i++) sum[i] += fe_feat_w[i];
      cnt++;
      if (dut.u_fe.out_ev.last) begin
        for (int i = 0; i < C; i++) exp_avg.push_back(int'((sum[i] + cnt / 2) / cnt));
        exp_cnt.push_back(cnt);
        for (int i = 0; i < C; i++) sum[i] = 0;
        cnt = 0;
      end
    end
    if (avg_valid && !avg_prev) begin
      int hid [MH];
      int best, sc [NC];
      n_avg++;
      checks++;
      if (exp_cnt.size() == 0) begin failures++; $display("pooled vector without a sample"); end
      else begin
        int ec;
        ec = exp_cnt.pop_front();
        if (dut.ap_cnt != 16'(ec)) begin failures++; $display("avg count %0d exp %0d", dut.ap_cnt, ec); end
        for (int i = 0; i < C; i++) begin
          int e, d;
          e = exp_avg.pop_front();
          d = int'(avg_feat[i]) - e;
          checks++;
          if (d > 1 || d < -1) begin failures++; $display("avg f%0d got %0d exp %0d", i, avg_feat[i], e); end
        end
      end
      for (int r = 0; r < MH; r++) begin
        longint a;
        a = B1[r];
        for (int i = 0; i < C; i++) a += longint'(avg_feat[i]) * (W1[r][i] - 128);
        a = a >>> 8;
        hid[r] = (a < 0) ? 0 : (a > 255) ? 255 : int'(a);
      end
      best = 0;
      for (int r = 0; r < NC; r++) begin
        sc[r] = B2[r];
        for (int i = 0; i < MH; i++) sc[r] += hid[i] * (W2[r][i] - 128);
        if (sc[r] > sc[best]) best = r;
        exp_sc.push_back(sc[r]);
      end
      exp_cls.push_back(best);
    end
    avg_prev <= avg_valid;
    if (cls_valid) begin
      n_cls++;
      checks++;
      if (exp_cls.size() == 0) begin failures++; $display("class output without a sample"); end
      else begin
        int eb;
        eb = exp_cls.pop_front();
        if (cls_class != 8'(eb)) begin failures++; $display("class %0d exp %0d", cls_class, eb); end
        for (int r = 0; r < NC; r++) begin
          int es;
          es = exp_sc.pop_front();
          checks++;
          if (cls_scores[r] != 32'(es)) begin failures++; $display("score %0d got %0d exp %0d", r, $signed(cls_scores[r]), es); end
        end
      end
    end
    if (kws_valid) begin
      int b;
      n_kws++;
      b = 0;
      for (int r = 1; r < KC; r++) if ($signed(kws_scores[r]) > $signed(kws_scores[b])) b = r;
      checks++;
      if (kws_class != 8'(b) || kws_class >= KC) begin failures++; $display("kws class %0d argmax %0d", kws_class, b); end
    end
  end

  logic [C-1:0][7:0] fe_feat_w;
  assign fe_feat_w = dut.fe_feat;

  initial begin
    int t;
    ev_valid = 0; ev_data = '0; wload = '0; kws_h_clear = 0;
    for (int i = 0; i < C; i++) sum[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int l = 0; l < 4; l++) begin
      int nin;
      nin = (l == 0) ? 2 : C;
      for (int o = 0; o < C; o++) begin
        for (int i = 0; i < nin + 2; i++) load(l, o, i, 128 + int'($urandom % 41) - 20);
        load(l, o, nin + 2, int'($urandom % 3001) - 1000);
      end
    end
    for (int r = 0; r < MH; r++) begin
      for (int i = 0; i < C; i++) begin W1[r][i] = int'($urandom % 256); load(SEL_MLP, r, i, W1[r][i]); end
      B1[r] = int'($urandom % 4001) - 2000; load(SEL_MLP, r, MH, B1[r]);
    end
    for (int r = 0; r < NC; r++) begin
      for (int i = 0; i < MH; i++) begin W2[r][i] = int'($urandom % 256); load(SEL_MLP, MH + r, i, W2[r][i]); end
      B2[r] = int'($urandom % 4001) - 2000; load(SEL_MLP, MH + r, MH, B2[r]);
    end
    for (int r = 0; r < 8 * KH + KC + 1; r++) begin
      for (int i = 0; i < KH; i++) load(SEL_GRU, r, i, int'($urandom % 256));
      load(SEL_GRU, r, KH, int'($urandom % 4001) - 2000);
    end
    t = 500;
    for (int s = 0; s < NS; s++) begin
      for (int e = 0; e < NEV; e++) begin
        int ch;
        ch = (e % 5 == 0) ? int'($urandom % 700) : 400 + 10 * (int'($urandom % 21) - 10);
        t += int'($urandom % 1500);
        @(negedge clk);
        ev_valid = 1;
        ev_data = '{last: (e == NEV - 1), ch: 10'(ch), t: 20'(t)};
        while (!ev_ready) @(negedge clk);
        @(negedge clk);
        ev_valid = 0;
        // bursts of 20 events, then a pause
        if (e % 20 == 19) repeat (int'($urandom % 600)) @(negedge clk);
      end
      if (s == 1) begin
        // clear the KWS hidden state between samples
        @(negedge clk);
        while (!dut.u_gru.in_ready) @(negedge clk);
        kws_h_clear = 1;
        @(negedge clk);
        kws_h_clear = 0;
        repeat (2) @(negedge clk);
        checks++;
        if (dut.u_gru.h != '0) failures++;
        else n_clear++;
      end
    end
    while (n_cls < NS) @(negedge clk);
    repeat (3 * WIN) @(negedge clk);
    checks += 8;
    if (n_full == 0)   begin failures++; $display("FIFO never filled"); end
    if (n_edges == 0)  begin failures++; $display("no edges found"); end
    if (n_fe != NS * NEV) begin failures++; $display("extracted %0d of %0d", n_fe, NS * NEV); end
    if (n_avg != NS)   begin failures++; $display("pooled %0d of %0d", n_avg, NS); end
    if (n_cls != NS)   begin failures++; $display("classified %0d of %0d", n_cls, NS); end
    if (n_kws == 0 || n_kws > int'(cyc / WIN) + 1 || n_kws < int'(cyc / WIN) - 2) begin
      failures++; $display("kws outputs %0d for %0d cycles", n_kws, cyc);
    end
    if (n_clear == 0)  begin failures++; $display("h_clear not exercised"); end
    if (exp_cls.size() != 0) begin failures++; $display("missing class outputs"); end
    $display("mechanisms: fifo_full=%0d edges=%0d extract=%0d avg_pool=%0d classify=%0d window=%0d h_clear=%0d",
             n_full, n_edges, n_fe, n_avg, n_cls, n_kws, n_clear);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
