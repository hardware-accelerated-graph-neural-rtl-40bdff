// tb_event_gnn_top_kws: the accelerator configured as the published keyword
// spotting model, whose four graph convolutions all have 72 features, with
// the 72-unit STEM/GRU head and a short 4000-cycle pooling window (instead of
// 10 ms) so that several windows fit in the simulation.
// All memories are filled with random weights through the load port. Checked
// against the published KWS figures at 200 MHz: one event through the idle
// extractor within 8.48 us (1696 cycles), and the KWS head's output within
// 2.05 us (410 cycles) of a window close. The stream rate of a 72-feature
// last layer is this design's own figure, 11*36 = 396 cycles plus the
// pipeline (at most 404 per event). A 64-event sample must give a pooled
// vector of 64 events and a class output equal to the argmax of its scores;
// every KWS output's class must be the argmax of its scores, and there may be
// no more KWS outputs than closed windows.
module tb_event_gnn_top_kws;
  import gnn_pkg::*;
  logic clk = 0, rst_n = 0;
  logic ev_valid, ev_ready;
  event_t ev_data;
  wload_t wload;
  logic cls_valid, avg_valid, kws_h_clear, kws_valid, fe_valid, fe_ready;
  logic [7:0] cls_class, kws_class, kws_conf;
  logic signed [19:0][31:0] cls_scores, kws_scores;
  logic [71:0][7:0] avg_feat;
  logic [6:0] fifo_level;
  int checks = 0, failures = 0;

  event_gnn_top #(.C1(72), .C2(72), .C3(72), .C4(72), .WINDOW_CYCLES(4000)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (400_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint cyc = 0;
  always @(posedge clk) cyc++;
  int n_fe = 0, n_cls = 0, n_kws = 0;
  longint fe_t [$];
  always @(posedge clk) if (rst_n) begin
    if (fe_valid && fe_ready) begin n_fe++; fe_t.push_back(cyc); end
    if (cls_valid) begin
      int b;
      n_cls++;
      b = 0;
      for (int r = 1; r < 20; r++) if ($signed(cls_scores[r]) > $signed(cls_scores[b])) b = r;
      checks++;
      if (cls_class != 8'(b)) begin failures++; $display("class %0d argmax %0d", cls_class, b); end
    end
    if (kws_valid) begin
      int b;
      n_kws++;
      b = 0;
      for (int r = 1; r < 20; r++) if ($signed(kws_scores[r]) > $signed(kws_scores[b])) b = r;
      checks++;
      if (kws_class != 8'(b)) begin failures++; $display("kws class %0d argmax %0d", kws_class, b); end
    end
  end

  task automatic wr(input int sel, input int row, input int col, input int data);
    @(negedge clk);
    wload = '{valid: 1'b1, sel: 4'(sel), row: 10'(row), col: 8'(col), data: 32'(data)};
  endtask

  task automatic send(input int ch, input int t, input bit last);
    @(negedge clk);
    ev_valid = 1;
    ev_data = '{last: last, ch: 10'(ch), t: 20'(t)};
    while (!ev_ready) @(negedge clk);
    @(negedge clk);
    ev_valid = 0;
  endtask

  initial begin
    longint t0, lat, worst;
    int k0;
    int t;
    ev_valid = 0; ev_data = '0; wload = '0; kws_h_clear = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int l = 0; l < 4; l++) begin
      int nin, nout;
      nin  = (l == 0) ? 2 : 72;
      nout = 72;
      for (int o = 0; o < nout; o++) begin
        for (int i = 0; i < nin + 2; i++) wr(l, o, i, 128 + int'($urandom % 9) - 4);
        wr(l, o, nin + 2, int'($urandom % 2001) - 500);
      end
    end
    for (int r = 0; r < 84; r++) begin
      for (int i = 0; i < 72; i++) wr(SEL_MLP, r, i, int'($urandom % 256));
      wr(SEL_MLP, r, 72, int'($urandom % 4001) - 2000);
    end
    for (int r = 0; r < 8 * 72 + 21; r++) begin
      for (int i = 0; i < 72; i++) wr(SEL_GRU, r, i, 128 + int'($urandom % 33) - 16);
      wr(SEL_GRU, r, 72, int'($urandom % 4001) - 2000);
    end
    @(negedge clk);
    wload = '0;
    // single-event latency
    t = 1000;
    t0 = cyc;
    send(350, t, 1'b0);
    while (n_fe == 0) @(negedge clk);
    lat = fe_t[0] - t0;
    $display("single-event latency %0d cycles (%0.2f us at 200 MHz)", lat, real'(lat) / 200.0);
    checks++;
    if (lat > 1696) begin failures++; $display("latency above 8.48 us"); end
    // back-to-back stream of the rest of the sample
    for (int e = 1; e < 64; e++) begin
      t += 150;
      send(300 + 10 * (e % 11), t, e == 63);
    end
    while (n_cls == 0) @(negedge clk);
    worst = 0;
    for (int i = 20; i < 64; i++) if (fe_t[i] - fe_t[i-1] > worst) worst = fe_t[i] - fe_t[i-1];
    $display("steady-state interval %0d cycles (%0.0f k events/s at 200 MHz)", worst, 200000.0 / real'(worst));
    checks += 3;
    if (worst > 404) begin failures++; $display("interval above 11*36 + 8 cycles"); end
    if (n_fe != 64) begin failures++; $display("extracted %0d of 64", n_fe); end
    if (dut.ap_cnt != 16'd64) begin failures++; $display("pooled count %0d", dut.ap_cnt); end
    while (dut.mp_ov) @(negedge clk);
    while (!dut.mp_ov) @(negedge clk);
    t0 = cyc;
    k0 = n_kws;
    while (n_kws == k0) @(negedge clk);
    lat = cyc - t0;
    $display("window close to KWS output %0d cycles (%0.2f us)", lat, real'(lat) / 200.0);
    checks += 2;
    if (lat > 410) begin failures++; $display("KWS head latency above 2.05 us"); end
    if (n_kws > int'(cyc / 4000)) begin failures++; $display("%0d KWS outputs in %0d cycles", n_kws, cyc); end
    $display("KWS output at cycle %0d, class %0d, confidence %0d", cyc, kws_class, kws_conf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
