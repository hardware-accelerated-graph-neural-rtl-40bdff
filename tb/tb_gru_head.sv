// tb_gru_head: self-checking test of the keyword-spotting GRU head.
// A small head (F=8, H=6, C=3) gets random weights and biases through the
// load port. A reference model, with its own sigmoid and tanh tables computed
// from $exp and $tanh, runs the same integer recipe: STEM (two ReLU layers),
// GRU input part, gates r, z, n with the precomputed hidden part, the update
// h = z*n + (1-z)*h_prev, class scores, confidence, and the hidden part for
// the next window. Over a sequence of windows (the hidden state carries over)
// class, confidence, scores and hidden state are compared; h_clear is used in
// the middle of the run, and the latency from acceptance to out_valid is
// checked against the cycle budget of the state machine.
module tb_gru_head;
  import gnn_pkg::*;
  localparam int F = 8, H = 6, C = 3, N = 8;
  localparam int MS = 1, SS = 8, MG = 1, SG = 5, MC = 1, SC = 4;
  logic clk = 0, rst_n = 0;
  wload_t wload;
  logic h_clear, in_valid, in_ready, out_valid;
  logic [F-1:0][7:0] in_feat;
  logic [7:0] out_class, out_conf;
  logic signed [C-1:0][31:0] out_scores;
  logic signed [H-1:0][7:0] out_h;
  int checks = 0, failures = 0;

  int Wt [8*H+C+1][N];
  int Bt [8*H+C+1];
  int sig_t [256], tanh_t [256];
  int h [H], gh [3*H];

  gru_head #(.F(F), .H(H), .C(C), .REQ_M_S(MS), .REQ_S_S(SS), .REQ_M_G(MG), .REQ_S_G(SG),
             .REQ_M_C(MC), .REQ_S_C(SC)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int relu8(input longint a, input int m, input int s);
    longint v;
    v = (a * m) >>> s;
    return (v < 0) ? 0 : (v > 255) ? 255 : int'(v);
  endfunction
  function automatic int s16(input longint a, input int m, input int s);
    longint v;
    v = (a * m) >>> s;
    return (v < -32768) ? -32768 : (v > 32767) ? 32767 : int'(v);
  endfunction
  function automatic int idx(input int v);
    int q;
    q = v >>> 4;
    q = (q < -128) ? -128 : (q > 127) ? 127 : q;
    return q & 255;
  endfunction
  function automatic int dot(input int row, input int x [N], input int n);
    int a;
    a = Bt[row];
    for (int i = 0; i < n; i++) a += x[i] * (Wt[row][i] - 128);
    return a;
  endfunction
  function automatic void update_gh();
    int x [N];
    for (int i = 0; i < N; i++) x[i] = (i < H) ? h[i] : 0;
    for (int r = 0; r < 3 * H; r++) gh[r] = s16(dot(5 * H + r, x, H), MG, SG);
  endfunction

  task automatic load(input int row, input int col, input int data);
    @(negedge clk);
    wload = '{valid: 1'b1, sel: SEL_GRU, row: 10'(row), col: 8'(col), data: 32'(data)};
    @(negedge clk);
    wload = '0;
  endtask

  initial begin
    in_valid = 0; in_feat = '0; wload = '0; h_clear = 0;
    for (int c = 0; c < 256; c++) begin
      real x, v;
      x = real'($signed(8'(c))) / 16.0;
      v = 256.0 / (1.0 + $exp(-x));
      sig_t[c]  = (int'(v) > 255) ? 255 : int'(v);
      v = 128.0 * $tanh(x);
      tanh_t[c] = (int'(v) > 127) ? 127 : (int'(v) < -127) ? -127 : int'(v);
    end
    for (int r = 0; r < 8 * H + C + 1; r++) begin
      for (int c = 0; c < N; c++) Wt[r][c] = 0;
      Bt[r] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 8 * H + C + 1; r++) begin
      int ncol;
      ncol = (r < H) ? F : H;
      for (int c = 0; c < ncol; c++) begin Wt[r][c] = int'($urandom % 256); load(r, c, Wt[r][c]); end
      Bt[r] = int'($urandom % 4001) - 2000;
      load(r, N, Bt[r]);
    end
    // the head computed its hidden part after reset with zero weights; clear to redo it
    for (int i = 0; i < H; i++) h[i] = 0;
    @(negedge clk);
    while (!in_ready) @(negedge clk);
    h_clear = 1;
    @(negedge clk);
    h_clear = 0;
    update_gh();
    for (int w = 0; w < 60; w++) begin
      int f [N], x1 [N], x2 [N], gx [3*H], hn [N], sc [C];
      int best, conf, cyc;
      if (w == 30) begin
        while (!in_ready) @(negedge clk);
        h_clear = 1;
        @(negedge clk);
        h_clear = 0;
        for (int i = 0; i < H; i++) h[i] = 0;
        update_gh();
        checks++;
        repeat (2) @(negedge clk);
        while (!in_ready) @(negedge clk);
        if (out_h != '0) begin failures++; $display("h_clear did not clear the state"); end
      end
      for (int i = 0; i < N; i++) f[i] = 0;
      for (int i = 0; i < F; i++) begin f[i] = int'($urandom % 256); in_feat[i] = 8'(f[i]); end
      // reference
      for (int i = 0; i < N; i++) begin x1[i] = 0; x2[i] = 0; hn[i] = 0; end
      for (int r = 0; r < H; r++) x1[r] = relu8(dot(r, f, F), MS, SS);
      for (int r = 0; r < H; r++) x2[r] = relu8(dot(H + r, x1, H), MS, SS);
      for (int r = 0; r < 3 * H; r++) gx[r] = s16(dot(2 * H + r, x2, H), MG, SG);
      for (int j = 0; j < H; j++) begin
        int rr, zz, nn, rgh, hs;
        rr  = sig_t[idx(s16(gx[j] + gh[j], 1, 0))];
        zz  = sig_t[idx(s16(gx[H + j] + gh[H + j], 1, 0))];
        rgh = (rr * gh[2*H + j]) >>> 8;
        nn  = tanh_t[idx(s16(gx[2*H + j] + rgh, 1, 0))];
        hs  = (zz * nn + (256 - zz) * h[j]) >>> 8;
        hn[j] = hs;
      end
      for (int j = 0; j < H; j++) h[j] = hn[j];
      best = 0;
      for (int r = 0; r < C; r++) begin
        sc[r] = dot(8 * H + r, hn, H);
        if (sc[r] > sc[best]) best = r;
      end
      conf = sig_t[idx(s16(dot(8 * H + C, hn, H), MC, SC))];
      update_gh();
      // drive
      @(negedge clk);
      in_valid = 1;
      while (!in_ready) @(negedge clk);
      @(negedge clk);
      in_valid = 0;
      cyc = 1;
      while (!out_valid) begin @(negedge clk); cyc++; end
      checks += 3;
      if (cyc > H + 3 * ((H + 1) / 2) + H / 2 + (C + 1) / 2 + 18) begin failures++; $display("latency %0d", cyc); end
      if (out_class != 8'(best)) begin failures++; $display("w%0d class %0d exp %0d", w, out_class, best); end
      if (out_conf != 8'(conf)) begin failures++; $display("w%0d conf %0d exp %0d", w, out_conf, conf); end
      for (int r = 0; r < C; r++) begin
        checks++;
        if (out_scores[r] != 32'(sc[r])) begin failures++; $display("w%0d score %0d got %0d exp %0d", w, r, $signed(out_scores[r]), sc[r]); end
      end
      for (int j = 0; j < H; j++) begin
        checks++;
        if ($signed(out_h[j]) != 8'(h[j])) begin failures++; $display("w%0d h%0d got %0d exp %0d", w, j, $signed(out_h[j]), h[j]); end
      end
      if (w == 0) $display("latency %0d cycles", cyc);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
