// tb_mlp_head: self-checking test of the two-layer classification head.
// Random weights (8-bit codes, zero point 128) and 32-bit biases are loaded
// through the load port for a small head (F=16, H=12, C=5, odd C to exercise
// the single-row tail). For random input vectors a reference model computes
// hid = clamp(((W1 x + b1) * M) >> S, 0, 255), scores = W2 hid + b2 and the
// argmax (first index wins a tie); scores, class and the latency
// (ceil(H/2) + ceil(C/2) + 8 cycles at most) are checked.
module tb_mlp_head;
  import gnn_pkg::*;
  localparam int F = 16, H = 12, C = 5, N = 16, M = 3, S = 10;
  logic clk = 0, rst_n = 0;
  wload_t wload;
  logic in_valid, in_ready, out_valid;
  logic [F-1:0][7:0] in_feat;
  logic [7:0] out_class;
  logic signed [C-1:0][31:0] out_scores;
  int checks = 0, failures = 0;
  int W1 [H][F], B1 [H], W2 [C][H], B2 [C];

  mlp_head #(.F(F), .H(H), .C(C), .REQ_M(M), .REQ_S(S)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load(input int row, input int col, input int data);
    @(negedge clk);
    wload = '{valid: 1'b1, sel: SEL_MLP, row: 10'(row), col: 8'(col), data: 32'(data)};
    @(negedge clk);
    wload = '0;
  endtask

  initial begin
    in_valid = 0; in_feat = '0; wload = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < H; r++) begin
      for (int c = 0; c < F; c++) begin W1[r][c] = int'($urandom % 256); load(r, c, W1[r][c]); end
      B1[r] = int'($urandom % 40001) - 20000; load(r, N, B1[r]);
    end
    for (int r = 0; r < C; r++) begin
      for (int c = 0; c < H; c++) begin W2[r][c] = int'($urandom % 256); load(H + r, c, W2[r][c]); end
      B2[r] = int'($urandom % 2001) - 1000; load(H + r, N, B2[r]);
    end
    for (int v = 0; v < 200; v++) begin
      int hid [H];
      int sc [C];
      int best, cyc;
      for (int i = 0; i < F; i++) in_feat[i] = 8'($urandom);
      for (int r = 0; r < H; r++) begin
        longint a;
        a = B1[r];
        for (int i = 0; i < F; i++) a += longint'(in_feat[i]) * (W1[r][i] - 128);
        a = (a * M) >>> S;
        hid[r] = (a < 0) ? 0 : (a > 255) ? 255 : int'(a);
      end
      best = 0;
      for (int r = 0; r < C; r++) begin
        sc[r] = B2[r];
        for (int i = 0; i < H; i++) sc[r] += hid[i] * (W2[r][i] - 128);
        if (sc[r] > sc[best]) best = r;
      end
      @(negedge clk);
      in_valid = 1;
      while (!in_ready) @(negedge clk);
      @(negedge clk);
      in_valid = 0;
      cyc = 1;
      while (!out_valid) begin @(negedge clk); cyc++; end
      checks += 2;
      if (cyc > (H + 1) / 2 + (C + 1) / 2 + 8) begin failures++; $display("latency %0d", cyc); end
      if (out_class != 8'(best)) begin failures++; $display("class %0d exp %0d", out_class, best); end
      for (int r = 0; r < C; r++) begin
        checks++;
        if (out_scores[r] != 32'(sc[r])) begin failures++; $display("score %0d got %0d exp %0d", r, $signed(out_scores[r]), sc[r]); end
      end
      @(negedge clk);
      checks++;
      if (out_valid) begin failures++; $display("out_valid longer than one cycle"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
