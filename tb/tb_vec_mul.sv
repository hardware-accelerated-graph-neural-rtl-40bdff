// tb_vec_mul: self-checking test of the dot-product unit.
// Random activation vectors (unsigned and signed values) and weight codes are
// applied; the registered result one cycle later must equal
// sum x[i] * (w[i] - 128), computed here with plain integers.
module tb_vec_mul;
  import gnn_pkg::*;
  localparam int N = 66;
  logic clk = 0, en;
  logic signed [N-1:0][8:0] x;
  logic        [N-1:0][7:0] w;
  logic signed [31:0] y;
  int checks = 0, failures = 0;

  vec_mul #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_v;
    en = 0;
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      exp_v = 0;
      for (int i = 0; i < N; i++) begin
        int xv, wv;
        xv = (t % 2) ? (int'($urandom % 256) - 128) : int'($urandom % 256);
        if (t == 0) xv = 255;
        wv = (t == 0) ? 0 : int'($urandom % 256);
        x[i] = 9'(xv);
        w[i] = 8'(wv);
        exp_v += xv * (wv - 128);
      end
      en = 1;
      @(negedge clk);
      en = 0;
      checks++;
      if (y !== exp_v) begin failures++; $display("mismatch t=%0d got %0d exp %0d", t, y, exp_v); end
      // en low: the result must hold
      x = '0;
      @(negedge clk);
      checks++;
      if (y !== exp_v) begin failures++; $display("hold failed"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
