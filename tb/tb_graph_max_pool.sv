// tb_graph_max_pool: self-checking test of the windowed max pooling unit.
// With a short window (WINDOW_CYCLES = 50) random feature vectors arrive at
// random times; a cycle-level model tracks the element-wise maximum and the
// event count of the open window and snapshots them when the unit closes the
// window (in_ready low for that one cycle). Checked: the pooled vector and
// count, a zero vector for empty windows, windows exactly WINDOW_CYCLES long
// while the output is taken promptly, and a held timer (longer window, no
// lost vector) while out_ready is withheld.
module tb_graph_max_pool;
  localparam int F = 8, WIN = 50;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [F-1:0][7:0] in_feat, out_feat;
  logic [15:0] out_nev;
  int checks = 0, failures = 0;

  graph_max_pool #(.F(F), .WINDOW_CYCLES(WIN)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int mx [F], ex [F];
  int nev, ex_nev, cyc, last_close, windows, empty_seen, hold, held_windows;
  bit closing, pending, was_held;

  initial begin
    in_valid = 0; out_ready = 0; in_feat = '0;
    for (int i = 0; i < F; i++) mx[i] = 0;
    nev = 0; cyc = 0; last_close = 0; windows = 0; empty_seen = 0; hold = 0;
    held_windows = 0; pending = 0; was_held = 0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    while (windows < 60) begin
      @(negedge clk);
      cyc++;
      // compare a freshly closed window
      if (pending) begin
        pending = 0;
        checks += 2;
        if (!out_valid) begin failures++; $display("no output after close"); end
        if (out_nev != 16'(ex_nev)) begin failures++; $display("nev %0d exp %0d", out_nev, ex_nev); end
        for (int i = 0; i < F; i++) begin
          checks++;
          if (out_feat[i] != 8'(ex[i])) begin failures++; $display("w%0d f%0d got %0d exp %0d", windows, i, out_feat[i], ex[i]); end
        end
        if (windows % 15 == 7) begin hold = WIN + 13; was_held = 1; end
      end
      // stimulus; windows 20..24 carry no events
      in_valid = (windows < 20 || windows > 24) && ($urandom % 4 == 0);
      for (int i = 0; i < F; i++) in_feat[i] = 8'($urandom);
      out_ready = out_valid && (hold == 0);
      if (hold > 0) hold--;
      #1;
      closing = !in_ready;
      @(posedge clk);
      if (out_valid && out_ready) windows++;
      if (closing) begin
        checks++;
        if (last_close > 0 && !was_held && cyc - last_close != WIN) begin
          failures++; $display("window length %0d", cyc - last_close);
        end
        if (was_held && cyc - last_close > WIN) held_windows++;
        was_held = 0;
        last_close = cyc;
        for (int i = 0; i < F; i++) begin ex[i] = mx[i]; mx[i] = 0; end
        ex_nev = nev; nev = 0;
        if (ex_nev == 0) empty_seen++;
        pending = 1;
      end else if (in_valid) begin
        for (int i = 0; i < F; i++) if (in_feat[i] > mx[i]) mx[i] = in_feat[i];
        nev++;
      end
    end
    checks += 2;
    if (empty_seen < 4) begin failures++; $display("empty windows %0d", empty_seen); end
    if (held_windows < 2) begin failures++; $display("held windows %0d", held_windows); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
