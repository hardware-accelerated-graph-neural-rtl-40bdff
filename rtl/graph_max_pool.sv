// graph_max_pool: windowed graph max pooling for keyword spotting.
//
// Within each window of WINDOW_CYCLES clocks (10 ms at 200 MHz by default,
// the window length of the design description) every incoming event feature
// vector is merged into a register by element-wise maximum, so no accumulation
// or division is needed. When the window timer expires the register is sent
// to the KWS head and cleared to zero (features are post-ReLU, so zero is the
// identity); a window without events yields a zero vector, so the head still
// advances once per window. Measuring the window with a clock-cycle timer and
// stalling the input for the one closing cycle are this design's choices.
//
// Interface: ready/valid input of feature vectors; out_valid/out_ready output
// of one pooled vector per window (the timer waits at its end if the previous
// vector has not been taken). out_nev counts events in the closed window.
module graph_max_pool #(
  parameter int unsigned F             = 64,
  parameter int unsigned WINDOW_CYCLES = 2_000_000
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [F-1:0][7:0] in_feat,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [F-1:0][7:0] out_feat,
  output logic [15:0]       out_nev
);
  localparam int unsigned TW = $clog2(WINDOW_CYCLES + 1);

  logic [TW-1:0]       timer;
  logic [F-1:0][7:0]   mx;
  logic [15:0]         nev;
  logic                close;

  assign close    = (timer == TW'(WINDOW_CYCLES - 1)) && (!out_valid || out_ready);
  assign in_ready = !close;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      timer     <= '0;
      mx        <= '0;
      nev       <= '0;
      out_valid <= 1'b0;
      out_feat  <= '0;
      out_nev   <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (close) begin
        out_valid <= 1'b1;
        out_feat  <= mx;
        out_nev   <= nev;
        mx        <= '0;
        nev       <= '0;
        timer     <= '0;
      end else begin
        if (timer != TW'(WINDOW_CYCLES - 1)) timer <= timer + 1'b1;
        if (in_valid) begin
          for (int i = 0; i < F; i++) if (in_feat[i] > mx[i]) mx[i] <= in_feat[i];
          nev <= nev + 1'b1;
        end
      end
    end
  end
endmodule
