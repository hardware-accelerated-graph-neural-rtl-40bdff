// global_avg_pool: global graph average pooling for the classification task.
//
// Every event feature vector from the last convolution is added into one
// accumulator per feature and an event counter is incremented, as the design
// description specifies. When the event flagged 'last' (the end of the
// sample) has been added, the mean is formed. Instead of one division per
// feature, this design divides once: a 32-cycle sequential divider computes
// recip = floor(2^REC_SH / count), and every feature becomes
// min(255, (acc * recip + 2^(REC_SH-1)) >> REC_SH), all features in parallel.
// That choice is this design's; it differs from an exact quotient by at most
// one code.
//
// Interface: ready/valid input (feature vector plus 'last'); the pooled vector
// is presented with out_valid and held until out_ready, after which the
// accumulators and counter are cleared for the next sample. in_ready is low
// from the last event until the result has been taken (about 35 cycles).
module global_avg_pool #(
  parameter int unsigned F      = 64,
  parameter int unsigned CNT_W  = 16,
  parameter int unsigned REC_SH = 24
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [F-1:0][7:0] in_feat,
  input  logic              in_last,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [F-1:0][7:0] out_feat,
  output logic [CNT_W-1:0]  out_count
);
  localparam int unsigned AW = 8 + CNT_W;

  typedef enum logic [1:0] {ACC, DIV, MUL, OUT} state_t;
  state_t state;

  logic [F-1:0][AW-1:0] acc;
  logic [CNT_W-1:0]     cnt;
  logic                 dstart, ddone;
  logic [31:0]          recip;

  seq_divider #(.W(32)) u_div (
    .clk, .rst_n, .start(dstart), .dividend(32'(1) << REC_SH), .divisor(32'(cnt)),
    .busy(), .done(ddone), .quotient(recip), .remainder());

  // Mean of every feature: rounded product with the reciprocal, clamped.
  logic [F-1:0][7:0] mean;
  always_comb begin
    for (int i = 0; i < F; i++) begin
      logic [63:0] prod;
      prod = (64'(acc[i]) * 64'(recip) + (64'(1) << (REC_SH - 1))) >> REC_SH;
      mean[i] = (prod > 255) ? 8'd255 : prod[7:0];
    end
  end

  assign in_ready  = (state == ACC);
  assign out_valid = (state == OUT);
  assign dstart    = (state == DIV);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= ACC;
      acc       <= '0;
      cnt       <= '0;
      out_feat  <= '0;
      out_count <= '0;
    end else begin
      unique case (state)
        ACC: if (in_valid) begin
          for (int i = 0; i < F; i++) acc[i] <= acc[i] + AW'(in_feat[i]);
          cnt <= cnt + 1'b1;
          if (in_last) state <= DIV;
        end
        DIV: state <= MUL;             // divider started in this cycle
        MUL: if (ddone) begin
          out_feat  <= mean;
          out_count <= cnt;
          state     <= OUT;
        end
        OUT: if (out_ready) begin
          acc   <= '0;
          cnt   <= '0;
          state <= ACC;
        end
        default: state <= ACC;
      endcase
    end
  end
endmodule
