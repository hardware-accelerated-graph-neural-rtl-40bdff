// seq_divider: unsigned restoring divider, one quotient bit per clock.
//
// Used by the graph generator to average the neighbours' channel and time
// coordinates and by the global average pool to form the reciprocal of its
// event count. A division takes exactly W cycles after 'start' (32 with the
// default width, matching the 32 cycles given for the averaging divider);
// 'done' pulses for one cycle with quotient and remainder valid and held
// until the next start. Division by zero returns an all-ones quotient.
// The restoring algorithm is this design's choice.
module seq_divider #(
  parameter int unsigned W = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] dividend,
  input  logic [W-1:0] divisor,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] quotient,
  output logic [W-1:0] remainder
);
  logic [W-1:0]         dvd, dvs;
  logic [W:0]           rem;
  logic [$clog2(W+1)-1:0] cnt;
  logic [W:0]           trial;

  assign trial = {rem[W-1:0], dvd[W-1]} - {1'b0, dvs};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      done      <= 1'b0;
      cnt       <= '0;
      dvd       <= '0;
      dvs       <= '0;
      rem       <= '0;
      quotient  <= '0;
      remainder <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1;
        dvd  <= dividend;
        dvs  <= divisor;
        rem  <= '0;
        cnt  <= ($clog2(W+1))'(W);
      end else if (busy) begin
        if (!trial[W]) begin
          rem <= trial;
          dvd <= {dvd[W-2:0], 1'b1};
        end else begin
          rem <= {rem[W-1:0], dvd[W-1]};
          dvd <= {dvd[W-2:0], 1'b0};
        end
        cnt <= cnt - 1'b1;
        if (cnt == 1) begin
          busy      <= 1'b0;
          done      <= 1'b1;
          quotient  <= {dvd[W-2:0], !trial[W]};
          remainder <= !trial[W] ? trial[W-1:0] : {rem[W-2:0], dvd[W-1]};
        end
      end
    end
  end
endmodule
