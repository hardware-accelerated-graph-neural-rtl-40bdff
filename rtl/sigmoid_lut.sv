// sigmoid_lut: 256-entry look-up table for the logistic sigmoid.
//
// The input is a signed 8-bit code in Q3.4 (x = code/16, range -8 .. 7.94);
// the output is an unsigned 8-bit code in Q0.8:
//   y = min(255, round(256 / (1 + exp(-x)))).
// Implementing the GRU's nonlinearities as look-up tables follows the design
// description; the number formats are this design's choice. The table is
// computed at elaboration by a constant function and read combinationally
// (a distributed ROM).
module sigmoid_lut (
  input  logic [7:0] idx,
  output logic [7:0] y
);
  function automatic logic [255:0][7:0] build();
    logic [255:0][7:0] t;
    for (int c = 0; c < 256; c++) begin
      real x, v;
      int  q;
      x = real'((c < 128) ? c : c - 256) / 16.0;
      v = 256.0 / (1.0 + $exp(-x));
      q = int'(v);
      t[c] = (q > 255) ? 8'd255 : 8'(q);
    end
    return t;
  endfunction

  localparam logic [255:0][7:0] TABLE = build();
  assign y = TABLE[idx];
endmodule
