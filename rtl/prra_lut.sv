// prra_lut: one next-winner table of the parallel round-robin arbiter (PRRA).
//
// For a given priority offset STATE_OFFSET (the port that was served last),
// the table maps every request vector to the port that wins next: ports are
// scanned in the order STATE_OFFSET+1, STATE_OFFSET+2, ... (mod WIDTH), ending
// with STATE_OFFSET itself, and the first requesting port wins.  An all-zero
// request vector maps to STATE_OFFSET so that an idle arbiter keeps its state.
// The table has 2**WIDTH entries and is computed at elaboration time by a
// constant function (the same nested loop the published arbiter uses); in
// hardware it is a WIDTH-input look-up table per output bit.  For WIDTH=4
// and STATE_OFFSET=0 it yields 0,0,1,1,2,2,1,1,3,3,1,1,2,2,1,1, as printed in
// the published arbiter figure.  Purely combinational.
module prra_lut #(
  parameter int unsigned WIDTH        = 4,
  parameter int unsigned STATE_OFFSET = 0,
  localparam int unsigned LOG2_WIDTH  = (WIDTH > 1) ? $clog2(WIDTH) : 1
) (
  input  logic [WIDTH-1:0]      req,
  output logic [LOG2_WIDTH-1:0] next_state
);
  localparam int unsigned LUT_LENGTH = 1 << WIDTH;

  typedef logic [LOG2_WIDTH-1:0] lut_t [LUT_LENGTH];

  function automatic lut_t build_lut();
    lut_t t;
    for (int unsigned j = 0; j < LUT_LENGTH; j++) begin
      t[j] = LOG2_WIDTH'(STATE_OFFSET);
      for (int k = WIDTH - 1; k >= 0; k--) begin
        if (j[(k + STATE_OFFSET + 1) % WIDTH]) t[j] = LOG2_WIDTH'((k + STATE_OFFSET + 1) % WIDTH);
      end
    end
    return t;
  endfunction

  localparam lut_t LUT = build_lut();

  assign next_state = LUT[req];
endmodule
