// prra_lut_tb: checks the four 4-input round-robin tables against the table
// printed in the published arbiter figure (16 request vectors x 4 offsets),
// and an 8-input table (9-port router) against a scan model.
module prra_lut_tb;
  int checks = 0, failures = 0;

  // Published table, row = request vector 0..15, column = LUT id 0..3.
  localparam logic [1:0] EXPECTED [16][4] = '{
    '{0,1,2,3}, '{0,0,0,0}, '{1,1,1,1}, '{1,0,0,0},
    '{2,2,2,2}, '{2,2,0,0}, '{1,2,1,1}, '{1,2,0,0},
    '{3,3,3,3}, '{3,3,3,0}, '{1,3,3,1}, '{1,3,3,0},
    '{2,2,3,2}, '{2,2,3,0}, '{1,2,3,1}, '{1,2,3,0}};

  logic [3:0] req4;
  logic [1:0] out4 [4];
  for (genvar i = 0; i < 4; i++) begin : g4
    prra_lut #(.WIDTH(4), .STATE_OFFSET(i)) u (.req(req4), .next_state(out4[i]));
  end

  logic [7:0] req8;
  logic [2:0] out8 [8];
  for (genvar i = 0; i < 8; i++) begin : g8
    prra_lut #(.WIDTH(8), .STATE_OFFSET(i)) u (.req(req8), .next_state(out8[i]));
  end

  function automatic int scan(input int unsigned req, input int width, input int off);
    for (int s = 1; s <= width; s++) if (req[(off + s) % width]) return (off + s) % width;
    return off;
  endfunction

  initial begin
    for (int r = 0; r < 16; r++) begin
      req4 = 4'(r);
      #1;
      for (int l = 0; l < 4; l++) begin
        checks++;
        if (out4[l] != EXPECTED[r][l]) begin
          failures++;
          $display("FAIL: LUT%0d req=%b got %0d expected %0d", l, req4, out4[l], EXPECTED[r][l]);
        end
      end
    end
    for (int r = 0; r < 256; r++) begin
      req8 = 8'(r);
      #1;
      for (int l = 0; l < 8; l++) begin
        checks++;
        if (int'(out8[l]) != scan(r, 8, l)) begin
          failures++;
          $display("FAIL: 8-input LUT%0d req=%b got %0d", l, req8, out8[l]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
