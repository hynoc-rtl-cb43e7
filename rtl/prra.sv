// prra: parallel round-robin arbiter used by every HyNoC egress port.
//
// WIDTH requesters (the N-1 ingress ports that can reach an egress) compete
// for one resource.  WIDTH prra_lut tables, one per possible current state,
// evaluate the request vector in parallel; the table of the current state is
// selected and its output is the next state, so the arbiter jumps straight to
// the next requester in round-robin order instead of scanning idle ports one
// per cycle.  The state register and the one-hot grant register only load
// when the current grant is no longer in use: the granted request has been
// released (end of packet) or nothing is granted.  A grant thus stays locked
// for a whole packet.  When no request is present the grant is zero.
//
// Timing: with PIPELINE=0 the tables are combinational and a request raised
// in cycle t is granted from cycle t+1.  With PIPELINE=1 the request vector
// and the table outputs are registered first ("optional registers" of the
// published figure), so the grant comes one cycle later.  These two
// latencies and the structure follow the published arbiter; the exact load
// condition of the registers is this design's reading of it.
module prra #(
  parameter int unsigned WIDTH      = 4,
  parameter bit          PIPELINE   = 1'b0,
  localparam int unsigned LOG2_WIDTH = (WIDTH > 1) ? $clog2(WIDTH) : 1
) (
  input  logic                  clk,
  input  logic                  srst,
  input  logic [WIDTH-1:0]      req,
  output logic [WIDTH-1:0]      grant,
  output logic [LOG2_WIDTH-1:0] state
);
  logic [LOG2_WIDTH-1:0] lut_out [WIDTH];
  logic [LOG2_WIDTH-1:0] lut_sel [WIDTH];
  logic [WIDTH-1:0]      req_sel;
  logic [LOG2_WIDTH-1:0] next_state;
  logic                  load;

  for (genvar i = 0; i < WIDTH; i++) begin : g_lut
    prra_lut #(.WIDTH(WIDTH), .STATE_OFFSET(i)) u_lut (
      .req       (req),
      .next_state(lut_out[i])
    );
  end

  if (PIPELINE) begin : g_pipe
    logic [LOG2_WIDTH-1:0] lut_q [WIDTH];
    logic [WIDTH-1:0]      req_q;
    always_ff @(posedge clk) begin
      if (srst) begin
        req_q <= '0;
        for (int i = 0; i < WIDTH; i++) lut_q[i] <= LOG2_WIDTH'(i);
      end else begin
        req_q <= req;
        for (int i = 0; i < WIDTH; i++) lut_q[i] <= lut_out[i];
      end
    end
    assign req_sel = req_q;
    always_comb for (int i = 0; i < WIDTH; i++) lut_sel[i] = lut_q[i];
  end else begin : g_comb
    assign req_sel = req;
    always_comb for (int i = 0; i < WIDTH; i++) lut_sel[i] = lut_out[i];
  end

  assign next_state = lut_sel[state];
  assign load       = ~|(grant & req_sel);

  always_ff @(posedge clk) begin
    if (srst) begin
      state <= '0;
      grant <= '0;
    end else if (load) begin
      state <= next_state;
      grant <= (req_sel == '0) ? '0 : WIDTH'(1) << next_state;
    end
  end

  a_grant_onehot: assert property (@(posedge clk) disable iff (srst) $onehot0(grant));
  a_grant_requested: assert property (@(posedge clk) disable iff (srst)
                                      (grant != '0) |-> (grant[state]));
endmodule
