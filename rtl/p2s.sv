// p2s: parallel-to-serial converter between the polar decoder and the
// descrambler.
//
// load with a WIDTH-bit word starts a burst: for the next WIDTH cycles
// out_valid is high and out_bit carries word bit 0, 1, ..., WIDTH-1;
// out_first marks bit 0 and out_last the final bit. A load during a burst
// would restart it; in the receiver a new word comes at most every 256
// cycles, after the 158-cycle burst has ended (checked by an assertion).
//
// The paper shows the block and its place; the bit order and the
// first/last flags are this design's choices.
module p2s #(
  parameter int unsigned WIDTH = 158
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load,
  input  logic [WIDTH-1:0] word,
  output logic             out_valid,
  output logic             out_bit,
  output logic             out_first,
  output logic             out_last
);

  localparam int unsigned CW = $clog2(WIDTH + 1);

  logic [WIDTH-1:0] sreg;
  logic [CW-1:0]    left;     // bits still to send, including the current one

  assign out_valid = (left != '0);
  assign out_bit   = sreg[0];
  assign out_first = (left == CW'(WIDTH));
  assign out_last  = (left == CW'(1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sreg <= '0;
      left <= '0;
    end else if (load) begin
      sreg <= word;
      left <= CW'(WIDTH);
    end else if (out_valid) begin
      sreg <= sreg >> 1;
      left <= left - 1'b1;
    end
  end

  ap_no_overlap: assert property (@(posedge clk) disable iff (!rst_n) load |-> !out_valid || out_last)
    else $error("p2s loaded during a burst");

endmodule
