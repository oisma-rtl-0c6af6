// sense_amp: behavioural model of the single-ended sense amplifiers, one per
// column.
//
// Each amplifier compares its bitline with the reference voltage Vref and
// latches the result at the end of the floating & sensing phase: bitline
// above Vref gives logic 1. In this model the bitline level arrives already
// resolved against Vref (bl_high), and the latch is taken at the clock edge
// that ends the phase in which sense_en is high. The output holds until the
// next sensing; it is cleared by reset. Holding the output (rather than
// letting it fall during the next operation) is this model's choice.
module sense_amp #(
  parameter int unsigned N = 256
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         sense_en,
  input  logic [N-1:0] bl_high,
  output logic [N-1:0] sa_out
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        sa_out <= '0;
    else if (sense_en) sa_out <= bl_high;
  end
endmodule
