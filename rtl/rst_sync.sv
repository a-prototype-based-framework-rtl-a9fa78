// rst_sync: reset synchronizer for one clock domain.
//
// Asserts rst_n_out at once when rst_n_in falls and releases it on the
// second rising clk edge after rst_n_in rises, so each frequency island
// leaves reset in step with its own clock. The two-flop structure is this
// design's choice.
module rst_sync (
  input  logic clk,
  input  logic rst_n_in,
  output logic rst_n_out
);
  logic r1;
  always_ff @(posedge clk or negedge rst_n_in) begin
    if (!rst_n_in) begin
      r1        <= 1'b0;
      rst_n_out <= 1'b0;
    end else begin
      r1        <= 1'b1;
      rst_n_out <= r1;
    end
  end
endmodule
