// reset_sync: asynchronous-assert, synchronous-release reset for one clock
// domain.  rst_n_out falls with arst_n at once and rises on the second rising
// edge of clk after arst_n has risen.
module reset_sync (
  input  logic clk,
  input  logic arst_n,
  output logic rst_n_out
);
  logic stage;
  always_ff @(posedge clk or negedge arst_n) begin
    if (!arst_n) {rst_n_out, stage} <= 2'b00;
    else         {rst_n_out, stage} <= {stage, 1'b1};
  end
endmodule
