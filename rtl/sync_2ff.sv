// sync_2ff: two-flop synchroniser for a single-bit level (or toggle) crossing
// into the clock domain of clk.  The output follows the input two to three
// clocks later.  Used for the toggle handshakes between the UART and the
// statistics clock domains.
module sync_2ff (
  input  logic clk,
  input  logic rst_n,
  input  logic d,      // asynchronous to clk
  output logic q
);
  logic meta;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) {q, meta} <= 2'b00;
    else        {q, meta} <= {meta, d};
  end
endmodule
