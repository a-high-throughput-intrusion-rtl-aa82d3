// fw_rules_memory: the whitelist rule store, N_BANKS block RAMs of DEPTH rule
// words each (4 x 4 words of 224 bits in the published design).
//
// Each bank is a simple dual-port RAM with its write port in the UART clock
// domain and its read port in the frame clock domain, so the RAM itself is the
// clock-domain crossing for rule loading.  Writes take a flat rule index:
// bank = wr_addr / DEPTH, word = wr_addr % DEPTH.  One read returns word
// rd_addr of every bank at once (rd_data[b] is bank b), one clock after rd_en.
// A rule written while a check reads the same word may be seen old or new.
//
// Bank count, depth and word width follow the published design; the
// addressing, the parallel read of all banks and the all-zero power-up
// contents (every rule invalid, so every frame is blocked until rules are
// loaded) are this design's choices.
module fw_rules_memory #(
  parameter int unsigned N_BANKS = 4,
  parameter int unsigned DEPTH   = 4,
  parameter int unsigned RULE_W  = 224,
  localparam int unsigned WA_W   = $clog2(N_BANKS * DEPTH),
  localparam int unsigned RA_W   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  // write port (UART clock domain)
  input  logic                             wr_clk,
  input  logic                             wr_en,
  input  logic [WA_W-1:0]                  wr_addr,
  input  logic [RULE_W-1:0]                wr_data,
  // read port (frame clock domain)
  input  logic                             rd_clk,
  input  logic                             rd_en,
  input  logic [RA_W-1:0]                  rd_addr,
  output logic [N_BANKS-1:0][RULE_W-1:0]   rd_data
);

  for (genvar b = 0; b < N_BANKS; b++) begin : g_bank
    logic [RULE_W-1:0] mem [DEPTH];

    initial begin
      for (int unsigned i = 0; i < DEPTH; i++) mem[i] = '0;
    end

    always_ff @(posedge wr_clk) begin
      if (wr_en && (32'(wr_addr) / DEPTH == b)) mem[32'(wr_addr) % DEPTH] <= wr_data;
    end

    always_ff @(posedge rd_clk) begin
      if (rd_en) rd_data[b] <= mem[rd_addr];
    end
  end

endmodule
