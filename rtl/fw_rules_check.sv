// fw_rules_check: decides for every analysed frame whether it is allowed by the
// whitelist held in the rules memory.
//
// On params_valid the frame parameters are latched and the rules memory is
// walked: read address a (a = 0 .. DEPTH-1) returns one rule from each of the
// N_BANKS banks, and the N_BANKS rules are compared in parallel on the clock
// the data arrives.  A frame is allowed when any valid rule matches it (see
// ids_pkg::rule_match); otherwise it is a rule violation.  A frame with an L2,
// L3 or L4 error is reported as an error whatever the rules say.
//
// Timing: OUT_RESULT pulses for one clock DEPTH+1 clocks after params_valid,
// together with FW_RESULT and PACKET_TYPE, which then hold until the next
// result.  A new frame can be accepted DEPTH clocks after the previous one (on
// the last clock of a walk), so successive results may come every DEPTH
// clocks.  A params_valid arriving earlier is not checked; it raises `overrun`
// for one clock.  With the default 4 x 4 rules a frame needs 4 clocks of the
// checker, and at 8 bytes per beat even a minimum Ethernet frame occupies 8
// clocks, so overrun cannot happen at 10 Gbit/s.
//
// FW_RESULT = 3 for an allowed frame and PACKET_TYPE 1 = TCP, 2 = UDP follow the
// published waveforms; the other codes, the field-by-field rule semantics, the
// walk of the memory and the latency are this design's choices.
module fw_rules_check
  import ids_pkg::*;
#(
  parameter int unsigned N_BANKS = 4,
  parameter int unsigned DEPTH   = 4,
  localparam int unsigned RA_W   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                             clk,        // FW_CLK
  input  logic                             rst_n,
  input  frame_params_t                    params,
  input  logic                             params_valid,
  // rules memory read port
  output logic                             rd_en,
  output logic [RA_W-1:0]                  rd_addr,
  input  logic [N_BANKS-1:0][RULE_W-1:0]   rd_data,
  // result
  output fw_result_e                       fw_result,
  output pkt_type_e                        packet_type,
  output logic                             out_result,
  output logic                             overrun
);

  typedef enum logic {S_IDLE, S_WALK} state_e;

  state_e        state;
  frame_params_t cur;
  logic [RA_W-1:0] addr;          // address whose data arrives this clock
  logic          matched;
  logic          hit;             // a rule of this clock's data matches
  logic          accept;

  always_comb begin
    hit = 1'b0;
    for (int unsigned b = 0; b < N_BANKS; b++) begin
      if (rule_match(fw_rule_t'(rd_data[b]), cur)) hit = 1'b1;
    end
  end

  // A new frame is accepted when idle or on the last clock of a walk.
  assign accept  = params_valid && ((state == S_IDLE) || (32'(addr) == DEPTH - 1));
  assign rd_en   = accept || ((state == S_WALK) && (32'(addr) != DEPTH - 1));
  assign rd_addr = accept ? '0 : RA_W'(addr + 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      cur         <= '0;
      addr        <= '0;
      matched     <= 1'b0;
      fw_result   <= FW_NONE;
      packet_type <= PT_OTHER;
      out_result  <= 1'b0;
      overrun     <= 1'b0;
    end else begin
      out_result <= 1'b0;
      overrun    <= params_valid && !accept;
      if (state == S_WALK) begin
        if (32'(addr) == DEPTH - 1) begin
          out_result  <= 1'b1;
          packet_type <= classify(cur);
          if (cur.lev2_err || cur.lev3_err || cur.lev4_err) fw_result <= FW_ERROR;
          else if (matched || hit)                          fw_result <= FW_ALLOWED;
          else                                              fw_result <= FW_BLOCKED;
          state <= S_IDLE;
        end else begin
          addr    <= RA_W'(addr + 1'b1);
          matched <= matched | hit;
        end
      end
      if (accept) begin
        state   <= S_WALK;
        cur     <= params;
        addr    <= '0;
        matched <= 1'b0;
      end
    end
  end

endmodule
