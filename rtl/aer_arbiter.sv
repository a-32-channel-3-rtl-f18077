// aer_arbiter: AER arbiter and encoder between the pixel array and the decoder.
//
// The 32 pixels raise req[k] when they detect a spike. The arbiter grants one
// request at a time in round-robin order (starting after the last winner),
// puts its address on aer_addr = {1'b1, k} (bit 5 flags a valid address, bits
// 4:0 are the channel) and runs a four-phase handshake with the decoder
// (aer_req up, aer_ack up, aer_req down). It then raises ack[k] and holds it
// until the pixel has dropped req[k] and the decoder has dropped aer_ack.
// One event therefore takes about six cycles.
//
// The paper gives the block, the req[31:0]/ack[31:0] lines and the 6-bit
// address; the round-robin order, the meaning of address bit 5 and the
// synchronous (clocked) handshake are this design's choice.
module aer_arbiter
  import bmi_pkg::*;
#(
  parameter int unsigned NCH = N_CH
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NCH-1:0]    req,
  output logic [NCH-1:0]    ack,
  output logic              aer_req,
  output logic [AER_AW-1:0] aer_addr,
  input  logic              aer_ack
);
  localparam int unsigned IW = $clog2(NCH);
  typedef enum logic [1:0] {A_IDLE, A_SEND, A_REL} arb_e;
  arb_e state;
  logic [IW-1:0] last, win, pick;
  logic          found;

  // round-robin search: first request after 'last'
  always_comb begin
    found = 1'b0;
    pick  = '0;
    for (int o = 1; o <= NCH; o++) begin
      if (!found && req[IW'((int'(last) + o) % NCH)]) begin
        found = 1'b1;
        pick  = IW'((int'(last) + o) % NCH);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= A_IDLE;
      last     <= IW'(NCH - 1);
      win      <= '0;
      ack      <= '0;
      aer_req  <= 1'b0;
      aer_addr <= '0;
    end else begin
      unique case (state)
        A_IDLE: if (found) begin
          win      <= pick;
          last     <= pick;
          aer_addr <= AER_AW'({1'b1, pick});
          aer_req  <= 1'b1;
          state    <= A_SEND;
        end
        A_SEND: if (aer_ack) begin
          aer_req  <= 1'b0;
          ack[win] <= 1'b1;
          state    <= A_REL;
        end
        A_REL: if (!req[win] && !aer_ack) begin
          ack[win] <= 1'b0;
          state    <= A_IDLE;
        end
        default: state <= A_IDLE;
      endcase
    end
  end

  // at most one pixel is acknowledged at a time
  a_onehot_ack: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(ack));
endmodule
