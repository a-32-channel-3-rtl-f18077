// synapse_ctrl: synapse controller of one SNN layer.
//
// On start it takes the layer's input activations (ternary: +1, -1 or 0 per
// input axon) and runs one time step of the layer:
//   LEAK   one leak strobe to all neurons (skipped when leak_en is 0)
//   SCAN   picks the lowest-numbered input that is still active and reads its
//          weight row from the synaptic memory; inputs that are 0 are skipped,
//          which is where the event-driven saving comes from
//   DELIV  the row is on the memory output: w_valid is raised with w_neg set
//          for a -1 input, so every neuron adds or subtracts its own weight;
//          then back to SCAN
//   ACT    all inputs done: act_valid lets the neurons fire
//   DONE   one-cycle done strobe (the layer's spike-valid), then IDLE
// A time step with A active inputs takes 2*A + 4 cycles from start to done.
//
// From the paper: the controller's roles (axon and dendrite processing, neuron
// controls, weight fetch and delivery) and the valid chain between layers.
// The sequencing, the skip of inactive inputs by a priority search and the
// two cycles per active input are this design's choice.
module synapse_ctrl
  import bmi_pkg::*;
#(
  parameter int unsigned N_IN = L1_N
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic                    start,
  input  tern_t                   in_vec [N_IN],
  input  logic                    leak_en,
  output logic                    mem_re,
  output logic [$clog2(N_IN)-1:0] mem_rrow,
  output logic                    leak,
  output logic                    w_valid,
  output logic                    w_neg,
  output logic                    act_valid,
  output logic                    done,
  output logic                    busy
);
  typedef enum logic [2:0] {S_IDLE, S_LEAK, S_SCAN, S_DELIV, S_ACT, S_DONE} state_e;
  state_e state;

  logic [N_IN-1:0]         pend;     // inputs still to be processed
  logic [N_IN-1:0]         neg;      // sign of each input
  logic                    any;
  logic [$clog2(N_IN)-1:0] first;
  logic                    cur_neg;

  always_comb begin
    any   = 1'b0;
    first = '0;
    for (int i = N_IN - 1; i >= 0; i--) begin
      if (pend[i]) begin
        any   = 1'b1;
        first = ($clog2(N_IN))'(i);
      end
    end
  end

  assign mem_re    = (state == S_SCAN) && any;
  assign mem_rrow  = first;
  assign leak      = (state == S_LEAK) && leak_en;
  assign w_valid   = (state == S_DELIV);
  assign w_neg     = cur_neg;
  assign act_valid = (state == S_ACT);
  assign done      = (state == S_DONE);
  assign busy      = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      pend    <= '0;
      neg     <= '0;
      cur_neg <= 1'b0;
    end else if (en) begin
      unique case (state)
        S_IDLE: if (start) begin
          for (int i = 0; i < N_IN; i++) begin
            pend[i] <= in_vec[i].pos ^ in_vec[i].neg;
            neg[i]  <= in_vec[i].neg;
          end
          state <= S_LEAK;
        end
        S_LEAK:  state <= S_SCAN;
        S_SCAN: begin
          if (any) begin
            pend[first] <= 1'b0;
            cur_neg     <= neg[first];
            state       <= S_DELIV;
          end else begin
            state <= S_ACT;
          end
        end
        S_DELIV: state <= S_SCAN;
        S_ACT:   state <= S_DONE;
        S_DONE:  state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
