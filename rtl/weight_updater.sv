// weight_updater: loads synaptic weights into the three layer memories.
//
// wu_set loads a write pointer (layer, row, column). Each wu_valid then writes
// wu_data to the pointed weight and advances the pointer: column first, then
// row, then on to the next layer (L1 -> L2 -> L3 -> L1). A whole network of
// 32*32 + 32*48 + 48*2 = 2656 weights is therefore loaded with one wu_set and
// 2656 writes in row-major order. The write reaches the memory one cycle after
// wu_valid. The paper shows a weight updater driving "SRAM Write"; the
// auto-incrementing pointer is this design's choice.
module weight_updater
  import bmi_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       wu_set,
  input  layer_e     wu_layer,
  input  logic [5:0] wu_row,
  input  logic [5:0] wu_col,
  input  logic       wu_valid,
  input  weight_t    wu_data,
  output logic       we,
  output layer_e     wlayer,
  output logic [5:0] wrow,
  output logic [5:0] wcol,
  output weight_t    wdata
);
  layer_e     p_layer;
  logic [5:0] p_row, p_col;
  logic [5:0] n_rows, n_cols;

  always_comb begin
    unique case (p_layer)
      LAYER_L1: begin n_rows = 6'(L1_N); n_cols = 6'(L1_N); end
      LAYER_L2: begin n_rows = 6'(L1_N); n_cols = 6'(L2_N); end
      default:  begin n_rows = 6'(L2_N); n_cols = 6'(L3_N); end
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_layer <= LAYER_L1;
      p_row   <= '0;
      p_col   <= '0;
      we      <= 1'b0;
      wlayer  <= LAYER_L1;
      wrow    <= '0;
      wcol    <= '0;
      wdata   <= '0;
    end else begin
      we <= 1'b0;
      if (wu_set) begin
        p_layer <= wu_layer;
        p_row   <= wu_row;
        p_col   <= wu_col;
      end else if (wu_valid) begin
        we     <= 1'b1;
        wlayer <= p_layer;
        wrow   <= p_row;
        wcol   <= p_col;
        wdata  <= wu_data;
        if (p_col == n_cols - 1'b1) begin
          p_col <= '0;
          if (p_row == n_rows - 1'b1) begin
            p_row <= '0;
            unique case (p_layer)
              LAYER_L1: p_layer <= LAYER_L2;
              LAYER_L2: p_layer <= LAYER_L3;
              default:  p_layer <= LAYER_L1;
            endcase
          end else begin
            p_row <= p_row + 1'b1;
          end
        end else begin
          p_col <= p_col + 1'b1;
        end
      end
    end
  end
endmodule
