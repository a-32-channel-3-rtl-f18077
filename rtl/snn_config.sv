// snn_config: configuration register file of the decoder (config interface).
//
// A simple synchronous register bus: on cfg_we the 16-bit cfg_wdata is written
// to the register at cfg_addr; cfg_rdata always returns the addressed register.
//   0  vth_l1                layer-1 firing threshold (signed)
//   1  vth_l2                layer-2 firing threshold (signed)
//   2  [3:0] shift_l1, [7:4] shift_l2, [11:8] shift_l3   leak shifts L
//   3  [0] leak_en, [1] infer_en, [6:2] spd_thr, [10:7] spd_refr
// Reset loads CFG_DEFAULT. The paper shows a config interface feeding "SNN
// configs" and a configurable spike-detection threshold; the register map, the
// bus and the defaults (spike threshold 5, the setting with the best decoding
// result) are this design's choice.
module snn_config
  import bmi_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cfg_we,
  input  logic [1:0]  cfg_addr,
  input  logic [15:0] cfg_wdata,
  output logic [15:0] cfg_rdata,
  output cfg_t        cfg
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg <= CFG_DEFAULT;
    end else if (cfg_we) begin
      unique case (cfg_addr)
        2'd0: cfg.vth_l1 <= vmem_t'(cfg_wdata);
        2'd1: cfg.vth_l2 <= vmem_t'(cfg_wdata);
        2'd2: begin
          cfg.shift_l1 <= cfg_wdata[3:0];
          cfg.shift_l2 <= cfg_wdata[7:4];
          cfg.shift_l3 <= cfg_wdata[11:8];
        end
        2'd3: begin
          cfg.leak_en  <= cfg_wdata[0];
          cfg.infer_en <= cfg_wdata[1];
          cfg.spd_thr  <= cfg_wdata[6:2];
          cfg.spd_refr <= cfg_wdata[10:7];
        end
        default: ;
      endcase
    end
  end

  always_comb begin
    unique case (cfg_addr)
      2'd0:    cfg_rdata = cfg.vth_l1;
      2'd1:    cfg_rdata = cfg.vth_l2;
      2'd2:    cfg_rdata = {4'd0, cfg.shift_l3, cfg.shift_l2, cfg.shift_l1};
      default: cfg_rdata = {5'd0, cfg.spd_refr, cfg.spd_thr, cfg.infer_en, cfg.leak_en};
    endcase
  end
endmodule
