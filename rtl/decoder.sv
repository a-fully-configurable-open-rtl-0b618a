// decoder: control registers of the core (mem_clk domain).
//
// Holds, for each of the K layers, the run-time neuron parameters: growth rate,
// decay rate, threshold V_th, reset value V_reset (Qn.q), refractory period and
// enable, and reset mechanism. The host writes one register per mem_clk cycle
// through cfg_in (layer, register address, data). The registers are read by the
// spk_clk logic without synchronisation, so they are to be written while no input is
// streamed. The parameter set follows the source design; the register map, one set
// per layer and the reset values (all zero except the threshold, which resets to the
// largest value; reset-by-subtraction) are this design's
// choices. An out-of-range layer index is ignored.
module decoder
  import quantisenc_pkg::*;
#(
  parameter int unsigned K  = 3,
  parameter int unsigned QN = QN_DEF,
  parameter int unsigned QQ = QQ_DEF,
  localparam int unsigned W  = QN + QQ,
  localparam int unsigned LW = (K > 1) ? $clog2(K) : 1
) (
  input  logic     mem_clk,
  input  logic     rst_n,
  input  cfg_wr_t  cfg_in,
  output lif_cfg_t cfg [K]
);
  // Threshold resets to the largest Qn.q value so that no neuron fires before it is
  // configured.
  localparam logic [DATA_W-1:0] VTH_RST = DATA_W'((64'd1 << (W - 1)) - 64'd1);
  logic [LW-1:0] sel;
  assign sel = cfg_in.layer[LW-1:0];

  always_ff @(posedge mem_clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < K; l++) begin
        cfg[l] <= '{growth_rate: '0, decay_rate: '0, vth: VTH_RST, v_reset: '0,
                    refractory_period: '0, refractory_en: 1'b0, reset_mech: RST_SUB};
      end
    end else if (cfg_in.we && (int'(cfg_in.layer) < K)) begin
      case (cfg_in.addr)
        REG_GROWTH:  cfg[sel].growth_rate       <= cfg_in.data;
        REG_DECAY:   cfg[sel].decay_rate        <= cfg_in.data;
        REG_VTH:     cfg[sel].vth               <= cfg_in.data;
        REG_VRESET:  cfg[sel].v_reset           <= cfg_in.data;
        REG_REFPER:  cfg[sel].refractory_period <= cfg_in.data[REF_W-1:0];
        REG_REFEN:   cfg[sel].refractory_en     <= cfg_in.data[0];
        REG_RSTMECH: cfg[sel].reset_mech        <= reset_mech_t'(cfg_in.data[1:0]);
        default: ;
      endcase
    end
  end
endmodule
