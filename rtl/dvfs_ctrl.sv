// dvfs_ctrl -- per-PE performance-level control.
//
// The paper adapts clock frequency and supply voltage of each core to save
// energy, either under software control or coupled automatically to the
// application.  The regulators and clock generators that realise a level are
// analog and outside this module; this module decides the level and gates
// the core clock accordingly.  Levels and their clock ratios are this
// design's own:
//     PL0  low voltage, core clock enabled every 4th cycle
//     PL1  mid voltage, every 2nd cycle
//     PL2  high voltage, every cycle
// Software writes {auto, pl[1:0]} (pl = 3 acts as PL2).  In automatic mode
// the level follows the number of pending events `load` of the PE:
// 0 -> PL0, below AUTO_THRESH -> PL1, otherwise PL2, so a core wakes up fast
// when work queues up.  `pl` changes on the cycle after the write or the
// load change; clk_en follows from then on.
module dvfs_ctrl #(
  parameter int unsigned LOAD_W      = 4,
  parameter int unsigned AUTO_THRESH = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              pl_we,
  input  logic [2:0]        pl_wdata,   // {auto, pl}
  input  logic [LOAD_W-1:0] load,
  output logic [1:0]        pl,
  output logic              auto_mode,
  output logic              clk_en
);
  logic [1:0] sw_pl;
  logic [1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sw_pl     <= 2'd2;
      auto_mode <= 1'b0;
    end else if (pl_we) begin
      sw_pl     <= (pl_wdata[1:0] == 2'd3) ? 2'd2 : pl_wdata[1:0];
      auto_mode <= pl_wdata[2];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pl  <= 2'd2;
      cnt <= '0;
    end else begin
      if (!auto_mode)                      pl <= sw_pl;
      else if (load == '0)                 pl <= 2'd0;
      else if (32'(load) < AUTO_THRESH)    pl <= 2'd1;
      else                                 pl <= 2'd2;
      cnt <= cnt + 1'b1;
    end
  end

  always_comb begin
    case (pl)
      2'd0:    clk_en = (cnt == 2'd3);
      2'd1:    clk_en = cnt[0];
      default: clk_en = 1'b1;
    endcase
  end
endmodule
