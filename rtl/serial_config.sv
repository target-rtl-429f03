// serial_config: serial-to-parallel configuration interface.
//
// The chip's operating parameters are loaded serially. While `sen` is high, one bit of `sin`
// is shifted in, MSB first, on each rising edge of `sclk`. When `sen` falls, the last
// CFG_ADDR_W + CFG_DATA_W bits are taken as {address, data}, and the addressed field of the
// configuration record `cfg` is updated on that edge. Unknown addresses are ignored.
// Reset loads CFG_RESET. `cfg` is registered in the sclk domain. The other clock domains use
// it as a quasi-static setting, to be changed only while the affected function is idle.
// A serial-parallel interface is what the published chip uses. The frame format and the
// register map (target_pkg) are this model's own.
module serial_config
  import target_pkg::*;
(
  input  logic sclk,
  input  logic rst_n,
  input  logic sen,
  input  logic sin,
  output cfg_t cfg
);

  localparam int FRAME_W = CFG_ADDR_W + CFG_DATA_W;

  logic [FRAME_W-1:0] shreg;
  logic               sen_d;

  wire [CFG_ADDR_W-1:0] addr = shreg[FRAME_W-1 -: CFG_ADDR_W];
  wire [CFG_DATA_W-1:0] data = shreg[CFG_DATA_W-1:0];

  always_ff @(posedge sclk or negedge rst_n) begin
    if (!rst_n) begin
      shreg <= '0;
      sen_d <= 1'b0;
      cfg   <= CFG_RESET;
    end else begin
      sen_d <= sen;
      if (sen) shreg <= {shreg[FRAME_W-2:0], sin};
      if (sen_d && !sen) begin
        if (addr < CFG_TRIG_WID0)
          cfg.trig_thr[addr[1:0]] <= data;
        else if (addr < CFG_RAMP_STEP)
          cfg.trig_width[addr[1:0]] <= data;
        else begin
          case (addr)
            CFG_RAMP_STEP:  cfg.ramp_step  <= data;
            CFG_CNT_DELAY:  cfg.cnt_delay  <= data;
            CFG_MON_WINDOW: cfg.mon_window <= data;
            CFG_CTRL: begin
              cfg.sample_en    <= data[0];
              cfg.done_stop_en <= data[1];
              cfg.trig_en      <= data[2];
            end
            default: ;
          endcase
        end
      end
    end
  end

endmodule
