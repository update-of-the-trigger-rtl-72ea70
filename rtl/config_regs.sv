// config_regs: register file of the trigger algorithm's parameters.
//
// The thresholds and wait times of the trigger algorithm are set at run time
// over the UART port. Commands arrive as bytes from uart_rx. One write
// command is four bytes: a register address (see trig_pkg, REG_*) followed
// by a 24-bit value, most significant byte first. When the fourth byte
// arrives the register is written and `wr_done` pulses for one cycle; an
// address outside the map is ignored (`wr_done` stays low). If more than
// TIMEOUT cycles pass between two bytes of a command the partial command is
// discarded, so a lost byte cannot shift all following commands.
//
// Values wider than a field are truncated to the field (12-bit thresholds and
// amplitudes, 16-bit peak count). Reset loads trig_pkg::CFG_DEFAULT.
//
// The published description says only that parameters such as the peak-wait
// time, trigger-wait time and thresholds are configurable through the UART
// port; the command format, register map and timeout are this design's.
module config_regs
  import trig_pkg::*;
#(
  parameter int unsigned TIMEOUT = 1_000_000   // 20 ms at 50 MHz
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [7:0] rx_data,
  input  logic       rx_valid,
  output trig_cfg_t  cfg,
  output logic       wr_done
);

  localparam int unsigned TW = $clog2(TIMEOUT + 1);

  logic [1:0]    nbytes_q;     // bytes of the current command received
  logic [7:0]    addr_q;
  logic [15:0]   hi_q;         // first two value bytes
  logic [TW-1:0] idle_q;
  logic [23:0]   value;

  assign value = {hi_q, rx_data};

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cfg      <= CFG_DEFAULT;
      nbytes_q <= '0;
      addr_q   <= '0;
      hi_q     <= '0;
      idle_q   <= '0;
      wr_done  <= 1'b0;
    end else begin
      wr_done <= 1'b0;
      if (rx_valid) begin
        idle_q <= '0;
        unique case (nbytes_q)
          2'd0: addr_q     <= rx_data;
          2'd1: hi_q[15:8] <= rx_data;
          2'd2: hi_q[7:0]  <= rx_data;
          2'd3: begin
            wr_done <= (addr_q < 8'(NUM_REGS));
            unique case (addr_q)
              REG_THRESHOLD: cfg.threshold <= value[SAMPLE_W-1:0];
              REG_NPEAK_MIN: cfg.npeak_min <= value[CNT_W-1:0];
              REG_TOT_MIN:   cfg.tot_min   <= value;
              REG_AMP_MIN:   cfg.amp_min   <= value[SAMPLE_W-1:0];
              REG_PEAK_WAIT: cfg.peak_wait <= value;
              REG_TRIG_WAIT: cfg.trig_wait <= value;
              REG_LARGE_AMP: cfg.large_amp <= value[SAMPLE_W-1:0];
              REG_AP_QUIET:  cfg.ap_quiet  <= value;
              REG_DIS_TOT:   cfg.dis_tot   <= value;
              REG_DIS_GAP:   cfg.dis_gap   <= value;
              REG_DIS_VETO:  cfg.dis_veto  <= value;
              default: ;
            endcase
          end
          default: ;
        endcase
        nbytes_q <= nbytes_q + 2'd1;
      end else if (nbytes_q != '0) begin
        if (idle_q >= TW'(TIMEOUT)) begin
          nbytes_q <= '0;
          idle_q   <= '0;
        end else begin
          idle_q <= idle_q + TW'(1);
        end
      end
    end
  end

endmodule
