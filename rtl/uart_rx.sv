// uart_rx: receiver of the UART configuration port.
//
// Standard asynchronous serial, 8 data bits, LSB first, no parity, one stop
// bit (8N1), idle high. The line is synchronised with two flip-flops. A
// falling edge starts a frame; the start bit is re-checked at its middle
// (CLKS_PER_BIT/2 cycles later) so that a glitch does not start a frame, and
// each data bit and the stop bit are then sampled CLKS_PER_BIT cycles apart,
// in their middles. A frame whose stop bit is low is dropped and `frame_err`
// pulses instead of `valid`.
//
// Interface: `valid` pulses for one cycle with `data` holding the byte, at
// the middle of the stop bit. Default CLKS_PER_BIT = 434 gives 115200 baud
// from the 50 MHz clock.
//
// The published description only says that the parameters are set over a
// UART port; the frame format and baud rate are this design's choice.
module uart_rx #(
  parameter int unsigned CLKS_PER_BIT = 434
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       rxd,
  output logic [7:0] data,
  output logic       valid,
  output logic       frame_err
);

  localparam int unsigned CW = $clog2(CLKS_PER_BIT + 1);

  typedef enum logic [1:0] {RX_IDLE, RX_START, RX_DATA, RX_STOP} rx_state_e;

  rx_state_e     st_q;
  logic [1:0]    sync_q;
  logic [CW-1:0] cnt_q;
  logic [2:0]    bit_q;
  logic [7:0]    shift_q;
  logic          rx;

  assign rx = sync_q[1];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sync_q    <= 2'b11;
      st_q      <= RX_IDLE;
      cnt_q     <= '0;
      bit_q     <= '0;
      shift_q   <= '0;
      data      <= '0;
      valid     <= 1'b0;
      frame_err <= 1'b0;
    end else begin
      sync_q    <= {sync_q[0], rxd};
      valid     <= 1'b0;
      frame_err <= 1'b0;
      unique case (st_q)
        RX_IDLE: begin
          if (!rx) begin
            st_q  <= RX_START;
            cnt_q <= CW'(CLKS_PER_BIT / 2);
          end
        end
        RX_START: begin
          if (cnt_q != '0) begin
            cnt_q <= cnt_q - CW'(1);
          end else if (!rx) begin
            st_q  <= RX_DATA;
            cnt_q <= CW'(CLKS_PER_BIT - 1);
            bit_q <= '0;
          end else begin
            st_q <= RX_IDLE;         // glitch, not a start bit
          end
        end
        RX_DATA: begin
          if (cnt_q != '0) begin
            cnt_q <= cnt_q - CW'(1);
          end else begin
            shift_q <= {rx, shift_q[7:1]};
            cnt_q   <= CW'(CLKS_PER_BIT - 1);
            if (bit_q == 3'd7) st_q <= RX_STOP;
            bit_q <= bit_q + 3'd1;
          end
        end
        RX_STOP: begin
          if (cnt_q != '0) begin
            cnt_q <= cnt_q - CW'(1);
          end else begin
            st_q <= RX_IDLE;
            if (rx) begin
              data  <= shift_q;
              valid <= 1'b1;
            end else begin
              frame_err <= 1'b1;
            end
          end
        end
        default: st_q <= RX_IDLE;
      endcase
    end
  end

endmodule
