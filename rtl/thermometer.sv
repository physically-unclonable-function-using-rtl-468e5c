// Ring-oscillator thermometer of the wRO-PUF (RO3 with two counters).
//
// A ring's frequency falls roughly linearly as temperature rises, so the
// number of cycles a third ring, RO3, makes in a fixed time tells the
// temperature near the PUF rings. This block measures it with the two
// counters of the thermometer schematic: a WIN_BITS-bit (12-bit) counter on
// the system clock times a window of 2**WIN_BITS clocks, and a CNT_BITS-bit
// (16-bit) counter counts the rising edges of RO3 during that window. The
// final count is the temperature ID (Output1), to be stored next to the PUF
// ID and compared with later readings.
//
// Sequence (this design's choice): a measurement starts on the first clock
// after reset and on every start pulse seen while not busy. Leaving
// THM_IDLE raises ro_clr, the RO3 counter's asynchronous clear, for one
// clock (THM_CLEAR) while RO3 is stopped; the clear is a pulse rather than
// a level held through reset so that it always has a rising edge; THM_WINDOW enables RO3 (ro3_en=1) for
// exactly 2**WIN_BITS clocks, the window counter running from 0 until it
// wraps; THM_SETTLE waits 2 clocks with RO3 stopped so that the counter,
// which runs on RO3's own clock, is at rest; the count is then copied into
// temp_id on the system clock and temp_valid rises. Gating RO3 with the
// window means no clock-domain crossing happens while the counter moves.
// The RO3 counter saturates at all ones rather than wrapping (also this
// design's choice), and sets temp_ovf when it does.
//
// Ports: clk, rst_n (asynchronous, active low), start, ro3 (RO3 output),
// ro3_en (RO3 enable), temp_id, temp_ovf, temp_valid, busy.
// Latency: temp_valid rises 2**WIN_BITS + 3 clocks after the edge that
// accepts start.
module thermometer
  import wro_pkg::*;
#(
  parameter int unsigned WIN_BITS = WIN_BITS_DEF,
  parameter int unsigned CNT_BITS = CNT_BITS_DEF
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic                ro3,
  output logic                ro3_en,
  output logic [CNT_BITS-1:0] temp_id,
  output logic                temp_ovf,
  output logic                temp_valid,
  output logic                busy
);
  thm_state_e          state;
  logic [WIN_BITS-1:0] win_cnt;     // 12-bit window counter (system clock)
  logic                settle_cnt;
  logic                ro_clr;      // clears the RO3 counter (pulse)
  logic                auto_go;     // measurement pending after reset
  logic [CNT_BITS-1:0] ro_cnt;      // 16-bit RO3 counter (RO3 clock)

  // ---- system-clock side -------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= THM_IDLE;
      auto_go    <= 1'b1;
      win_cnt    <= '0;
      settle_cnt <= 1'b0;
      ro_clr     <= 1'b0;
      temp_id    <= '0;
      temp_ovf   <= 1'b0;
      temp_valid <= 1'b0;
    end else begin
      unique case (state)
        THM_CLEAR: begin
          ro_clr     <= 1'b0;
          win_cnt    <= '0;
          temp_valid <= 1'b0;
          state      <= THM_WINDOW;
        end
        THM_WINDOW: begin
          win_cnt <= win_cnt + 1'b1;
          if (win_cnt == '1) begin
            state      <= THM_SETTLE;
            settle_cnt <= 1'b0;
          end
        end
        THM_SETTLE: begin
          settle_cnt <= 1'b1;
          if (settle_cnt) begin
            temp_id    <= ro_cnt;
            temp_ovf   <= (ro_cnt == '1);
            temp_valid <= 1'b1;
            state      <= THM_IDLE;
          end
        end
        THM_IDLE: if (start || auto_go) begin
          auto_go    <= 1'b0;
          ro_clr     <= 1'b1;
          temp_valid <= 1'b0;
          state      <= THM_CLEAR;
        end
        default: state <= THM_IDLE;
      endcase
    end
  end

  assign ro3_en = (state == THM_WINDOW);
  assign busy   = (state != THM_IDLE) || auto_go;

  // ---- RO3 side: 16-bit event counter clocked by the ring ----------------
  always_ff @(posedge ro3 or posedge ro_clr) begin
    if (ro_clr)            ro_cnt <= '0;
    else if (ro_cnt != '1) ro_cnt <= ro_cnt + 1'b1;
  end

endmodule
