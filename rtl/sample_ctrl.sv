// Sampling controller of the wRO-PUF.
//
// One sample of the device waveform ID is one EN pulse: EN goes from 0 to
// 1, every ring pair starts from 0 and RO2 clocks RO1 into the shift
// registers, then EN returns to 0 and the rings stop. The controller makes
// that pulse on request. A start pulse seen in SMP_IDLE raises en on the
// next clock edge and holds it for EN_CYCLES system clocks (default 2: a
// 32-bit piece needs 32 RO2 edges, about 32 ns at 1 GHz, which fits in two
// 20 ns clocks of a 50 MHz system). en then falls for SETTLE_CYCLES clocks,
// in which the rings stop and the output flip-flops register the frozen
// shift registers; after that id_valid goes high and stays high until the
// next start. busy is high from the edge that accepts start until id_valid
// rises. A start pulse while busy is ignored.
//
// Repeating EN=0/EN=1 is how the ID is sampled; the pulse length and the
// handshake are this design's choice.
//
// Latency: start at edge S gives en=1 after S to S+EN_CYCLES, and id_valid
// = 1 after edge S+EN_CYCLES+SETTLE_CYCLES.
module sample_ctrl
  import wro_pkg::*;
#(
  parameter int unsigned EN_CYCLES     = EN_CYCLES_DEF,
  parameter int unsigned SETTLE_CYCLES = SETTLE_CYCLES_DEF
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  output logic en,
  output logic busy,
  output logic id_valid
);
  localparam int unsigned CW = $clog2(EN_CYCLES + SETTLE_CYCLES + 1);

  smp_state_e      state;
  logic [CW-1:0]   cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= SMP_IDLE;
      cnt      <= '0;
      id_valid <= 1'b0;
    end else begin
      unique case (state)
        SMP_IDLE: if (start) begin
          state    <= SMP_RUN;
          cnt      <= CW'(EN_CYCLES - 1);
          id_valid <= 1'b0;
        end
        SMP_RUN: begin
          if (cnt == '0) begin
            state <= SMP_SETTLE;
            cnt   <= CW'(SETTLE_CYCLES - 1);
          end else begin
            cnt <= cnt - 1'b1;
          end
        end
        SMP_SETTLE: begin
          if (cnt == '0) begin
            state    <= SMP_IDLE;
            id_valid <= 1'b1;
          end else begin
            cnt <= cnt - 1'b1;
          end
        end
        default: state <= SMP_IDLE;
      endcase
    end
  end

  assign en   = (state == SMP_RUN);
  assign busy = (state != SMP_IDLE);

  initial assert (EN_CYCLES >= 1 && SETTLE_CYCLES >= 1)
    else $error("sample_ctrl: EN_CYCLES and SETTLE_CYCLES must be at least 1");

  // EN is never high while the result is flagged valid.
  a_en_not_valid: assert property (@(posedge clk) disable iff (!rst_n) !(en && id_valid));

endmodule
