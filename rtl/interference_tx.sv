// interference_tx -- selective interference burst control (the TX block).
//
// A one-clock `trigger` (the rule checker's DROP interrupt) starts a burst:
//   INIT  : INIT_CYCLES clocks with tx_en high and zero samples, the time the TX
//           chain needs to start (T/R switch, up-converter pipeline); the
//           waveform generator is restarted at its start.
//   BURST : JAM_CYCLES clocks in which the waveform generator's samples are
//           passed to the DAC interface (tx_valid/tx_i/tx_q);
//   then tx_en falls and the receiver has the channel again.
// A trigger during a burst is not queued: it is counted on `ignored`.
// Defaults at a 100 MHz clock: INIT_CYCLES = 300 (t_init = 3 us, paper's measured
// upper value) and JAM_CYCLES = 2600 (t_interfere = 26 us, the paper's minimum
// duration that reliably destroys a frame). The burst thus ends
// (INIT_CYCLES + JAM_CYCLES + 1) clocks after the trigger.
// The paper gives t_init and t_interfere; using t_init as a fixed settling
// window and dropping retriggers are this design's choices.
module interference_tx
  import guardian_pkg::*;
#(
  parameter int INIT_CYCLES = 300,
  parameter int JAM_CYCLES  = 2600
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    trigger,
  input  logic    wave_valid,
  input  sample_t wave_i,
  input  sample_t wave_q,
  output logic    gen_start,     // restart the waveform generator
  output logic    tx_en,
  output logic    jamming,       // interference samples on the air
  output logic    tx_valid,
  output sample_t tx_i,
  output sample_t tx_q,
  output logic    burst_done,    // pulse at the end of a burst
  output logic    ignored        // pulse: trigger while busy
);

  typedef enum logic [1:0] {T_IDLE, T_INIT, T_BURST} tstate_e;
  tstate_e state;
  localparam int CW = $clog2(INIT_CYCLES + JAM_CYCLES + 2);
  logic [CW-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= T_IDLE;
      cnt        <= '0;
      gen_start  <= 1'b0;
      burst_done <= 1'b0;
      ignored    <= 1'b0;
    end else begin
      gen_start  <= 1'b0;
      burst_done <= 1'b0;
      ignored    <= 1'b0;
      unique case (state)
        T_IDLE: if (trigger) begin
          gen_start <= 1'b1;
          if (INIT_CYCLES > 0) begin
            state <= T_INIT;
            cnt   <= CW'(INIT_CYCLES - 1);
          end else begin
            state <= T_BURST;
            cnt   <= CW'(JAM_CYCLES - 1);
          end
        end
        T_INIT: begin
          if (trigger) ignored <= 1'b1;
          if (cnt == '0) begin
            state <= T_BURST;
            cnt   <= CW'(JAM_CYCLES - 1);
          end else cnt <= cnt - 1'b1;
        end
        T_BURST: begin
          if (trigger) ignored <= 1'b1;
          if (cnt == '0) begin
            state      <= T_IDLE;
            burst_done <= 1'b1;
          end else cnt <= cnt - 1'b1;
        end
        default: state <= T_IDLE;
      endcase
    end
  end

  assign tx_en    = (state != T_IDLE);
  assign jamming  = (state == T_BURST);
  assign tx_valid = tx_en && wave_valid;
  assign tx_i     = jamming ? wave_i : '0;
  assign tx_q     = jamming ? wave_q : '0;

endmodule
