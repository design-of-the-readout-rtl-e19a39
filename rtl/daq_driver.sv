// daq_driver: VA140 readout sequencer and serial-ADC conversion control (DAQ_Driver).
//
// All VA140 chains of the TRB are read out at the same time: each sub-part is three cascaded
// VA140 chips (192 strips) whose multiplexed analog output feeds one AD7476 serial ADC, and the
// FPGA drives the VA140 signals CKB, HOLDB, DRESET, SHIFT_IN and TEST_ON and the shared ADC
// chip-select and clock. Those signal names, the 192-strip chain and the one-ADC-per-sub-part
// structure follow the design description. The sequence and its timing are this design's own:
//   trigger -> (calibration mode only: TEST_ON and the calibration switch on, wait HOLD_DLY)
//           -> HOLDB low (hold the shaped charges) -> SHIFT_IN high with one CKB low pulse,
//              which selects strip 0
//           -> per strip: wait SETTLE clocks, convert (CS low, 16 SCLK periods of 2 clocks),
//              then one CKB low pulse to the next strip
//           -> after strip 191: DRESET pulse, HOLDB, TEST_ON and the switch released, done.
// Polarities assumed: HOLDB and CKB active low, DRESET and SHIFT_IN active high. SCLK idles
// high; the ADC shifts a bit out after each falling edge, so bit_en marks the clock at which
// SCLK falls and the receiver takes the bit still on the line. word_done marks the end of a
// 16-bit word. One strip takes SETTLE + 34 + 2*CK_W clocks (about 2.9 us at 20 MHz with the
// defaults, 0.56 ms for 192 strips).
module daq_driver #(
  parameter int unsigned N_STRIP  = 192,
  parameter int unsigned SETTLE   = 20,    // analog settling after CKB, clocks
  parameter int unsigned CK_W     = 2,     // CKB low and high time, clocks
  parameter int unsigned HOLD_DLY = 120    // calibration pulse to hold delay, clocks
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,       // accepted trigger
  input  logic       cal_mode,    // gain calibration mode
  output logic       busy,
  output logic       done,        // one clock at the end of the readout
  // VA140 driver signals (before level shifting)
  output logic       va_ckb,
  output logic       va_holdb,
  output logic       va_dreset,
  output logic       va_shift_in,
  output logic       va_test_on,
  output logic       cal_sw,      // ADG201 switch of the calibration pulse generator
  // AD7476 control, fanned out to all ADCs
  output logic       adc_cs_n,
  output logic       adc_sclk,
  output logic       bit_en,      // take the bit on the ADC data lines at this clock
  output logic       word_done,   // the 16-bit word is complete
  output logic [7:0] strip        // strip being converted
);
  typedef enum logic [2:0] {IDLE, CALW, HOLD, CKLO, CKHI, SETL, CONV, ENDR} state_e;
  state_e state;
  logic [15:0] cnt;

  assign busy      = (state != IDLE);
  assign bit_en    = (state == CONV) && cnt[0] && (cnt <= 16'd31);
  assign word_done = (state == CONV) && (cnt == 16'd33);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE; cnt <= '0; strip <= '0; done <= 1'b0;
      va_ckb <= 1'b1; va_holdb <= 1'b1; va_dreset <= 1'b0; va_shift_in <= 1'b0;
      va_test_on <= 1'b0; cal_sw <= 1'b0; adc_cs_n <= 1'b1; adc_sclk <= 1'b1;
    end else begin
      done <= 1'b0;
      unique case (state)
        IDLE: if (start) begin
          strip <= '0; cnt <= '0;
          if (cal_mode) begin
            va_test_on <= 1'b1; cal_sw <= 1'b1; state <= CALW;
          end else begin
            va_holdb <= 1'b0; state <= HOLD;
          end
        end
        CALW: if (cnt == 16'(HOLD_DLY - 1)) begin
          cnt <= '0; va_holdb <= 1'b0; state <= HOLD;
        end else cnt <= cnt + 1'b1;
        HOLD: begin                      // one clock after HOLDB fell: select strip 0
          va_shift_in <= 1'b1; va_ckb <= 1'b0; cnt <= '0; state <= CKLO;
        end
        CKLO: if (cnt == 16'(CK_W - 1)) begin
          va_ckb <= 1'b1; cnt <= '0; state <= CKHI;
        end else cnt <= cnt + 1'b1;
        CKHI: if (cnt == 16'(CK_W - 1)) begin
          va_shift_in <= 1'b0; cnt <= '0; state <= SETL;
        end else cnt <= cnt + 1'b1;
        SETL: if (cnt == 16'(SETTLE - 1)) begin
          cnt <= '0; adc_cs_n <= 1'b0; state <= CONV;
        end else cnt <= cnt + 1'b1;
        CONV: begin
          cnt <= cnt + 1'b1;
          if (cnt <= 16'd32) adc_sclk <= ~cnt[0];   // falls on odd counts, rises on even
          if (cnt == 16'd32) adc_cs_n <= 1'b1;
          if (cnt == 16'd33) begin
            cnt <= '0;
            if (strip == 8'(N_STRIP - 1)) begin
              va_dreset <= 1'b1; state <= ENDR;
            end else begin
              strip <= strip + 1'b1; va_ckb <= 1'b0; state <= CKLO;
            end
          end
        end
        ENDR: if (cnt == 16'(CK_W - 1)) begin
          va_dreset <= 1'b0; va_holdb <= 1'b1; va_test_on <= 1'b0; cal_sw <= 1'b0;
          cnt <= '0; state <= IDLE; done <= 1'b1;
        end else cnt <= cnt + 1'b1;
        default: state <= IDLE;
      endcase
    end
  end
endmodule
