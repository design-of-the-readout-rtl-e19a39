// cal_ctrl: amplitude sequencer of the gain calibration (DAC of the calibration pulse).
//
// In gain calibration mode a step pulse whose height is set by a TLV5638 DAC is switched onto the
// VA140 calibration input; a 9k/1k divider on the hybrid reduces it tenfold and a 2 pF capacitor
// in the chip turns it into charge, Q = 0.1 * Vm * 2 pF. The sweep covers ten charges from
// 20 fC to 200 fC (design description), i.e. Vm = 0.1 V .. 1.0 V in 0.1 V steps. With a DAC full
// scale of VFS_MV millivolts (an assumption; 4096 mV gives 1 mV per code) step k (0..9) uses code
// (k+1) * 100 mV * 4096 / VFS_MV.
// Sequencing (this design's choice): entering calibration mode selects step 0; after EV_STEP
// calibration events (daq_done while in calibration mode) the next step is loaded, wrapping after
// the tenth. Leaving calibration mode writes code 0.
// DAC interface (TLV5638 data sheet): FS low frames a 16-bit word, MSB first, {4 control bits,
// 12 data bits}; the DAC takes data on SCLK falling edges. SCLK is clk/2; a write takes 35 clocks.
module cal_ctrl #(
  parameter int unsigned N_STEPS = 10,
  parameter int unsigned VFS_MV  = 4096,
  parameter int unsigned EV_STEP = 100,
  parameter logic [3:0]  DAC_CTRL = 4'b1100    // write DAC A, fast mode (data sheet)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cal_mode,
  input  logic        daq_done,
  output logic        dac_fs_n,
  output logic        dac_sclk,
  output logic        dac_din,
  output logic [3:0]  step,
  output logic [11:0] code,
  output logic        dac_busy
);
  localparam int unsigned CODE_STEP = (100 * 4096) / VFS_MV;

  logic        mode_q, pend;
  logic [15:0] ev;
  logic [15:0] sh;
  logic [5:0]  cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode_q <= 1'b0; pend <= 1'b1; ev <= '0; step <= '0; code <= '0; sh <= '0; cnt <= '0;
      dac_busy <= 1'b0; dac_fs_n <= 1'b1; dac_sclk <= 1'b1; dac_din <= 1'b0;
    end else begin
      mode_q <= cal_mode;
      if (cal_mode && !mode_q) begin
        step <= '0; ev <= '0; code <= 12'(CODE_STEP); pend <= 1'b1;
      end else if (!cal_mode && mode_q) begin
        code <= '0; pend <= 1'b1;
      end else if (cal_mode && daq_done) begin
        if (ev == 16'(EV_STEP - 1)) begin
          ev <= '0; pend <= 1'b1;
          if (step == 4'(N_STEPS - 1)) begin step <= '0; code <= 12'(CODE_STEP); end
          else begin step <= step + 1'b1; code <= 12'((step + 2) * CODE_STEP); end
        end else ev <= ev + 1'b1;
      end
      // serial writer
      if (!dac_busy) begin
        if (pend && !(cal_mode ^ mode_q)) begin
          pend <= 1'b0; dac_busy <= 1'b1; sh <= {DAC_CTRL, code}; cnt <= '0; dac_fs_n <= 1'b0;
          dac_din <= DAC_CTRL[3];
        end
      end else begin
        cnt <= cnt + 1'b1;
        if (cnt <= 6'd31) dac_sclk <= cnt[0];        // falls at even counts, data moves after
        if (cnt[0] && cnt <= 6'd29) begin
          sh <= sh << 1; dac_din <= sh[14];
        end
        if (cnt == 6'd32) dac_fs_n <= 1'b1;
        if (cnt == 6'd34) dac_busy <= 1'b0;
      end
    end
  end
endmodule
