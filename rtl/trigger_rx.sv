// trigger_rx: receiver of the global event trigger from the PDHU.
//
// The trigger arrives on an RS422 line that is active on its falling edge, with a redundant
// backup line; bus_sel picks which line is listened to (0 = main, 1 = backup), as the design
// description gives a backup for every bus. The chosen line is synchronised with two flip-flops,
// and a falling edge counts only if the line then stays low for MIN_LOW clocks, which rejects
// glitches. A trigger that arrives while busy (the dead time of the previous event) is not
// accepted and is counted as lost. The glitch filter and the counters are this design's choice.
// Timing: trig pulses for one clock MIN_LOW+2 clocks after the falling edge at the pin.
module trigger_rx #(
  parameter int unsigned MIN_LOW = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        trig_a_n,   // main trigger line, idle high
  input  logic        trig_b_n,   // backup trigger line, idle high
  input  logic        bus_sel,
  input  logic        busy,
  output logic        trig,       // accepted trigger, one clock
  output logic [15:0] trig_cnt,   // accepted triggers
  output logic [15:0] lost_cnt    // triggers that arrived while busy
);
  logic [1:0] sync_a, sync_b;
  logic       line, armed;
  logic [$clog2(MIN_LOW+1)-1:0] low_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync_a <= '1; sync_b <= '1;
    end else begin
      sync_a <= {sync_a[0], trig_a_n};
      sync_b <= {sync_b[0], trig_b_n};
    end
  end
  assign line = bus_sel ? sync_b[1] : sync_a[1];

  // armed is set while the line is high; a low period of MIN_LOW clocks after that fires once.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      armed <= 1'b0; low_cnt <= '0; trig <= 1'b0; trig_cnt <= '0; lost_cnt <= '0;
    end else begin
      trig <= 1'b0;
      if (line) begin
        armed   <= 1'b1;
        low_cnt <= '0;
      end else if (armed) begin
        if (low_cnt == MIN_LOW - 1) begin
          armed <= 1'b0;
          if (busy) lost_cnt <= lost_cnt + 1'b1;
          else begin
            trig     <= 1'b1;
            trig_cnt <= trig_cnt + 1'b1;
          end
        end else low_cnt <= low_cnt + 1'b1;
      end
    end
  end
endmodule
