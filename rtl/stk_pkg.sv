// stk_pkg: constants and types shared by the Tracker Readout Board (TRB) logic.
//
// The TRB reads 24 front-end hybrids (ladders) through 48 serial ADCs; each ADC digitises one
// sub-part of three cascaded 64-channel VA140 chips (192 strips). The numbers of ADCs, strips,
// the 20 MHz clock, the 115200 baud command link, the 2000-byte per-trigger limit, the 1024-event
// pedestal average and the four working modes follow the published design. The command codes,
// the packet sync word and the mode encoding are this design's own choices.
package stk_pkg;

  localparam int unsigned CLK_HZ       = 20_000_000;  // 20 MHz board clock
  localparam int unsigned BAUD         = 115_200;     // command/state UART
  localparam int unsigned N_SADC       = 24;          // serial ADCs per FPGA
  localparam int unsigned N_STRIP      = 192;         // strips per sub-part (3 x VA140)
  localparam int unsigned VA_CH        = 64;          // channels per VA140
  localparam int unsigned ADC_W        = 12;          // AD7476 resolution
  localparam int unsigned PED_LOG2     = 10;          // 1024-event pedestal average
  localparam int unsigned MAX_FRAME    = 2000;        // bytes per trigger accepted by the PDHU
  localparam int unsigned N_SEL_GRP    = 8;           // 6 VA140 groups + 2 SADC groups
  localparam int unsigned N_HV_GRP     = 2;           // HV generator groups per TRB

  localparam logic [7:0] SYNC0 = 8'hEB;
  localparam logic [7:0] SYNC1 = 8'h90;
  localparam logic [ADC_W-1:0] BAD_THR = '1;          // threshold marking a masked channel

  // Working modes (Table 1 of the design description).
  typedef enum logic [1:0] {
    MODE_RAW = 2'd0,   // raw data, no compression
    MODE_CAL = 2'd1,   // gain calibration: raw data with injected charge
    MODE_PED = 2'd2,   // pedestal update, 1024-event average
    MODE_CMP = 2'd3    // data compression (normal science mode)
  } mode_e;

  // Commands carried on the RS422 command/state bus.
  typedef enum logic [7:0] {
    CMD_SET_MODE = 8'h01,  // arg[1:0] = mode
    CMD_HV       = 8'h02,  // arg[1:0] group 0 {B,A}, arg[3:2] group 1 {B,A}
    CMD_SEL_THR  = 8'h03,  // arg[15:12] group, arg[11:0] current threshold
    CMD_THR_ADDR = 8'h04,  // arg = channel pointer for CMD_THR_DATA
    CMD_THR_DATA = 8'h05,  // arg[11:0] = threshold, pointer then increments
    CMD_EE_STORE = 8'h06,  // copy all thresholds to the EEPROM
    CMD_EE_LOAD  = 8'h07,  // reload all thresholds from the EEPROM
    CMD_HK_POLL  = 8'h08,  // reply with the house-keeping packet
    CMD_BUS_SEL  = 8'h09   // arg[0] trigger, arg[1] command, arg[2] science: 1 = backup bus
  } cmd_e;

  // One received command.
  typedef struct packed {
    cmd_e        cmd;
    logic [15:0] arg;
  } command_t;

endpackage
