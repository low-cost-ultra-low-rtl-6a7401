// vanguard_pkg: constants and types shared by the DAC module control logic.
//
// The FPGA on the module drives two 16-channel, 16-bit DAC81416 converters over
// their 4-wire serial interface. Every access to a DAC81416 is one 24-bit frame,
// sent MSB first while the chip select is low:
//   bit 23      R/W (0 = write)
//   bit 22      don't care (sent as 0)
//   bits 21:16  register address
//   bits 15:0   register data
// The register addresses and the configuration words below come from the
// converter's data sheet, not from the module description; the module
// description only says that the controller powers on all channels, selects
// the output range and the internal reference and chooses single-ended output.
//
// The host talks to the FPGA over a UART. One host command is four bytes,
// a layout chosen for this design (the host software's format is not published):
//   byte 0  header: bits 7:4 = 4'hA (frame marker), bit 1 = preload, bit 0 = DAC index
//   byte 1  register address (bits 5:0)
//   byte 2  data bits 15:8
//   byte 3  data bits 7:0
// After each command the FPGA answers one byte: ACK if the command was taken,
// NAK if the trigger buffer of that DAC was full.
package vanguard_pkg;

  localparam int unsigned DAC_COUNT = 2;   // DAC_0 and DAC_1 on the board
  localparam int unsigned CODE_W    = 16;  // DAC code width
  localparam int unsigned ADDR_W    = 6;   // DAC81416 register address width
  localparam int unsigned FRAME_W   = 24;  // DAC81416 serial frame length

  // DAC81416 register map (data sheet)
  localparam logic [ADDR_W-1:0] REG_SPICONFIG = 6'h03;
  localparam logic [ADDR_W-1:0] REG_GENCONFIG = 6'h04;
  localparam logic [ADDR_W-1:0] REG_DACPWDWN  = 6'h09;
  localparam logic [ADDR_W-1:0] REG_DACRANGE0 = 6'h0A;  // four range registers, 4 channels each
  localparam logic [ADDR_W-1:0] REG_DAC0      = 6'h10;  // DAC0..DAC15 at 0x10..0x1F

  // Configuration words (data sheet)
  localparam logic [CODE_W-1:0] SPICONFIG_ON  = 16'h0A84; // DEV-PWDWN cleared, otherwise reset value
  localparam logic [CODE_W-1:0] GENCONFIG_REF = 16'h3F00; // internal 2.5 V reference enabled
  localparam logic [CODE_W-1:0] DACPWDWN_ALL  = 16'h0000; // all 16 channels powered on
  localparam logic [CODE_W-1:0] RANGE_PM10V   = 16'hAAAA; // +/-10 V on the four channels of a range register

  localparam int unsigned INIT_LEN = 7;   // number of configuration writes after reset

  // Host protocol
  localparam logic [3:0] HDR_MARK = 4'hA;
  localparam logic [7:0] ACK_BYTE = 8'h06;
  localparam logic [7:0] NAK_BYTE = 8'h15;

  // One register write for a DAC
  typedef struct packed {
    logic [ADDR_W-1:0] addr;
    logic [CODE_W-1:0] data;
  } reg_write_t;

  // One decoded host command
  typedef struct packed {
    logic       preload;  // 1: hold until the external trigger, 0: write now
    logic       dac;      // DAC index
    reg_write_t wr;
  } host_cmd_t;

  // Write frame for a register write
  function automatic logic [FRAME_W-1:0] write_frame(reg_write_t w);
    return {1'b0, 1'b0, w.addr, w.data};
  endfunction

  // Configuration sequence sent to each DAC after reset
  function automatic reg_write_t init_write(int unsigned idx);
    reg_write_t w;
    unique case (idx)
      0: w = '{addr: REG_SPICONFIG,       data: SPICONFIG_ON};
      1: w = '{addr: REG_GENCONFIG,       data: GENCONFIG_REF};
      2: w = '{addr: REG_DACPWDWN,        data: DACPWDWN_ALL};
      3: w = '{addr: REG_DACRANGE0,       data: RANGE_PM10V};
      4: w = '{addr: REG_DACRANGE0 + 6'd1, data: RANGE_PM10V};
      5: w = '{addr: REG_DACRANGE0 + 6'd2, data: RANGE_PM10V};
      default: w = '{addr: REG_DACRANGE0 + 6'd3, data: RANGE_PM10V};
    endcase
    return w;
  endfunction

endpackage
