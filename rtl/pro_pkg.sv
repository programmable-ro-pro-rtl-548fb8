// pro_pkg: types, constants and helpers shared by the Programmable Ring
// Oscillator (PRO) sensor network.
//
// The ring geometry (six delay cells of 4, 4, 8, 8, 16 and 16 inverters plus
// one leading inverter), the 36-sensor array of 9 rows by 4 columns, the
// 24 MHz system clock and the 2 ms frequency-change interval follow the
// published design. The counter width, the UART command set and the
// configuration byte layout are this implementation's own choices.
package pro_pkg;
  timeunit 1ns; timeprecision 1ps;

  // Delay cells per ring and SEL bits (one SEL bit per delay cell).
  localparam int unsigned SEL_W   = 6;
  // PRO and reference counter width.
  localparam int unsigned COUNT_W = 32;

  // Per-PRO user configuration, packed into one UART byte:
  // bit 7 rand_en (SEL taken from the on-chip PRNG), bit 6 en, bits 5:0 sel.
  typedef struct packed {
    logic              rand_en;
    logic              en;
    logic [SEL_W-1:0]  sel;
  } pro_cfg_t;

  // Command bytes understood by the PRO UART controller.
  typedef enum logic [7:0] {
    CMD_CFG        = 8'h01, // idx, cfg byte       (idx 8'hFF: every PRO)
    CMD_START      = 8'h02, // clear and start all counters (free running)
    CMD_STOP       = 8'h03, // stop all counters
    CMD_READ       = 8'h04, // idx -> 4 bytes, MSB first (idx 8'hFF: reference)
    CMD_MON        = 8'h05, // byte: bit0 auto monitoring, bit1 characterise
    CMD_INTERVAL   = 8'h06, // 4 bytes, monitoring interval in clock cycles
    CMD_TOL        = 8'h07, // 4 bytes, alarm tolerance in counts
    CMD_RAND_PER   = 8'h08, // 4 bytes, PRNG SEL change period in clock cycles
    CMD_READ_ALARM = 8'h09, // -> high-alarm bytes then low-alarm bytes
    CMD_CLR_ALARM  = 8'h0A, // clear sticky alarms
    CMD_PAD        = 8'h0B  // idx of the PRO that drives the output pad
  } pro_cmd_e;

  localparam logic [7:0] IDX_ALL = 8'hFF;

  function automatic logic [COUNT_W-1:0] bin2gray(input logic [COUNT_W-1:0] b);
    return b ^ (b >> 1);
  endfunction

  function automatic logic [COUNT_W-1:0] gray2bin(input logic [COUNT_W-1:0] g);
    logic [COUNT_W-1:0] b;
    b[COUNT_W-1] = g[COUNT_W-1];
    for (int i = COUNT_W - 2; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction
endpackage
