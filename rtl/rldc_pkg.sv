// rldc_pkg: constants and types shared by the RLDRAM controller (RLDC).
//
// The controller turns processor memory requests into RLDRAM3 READ/WRITE
// commands and issues them predictably: round-robin among the processors,
// each command held back only by the RLDRAM timing constraints.
//
// The timing defaults are the RLDRAM3-1600 numbers the design is built
// around (1.5 ns controller clock): tRC = 6, tRL = 13, tWL = 14, burst
// length 8 (BL/2 = 4 bus cycles). Four processing elements is the
// evaluated system size. The bank count (16) and address width (20) are
// those of an RLDRAM3 x36 device; they are this design's choice.
//
// The command is carried as the device's control pins {CS#, WE#, REF#}:
// READ = L,H,H; WRITE = L,L,H; NOP = CS# high. Refresh is not generated.
package rldc_pkg;

  // ---- default sizes -----------------------------------------------------
  localparam int unsigned DEF_NUM_PE     = 4;   // processing elements
  localparam int unsigned DEF_NUM_BANKS  = 16;  // RLDRAM3 banks
  localparam int unsigned DEF_ADDR_W     = 20;  // RLDRAM3 x36 address pins
  localparam int unsigned DEF_BUF_DEPTH  = 4;   // entries per PE buffer

  // ---- RLDRAM3-1600 timing, in controller clock cycles --------------------
  localparam int unsigned DEF_T_RC = 6;   // command to command, same bank
  localparam int unsigned DEF_T_RL = 13;  // READ to start of data
  localparam int unsigned DEF_T_WL = 14;  // WRITE to start of data
  localparam int unsigned DEF_BL   = 8;   // burst length (BL/2 bus cycles)

  // ---- request operation type --------------------------------------------
  typedef enum logic {
    OP_READ  = 1'b0,
    OP_WRITE = 1'b1
  } op_e;

  // ---- RLDRAM command, as the device's control pins ----------------------
  typedef struct packed {
    logic cs_n;
    logic we_n;
    logic ref_n;
  } rld_cmd_t;

  localparam rld_cmd_t CMD_NOP   = '{cs_n: 1'b1, we_n: 1'b1, ref_n: 1'b1};
  localparam rld_cmd_t CMD_READ  = '{cs_n: 1'b0, we_n: 1'b1, ref_n: 1'b1};
  localparam rld_cmd_t CMD_WRITE = '{cs_n: 1'b0, we_n: 1'b0, ref_n: 1'b1};

  function automatic logic cmd_is_write(rld_cmd_t c);
    return (c.cs_n == 1'b0) && (c.we_n == 1'b0) && (c.ref_n == 1'b1);
  endfunction

  // ---- minimum command-to-command spacing on the shared data bus ---------
  // same type: BL/2; READ then WRITE: tRL - tWL + BL/2; WRITE then READ:
  // tWL - tRL + BL/2. Computed as signed integers, floored at 1.
  function automatic int unsigned bus_gap(int unsigned t_rl, int unsigned t_wl,
                                          int unsigned bl, logic prev_wr,
                                          logic next_wr);
    int g;
    if (prev_wr == next_wr)      g = int'(bl / 2);
    else if (!prev_wr)           g = int'(t_rl) - int'(t_wl) + int'(bl / 2);
    else                         g = int'(t_wl) - int'(t_rl) + int'(bl / 2);
    if (g < 1) g = 1;
    return int'(g);
  endfunction

endpackage
