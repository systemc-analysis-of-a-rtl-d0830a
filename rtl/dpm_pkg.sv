// dpm_pkg: types, encodings and shared functions of the dynamic power
// management (DPM) logic.
//
// The classes follow the coded inputs of the Local Energy Manager: task
// priority in four classes (Low, Medium, High, Very high), battery status in
// five classes (Empty, Low, Medium, High, Full) plus an external power supply
// code, and chip temperature in three classes (Low, Medium, High).  The power
// states are the ACPI-style set of the Power State Machine: four execution
// states ON1..ON4 of decreasing speed and supply voltage, four sleep states
// SL1..SL4 of increasing depth, and soft off.
//
// The numeric codes are this design's choice.  select_state() is the power
// state selection rule table of the LEM, evaluated top row first; the
// combinations the table does not cover (battery Medium, High or Full at
// Medium temperature) fall to ON4, the state the table gives for medium
// temperature on a weak battery.
package dpm_pkg;

  typedef enum logic [1:0] {
    PRIO_L = 2'd0,
    PRIO_M = 2'd1,
    PRIO_H = 2'd2,
    PRIO_V = 2'd3
  } prio_t;

  typedef enum logic [2:0] {
    BAT_E  = 3'd0,
    BAT_L  = 3'd1,
    BAT_M  = 3'd2,
    BAT_H  = 3'd3,
    BAT_F  = 3'd4,
    BAT_PS = 3'd5   // running from an external power supply
  } bat_t;

  typedef enum logic [1:0] {
    TEMP_L = 2'd0,
    TEMP_M = 2'd1,
    TEMP_H = 2'd2
  } temp_t;

  typedef enum logic [3:0] {
    PS_ON1 = 4'd0,
    PS_ON2 = 4'd1,
    PS_ON3 = 4'd2,
    PS_ON4 = 4'd3,
    PS_SL1 = 4'd4,
    PS_SL2 = 4'd5,
    PS_SL3 = 4'd6,
    PS_SL4 = 4'd7,
    PS_OFF = 4'd8
  } pstate_t;

  function automatic logic is_on(pstate_t s);
    return s <= PS_ON4;
  endfunction

  // Power state selection rules, first matching row wins.
  function automatic pstate_t select_state(prio_t p, bat_t b, temp_t t);
    if (p == PRIO_V && b == BAT_E)                              return PS_ON4;
    if (p == PRIO_V && t == TEMP_H)                             return PS_ON4;
    if (p != PRIO_V && b == BAT_E)                              return PS_SL1;
    if (p != PRIO_V && t == TEMP_H)                             return PS_SL1;
    if (b == BAT_L && (t == TEMP_M || t == TEMP_L))             return PS_ON4;
    if (b == BAT_E && t == TEMP_M)                              return PS_ON4;
    if (p == PRIO_V && (b == BAT_M || b == BAT_H) && t == TEMP_L) return PS_ON1;
    if (p == PRIO_H && (b == BAT_M || b == BAT_H) && t == TEMP_L) return PS_ON2;
    if (p == PRIO_M && (b == BAT_M || b == BAT_H) && t == TEMP_L) return PS_ON3;
    if (p == PRIO_L && (b == BAT_M || b == BAT_H) && t == TEMP_L) return PS_ON4;
    if (p != PRIO_L && b == BAT_F && t == TEMP_L)               return PS_ON1;
    if (p == PRIO_L && b == BAT_F && t == TEMP_L)               return PS_ON2;
    if (b == BAT_PS && (t == TEMP_M || t == TEMP_L))            return PS_ON1;
    return PS_ON4;
  endfunction

endpackage
