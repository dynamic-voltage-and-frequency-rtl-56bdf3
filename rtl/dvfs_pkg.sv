// dvfs_pkg: types and constants shared by the two voltage/frequency scaling
// controllers (D2VFS and FBTC).
//
// Analog quantities (capacitor voltage, regulator output, divider taps) are
// carried as unsigned millivolt codes of type mv_t. This is a modelling choice
// of this RTL: on the real boards these are analog nodes.
//
// The four performance windows are those of an MSP430-G2553-class MCU:
// 1 MHz at 1.8 V, 8 MHz at 2.2 V, 12 MHz at 2.8 V and 16 MHz at 3.3 V, each
// running at the lowest supply its frequency allows. Window index 0 is the
// slowest. The regulator voltage select code (four VSEL pins of a TPS62740
// buck regulator) is (Vreg - 1.8 V) / 100 mV, so all ones selects 3.3 V; that
// encoding is the regulator's, not something the controllers define.
package dvfs_pkg;

  localparam int unsigned MV_W = 13;          // up to 8191 mV
  typedef logic [MV_W-1:0] mv_t;

  localparam int unsigned N_WIN = 4;
  typedef logic [N_WIN-1:0] thermo_t;         // one bit per window lower bound
  typedef logic [1:0]       win_idx_t;        // 0 = 1 MHz ... 3 = 16 MHz

  // Lower bound of each window = regulated supply used inside it.
  localparam int unsigned WIN_VMIN_MV [N_WIN] = '{1800, 2200, 2800, 3300};
  localparam int unsigned WIN_FREQ_MHZ[N_WIN] = '{1, 8, 12, 16};
  localparam int unsigned VCAP_MAX_MV = 3600;  // top of the 16 MHz window

  // Regulator voltage select.
  localparam int unsigned VSEL_W       = 4;
  localparam int unsigned VSEL_BASE_MV = 1800;
  localparam int unsigned VSEL_STEP_MV = 100;
  typedef logic [VSEL_W-1:0] vsel_t;

  function automatic vsel_t vsel_of_mv(int unsigned mv);
    return vsel_t'((mv - VSEL_BASE_MV) / VSEL_STEP_MV);
  endfunction

  function automatic int unsigned mv_of_vsel(vsel_t v);
    return VSEL_BASE_MV + VSEL_STEP_MV * int'(v);
  endfunction

  // Highest window whose lower bound a thermometer code reports; 0 if none.
  function automatic win_idx_t win_of_thermo(thermo_t t);
    win_idx_t w = '0;
    for (int i = 0; i < N_WIN; i++)
      if (t[i]) w = win_idx_t'(i);
    return w;
  endfunction

endpackage
