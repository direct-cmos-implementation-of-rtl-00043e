// tnn_pkg: constants and types shared by the temporal-neural-network column.
//
// Spike times are unary: a spike is a pulse PULSE_W aclk cycles wide and its
// value is the aclk cycle on which the pulse begins, counted from the start of
// the gamma wave. Synaptic weights are 3-bit (0..W_MAX), as in the paper.
// The Bernoulli random bits (BRVs) needed by STDP come from outside the column
// (the paper leaves the LFSR network out of its hardware); brv_t bundles them.
package tnn_pkg;

  localparam int unsigned W_BITS  = 3;              // weight width (paper: 3-bit)
  localparam int unsigned W_MAX   = (1 << W_BITS) - 1;  // 7
  localparam int unsigned PULSE_W = 1 << W_BITS;    // 8-cycle spike pulse

  typedef logic [W_BITS-1:0] weight_t;

  // Bernoulli random bits for one STDP update. Each bit is 1 with the
  // probability named in the comment; the column uses them as given.
  typedef struct packed {
    logic       capture;  // B(mu_capture), case 1
    logic       minus;    // B(mu_minus), case 2 (the table labels it mu_backoff)
    logic       search;   // B(mu_search), case 3
    logic       backoff;  // B(mu_backoff), case 4
    logic       min;      // B(mu_min), floor of the stabiliser
    logic [5:0] stab;     // stab[k] = B(F(k+1)), F(w) = (w/7)(1-w/7), w = 1..6
  } brv_t;

endpackage
