// dcim_pkg -- constants and types shared by the DCIM Ising annealer.
//
// The default problem size is a 1066-variable QUBO embedded, together with one
// pinned-one variable, into a 1067 x 1067 coupling matrix of 8-bit signed
// words (about 9.11 Mb of SRAM). The VDDM operating point of the weight array
// is carried as a 4-bit code: code k stands for 0.30 V + k * 0.05 V, so the
// 13 codes 0..12 cover 0.30 V .. 0.90 V, the range over which the bitcell
// pseudo-read error rate was characterised. The annealing run is described by
// a configuration struct that the host writes before starting.
package dcim_pkg;

  // Matrix order including the pinned-one variable, and coupling word width.
  localparam int unsigned N_DEFAULT    = 1067;
  localparam int unsigned BITS_DEFAULT = 8;

  // VDDM operating-point code: 0.30 V + code * 50 mV.
  localparam int unsigned VDDM_CODES   = 13;
  localparam int unsigned VDDM_W       = 4;
  typedef logic [VDDM_W-1:0] vddm_code_t;

  function automatic int unsigned vddm_millivolts(vddm_code_t code);
    return 300 + 50 * int'(code);
  endfunction

  // Run configuration, written by the host before start.
  typedef struct packed {
    logic [15:0] n_sweeps;        // iterations: full scans over all free variables
    logic [15:0] pr_interval;     // pseudo-read before every pr_interval-th update; 0 = never
    logic [15:0] refresh_sweeps;  // restore nominal weights after every k-th sweep; 0 = never
    logic [15:0] vddm_hold;       // sweeps spent at each VDDM code
    vddm_code_t  vddm_start;      // first (lowest) VDDM code of the sweep
    vddm_code_t  vddm_end;        // last (highest) VDDM code of the sweep
  } anneal_cfg_t;

  // Controller states, in the order of the annealing flow chart.
  typedef enum logic [2:0] {
    ST_IDLE    = 3'd0,
    ST_LOAD    = 3'd1,  // weights load
    ST_PREAD   = 3'd2,  // pseudo-read (noise injection)
    ST_UPDATE  = 3'd3,  // Hamiltonian update over the bit-slices, then spin update
    ST_REFRESH = 3'd4,  // periodic weight refresh
    ST_DONE    = 3'd5   // spins output
  } ctrl_state_t;

endpackage
