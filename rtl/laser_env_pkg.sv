// laser_env_pkg: simulation-only environment state for the behavioural delay
// models. heat_ps is the extra propagation delay, in picoseconds, that local
// heating by a probing laser adds to the fabric route and LUT on the sensor's
// data path; jitter_ps is the peak-to-peak random jitter of that route. A
// testbench writes them; synthesizable blocks never read them.
package laser_env_pkg;
  int unsigned heat_ps   = 0;
  int unsigned jitter_ps = 150;
endpackage
