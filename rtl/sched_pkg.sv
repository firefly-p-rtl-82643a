// sched_pkg: phase encoding reported by the scheduler.
//   PH_IDLE     waiting for start
//   PH_CLEAR    zeroing weights, traces and potentials
//   PH_PROLOGUE first forward pass of layer 1, nothing to update yet
//   PH_MAIN     steady state: layer-1 update with layer-2 forward (phase A),
//               layer-2 update with the next layer-1 forward (phase B)
//   PH_EPILOGUE every forward pass is done; the last updates (layer-2, and
//               layer-1 when it is still running) finish
package sched_pkg;
  typedef enum logic [2:0] {PH_IDLE, PH_CLEAR, PH_PROLOGUE, PH_MAIN, PH_EPILOGUE} phase_t;
endpackage
