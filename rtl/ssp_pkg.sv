// ssp_pkg -- shared sizes and types of the ShadowScope+ monitoring hardware.
//
// A per-SM performance monitoring unit (PMU) counts eight selectable
// one-bit events per sampling window and emits one sample entry per window:
// a 32-bit timestamp plus eight 32-bit counter values (36 bytes of payload).
// The Validator sums the entries of all active PMUs per window and compares
// the sums with a golden model loaded from device memory.
//
// Sizes that follow the paper: 8 counters of 32 bits, 8-to-1 event
// selectors, 32-bit cycle counter/timestamp, 8-entry PMU output buffer,
// 4-entry golden-model fetch buffer, 8-bit active-SM count, 15 SMs.
// Own choices: the `last` flag that marks the kernel-end window travels with
// the entry (one bit beyond the 36-byte payload), 32-bit byte addresses,
// 8-bit kernel identifiers and the firmware register map below.
package ssp_pkg;

  localparam int unsigned NUM_CNTR       = 8;   // counters per PMU
  localparam int unsigned EVENTS_PER_MUX = 8;   // 8-to-1 event selectors
  localparam int unsigned SEL_W          = $clog2(EVENTS_PER_MUX);
  localparam int unsigned CNTR_W         = 32;  // counter / metric width
  localparam int unsigned TS_W           = 32;  // cycle counter / timestamp
  localparam int unsigned ACT_W          = 8;   // active-PMU count in the aggregation cache
  localparam int unsigned ADDR_W         = 32;  // device-memory byte address
  localparam int unsigned KID_W          = 8;   // kernel identifier
  localparam int unsigned ENTRY_BYTES    = (TS_W + NUM_CNTR*CNTR_W) / 8;  // 36

  typedef logic [CNTR_W-1:0] cntr_t;
  typedef logic [TS_W-1:0]   ts_t;
  typedef logic [ADDR_W-1:0] addr_t;

  // One sample entry: timestamp plus eight counter values. `last` marks the
  // window closed by the end of the kernel.
  typedef struct packed {
    logic                      last;
    ts_t                       ts;
    cntr_t [NUM_CNTR-1:0]      cntr;
  } sample_t;

  // Firmware-accessible PMU registers (word index on the configuration bus).
  typedef enum logic [3:0] {
    REG_EVSEL0   = 4'd0,   // 0..7: event select of counter 0..7 (low SEL_W bits)
    REG_PERIOD   = 4'd8,   // sampling-window length in cycles (0: kernel end only)
    REG_MODE     = 4'd9,   // bit 0: 1 = validation (to Validator), 0 = profiling (DMA)
    REG_RINGBASE = 4'd10,  // ring buffer base byte address in device memory
    REG_RINGSIZE = 4'd11   // ring buffer size in entries
  } pmu_reg_e;

  // Validator registers.
  typedef enum logic [3:0] {
    VREG_THRESH = 4'd0,    // deviation threshold, shared by all metrics
    VREG_ENABLE = 4'd1     // bit 0: validate launched kernels
  } val_reg_e;

  // Why the Validator stopped a kernel.
  typedef enum logic [1:0] {
    FAIL_NONE      = 2'd0,
    FAIL_DEVIATION = 2'd1,  // a metric distance exceeded the threshold
    FAIL_WINDOWS   = 2'd2   // window count differs from the golden model
  } fail_e;

endpackage
