// hc_pkg: types and constants shared by the hybrid SRAM/STT-RAM L1 data cache.
//
// The per-block bookkeeping fields (3-bit read- and write-intensity counters,
// 2-bit confidence state), the migration threshold of 7 and the array/memory
// latencies in clock cycles are the values of the evaluated configuration
// (16 KB data cache, 64-byte blocks, 2 SRAM + 2 STT-RAM ways, 4096-entry
// prediction table, 128 MB phase-change main memory). The event record that
// the controller emits every cycle is this design's own addition, so that a
// testbench or a performance monitor can count array writes, migrations and
// backup traffic.
package hc_pkg;

  // Per-block counter widths and the intensity threshold.
  localparam int unsigned CNT_W     = 3;
  localparam int unsigned CONF_W    = 2;
  localparam int unsigned THRESHOLD = 7;

  // Access latencies in cycles of the 2 ns core clock.
  localparam int unsigned SRAM_RD_LAT = 1;
  localparam int unsigned SRAM_WR_LAT = 2;
  localparam int unsigned STT_RD_LAT  = 2;
  localparam int unsigned STT_WR_LAT  = 10;
  localparam int unsigned PCM_RD_LAT  = 35;
  localparam int unsigned PCM_WR_LAT  = 100;

  // Block bookkeeping: read-intensive counter, write-intensive counter and
  // the confidence (importance) state.
  typedef struct packed {
    logic [CONF_W-1:0] conf;
    logic [CNT_W-1:0]  ric;
    logic [CNT_W-1:0]  wic;
  } meta_t;

  localparam meta_t META_ZERO = '{conf: '0, ric: '0, wic: '0};

  // Cache region. The encoding equals the prediction-table PR bit:
  // 1 = SRAM (write-intensive), 0 = STT-RAM (read-intensive).
  typedef enum logic {
    REG_STT  = 1'b0,
    REG_SRAM = 1'b1
  } region_e;

  // One-cycle event pulses from the controller.
  typedef struct packed {
    logic hit;            // request hit in either region
    logic miss;           // request missed in both regions
    logic sram_read;      // a block read from an SRAM way
    logic sram_write;     // a block or word written into an SRAM way
    logic stt_read;       // a block read from an STT-RAM way
    logic stt_write;      // a block or word written into an STT-RAM way
    logic mig_to_stt;     // read-intensive block moved SRAM -> STT-RAM
    logic mig_to_sram;    // write-intensive block moved STT-RAM -> SRAM
    logic conf_inc;       // a counter reached the threshold without migration
    logic replace;        // a valid block was evicted to make room
    logic pr_update;      // a prediction-table bit was written
    logic pcm_read;       // block fetched from main memory
    logic pcm_write;      // block written back to main memory
    logic bk_to_stt;      // backup: SRAM block saved into STT-RAM
    logic bk_to_pcm;      // backup: dirty block written to main memory
    logic bk_dropped;     // backup: clean SRAM block left to be lost
    logic bk_cycle;       // a cycle spent in the power-failure backup
  } cache_events_t;

endpackage
