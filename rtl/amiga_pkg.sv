// amiga_pkg: constants and types shared by the muon-counter digital-board FPGA.
//
// Sizes follow the muon-counter design: 64 channels sampled at 320 MHz, four
// samples per 80 MHz word (a 256-bit bus), events of 2048 samples, 2048
// events in an external RAM of 8 MWord x 32 bit, 24-bit LTS timestamps and a
// 32768 x 16-bit microcontroller window. The register map and the memory
// request/response structs are choices of this implementation.
package amiga_pkg;

  localparam int N_CH          = 64;     // scintillator channels
  localparam int SPW           = 4;      // 320 MHz samples per 80 MHz word
  localparam int BUS_W         = N_CH * SPW;            // 256
  localparam int EVENT_SAMPLES = 2048;   // samples per event
  localparam int EVENT_WORDS   = EVENT_SAMPLES / SPW;   // 512 x 256 bit
  localparam int EVENT_DWORDS  = EVENT_SAMPLES * N_CH / 32; // 4096 x 32 bit
  localparam int N_EVENTS      = 2048;   // events in the external RAM ring
  localparam int LTS_W         = 24;     // local timestamp width
  localparam int SRAM_AW       = 23;     // 8 MWord
  localparam int SRAM_DW       = 32;
  localparam int UC_AW         = 15;     // 32768 words
  localparam int UC_DW         = 16;
  localparam int POST_T1_DEF   = 1536;   // default post-T1 samples

  // One word transfer between a DMA client and the external RAM controller.
  typedef struct packed {
    logic                  req;    // hold high until gnt
    logic                  we;     // 1 = write
    logic [SRAM_AW-1:0]    addr;
    logic [SRAM_DW-1:0]    wdata;
  } mem_req_t;

  typedef struct packed {
    logic                  gnt;    // request accepted this cycle
    logic                  rvalid; // transfer finished (read data valid)
    logic [SRAM_DW-1:0]    rdata;
  } mem_rsp_t;

  // A frozen circular buffer waiting to be copied to external RAM.
  typedef struct packed {
    logic                  valid;
    logic                  buf_sel;   // which of the two circular buffers
    logic [8:0]            start;     // first (oldest) 256-bit word of the event
    logic [LTS_W-1:0]      lts;       // timestamp received with the T1
  } event_desc_t;

  // Microcontroller register map (16-bit word addresses).
  localparam logic [UC_AW-1:0] REG_CTRL     = 15'h0000; // execution bits (write 1)
  localparam logic [UC_AW-1:0] REG_STATUS   = 15'h0001;
  localparam logic [UC_AW-1:0] REG_POST_T1  = 15'h0002; // post-T1 samples
  localparam logic [UC_AW-1:0] REG_DELAY    = 15'h0003; // delay compensation, samples
  localparam logic [UC_AW-1:0] REG_T3_LTS_L = 15'h0004;
  localparam logic [UC_AW-1:0] REG_T3_LTS_H = 15'h0005;
  localparam logic [UC_AW-1:0] REG_T3_POS   = 15'h0006;
  localparam logic [UC_AW-1:0] REG_STORED   = 15'h0007; // events in external RAM
  localparam logic [UC_AW-1:0] REG_LAST_LTS_L = 15'h0008; // debug
  localparam logic [UC_AW-1:0] REG_LAST_LTS_H = 15'h0009; // debug
  localparam logic [UC_AW-1:0] REG_DROPPED  = 15'h000A; // debug: T1s lost
  localparam logic [UC_AW-1:0] REG_TEST     = 15'h000B; // bit 0: test pattern on
  localparam logic [UC_AW-1:0] REG_DAC_BASE = 15'h0010; // 80 entries
  localparam logic [UC_AW-1:0] REG_CAL_BASE = 15'h0100; // 64 x 2 words, low first
  localparam logic [UC_AW-1:0] REG_TIME_BASE= 15'h0180; // 4 words, low first
  localparam logic [UC_AW-1:0] T3_BUF_BASE  = 15'h4000; // 8192 words

  // Bits of REG_CTRL (write 1 to execute) and REG_STATUS.
  localparam int CTRL_DAC_START = 0;
  localparam int CTRL_CAL_LATCH = 1;
  localparam int CTRL_T3_START  = 2;
  localparam int CTRL_T3_ACK    = 3;  // clears the T3 done flag and interrupt
  localparam int ST_DAC_BUSY    = 0;
  localparam int ST_T3_BUSY     = 1;
  localparam int ST_T3_DONE     = 2;
  localparam int ST_T3_FOUND    = 3;
  localparam int ST_ACQUIRING   = 4;  // circular buffer being written
  localparam int ST_WB_BUSY     = 5;  // an event is being copied to external RAM

endpackage
