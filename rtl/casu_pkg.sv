// casu_pkg: types and the default memory map shared by the CASU hardware.
//
// The CASU hardware sits beside a 16-bit MSP430-class core with a 64 KB
// byte-addressed space. It never drives the bus; it only observes a handful of
// core and DMA signals (bundled here in mcu_obs_t) and answers with one reset
// line. All region bounds are inclusive byte addresses, [min, max].
//
// The regions themselves (TCR, ER, EP, bEP, SF, IVTR, ATR) are the paper's;
// the numeric addresses are this design's own choice, since no addresses are
// published. They follow the usual MSP430 layout: the interrupt vector table in
// the top 32 bytes with the reset vector at 0xFFFE, an 8 KB flash program
// memory below it, and the trusted ROM and key placed where VRASED-style
// designs put them.
package casu_pkg;

  localparam int unsigned ADDR_W = 16;  // MSP430 address width (about 64 KB)
  localparam int unsigned DATA_W = 16;  // MSP430 word width

  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [DATA_W-1:0] data_t;

  // Inclusive address range.
  typedef struct packed {
    addr_t min;
    addr_t max;
  } region_t;

  // Everything CASU observes of the MCU in one cycle. pc, wen, daddr, dma_en
  // and dma_addr are the signals the paper names; ren, irq and the write data
  // are needed by the TCR guard and the EP register.
  typedef struct packed {
    addr_t pc;        // address of the instruction being executed
    logic  wen;       // core writes memory this cycle
    logic  ren;       // core reads memory this cycle
    addr_t daddr;     // address of the core's data access
    data_t wdata;     // core write data (word)
    logic  dma_en;    // DMA active this cycle
    logic  dma_we;    // DMA access is a write
    addr_t dma_addr;  // address of the DMA access
    data_t dma_wdata; // DMA write data (word)
    logic  irq;       // an interrupt is being taken this cycle
  } mcu_obs_t;

  // Monitor FSM states (the paper's FSM figure).
  typedef enum logic {
    ST_RESET = 1'b0,
    ST_EXEC  = 1'b1
  } mon_state_t;

  // ---- default memory map (byte addresses, inclusive) ----
  // Trusted Code Region: ROM holding the update software; casu_entry at TCR_MIN.
  localparam addr_t TCR_MIN_DEF  = 16'hA000;
  localparam addr_t TCR_MAX_DEF  = 16'hDFFF;
  // Secret key region read only by the trusted code.
  localparam addr_t KEY_MIN_DEF  = 16'h6A00;
  localparam addr_t KEY_MAX_DEF  = 16'h6A3F;
  // Attestation token / acknowledgement buffer in RAM (32 bytes).
  localparam addr_t ATR_MIN_DEF  = 16'h03E0;
  localparam addr_t ATR_MAX_DEF  = 16'h03FF;
  // Flash program memory, 8 KB: two 4 KB software slots plus the reserved words.
  localparam addr_t PMEM_MIN_DEF = 16'hE000;
  localparam addr_t PMEM_MAX_DEF = 16'hFFFF;
  // Executable Pointer: ERmin word at EP_MIN, ERmax word at EP_MIN+2 (4 bytes).
  localparam addr_t EP_MIN_DEF   = 16'hFFC0;
  localparam addr_t EP_MAX_DEF   = 16'hFFC3;
  // Buffer Executable Pointer: bounds of the downloaded software (4 bytes).
  localparam addr_t BEP_MIN_DEF  = 16'hFFC4;
  localparam addr_t BEP_MAX_DEF  = 16'hFFC7;
  // Status flag (1 byte).
  localparam addr_t SF_MIN_DEF   = 16'hFFC8;
  localparam addr_t SF_MAX_DEF   = 16'hFFC8;
  // Interrupt vector table region, reset vector at 0xFFFE.
  localparam addr_t IVTR_MIN_DEF = 16'hFFE0;
  localparam addr_t IVTR_MAX_DEF = 16'hFFFF;
  // Executable region installed at manufacture: the first 4 KB flash slot.
  localparam addr_t ER_MIN_INIT  = 16'hE000;
  localparam addr_t ER_MAX_INIT  = 16'hEFFF;
  // PC value the core shows while held in reset (the FSM figure: "PC = 0").
  localparam addr_t RESET_PC     = 16'h0000;

  function automatic logic in_region(addr_t a, addr_t lo, addr_t hi);
    return (a >= lo) && (a <= hi);
  endfunction

endpackage
