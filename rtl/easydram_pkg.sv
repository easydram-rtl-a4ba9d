// easydram_pkg: types, sizes and the register map shared by the EasyDRAM tile.
//
// The tile sits between the last-level cache of an emulated processor and a
// real DDR4 device. A software memory controller running on a small
// programmable core moves requests out of hardware FIFOs, builds batches of
// DRAM commands with explicit delays, lets a command sequencer ("DRAM Bender")
// play each batch against DRAM, and writes tagged responses back. Time scaling
// counters stall the emulated processor so that the slow software controller
// looks, to the processor, like a fast hardware one.
//
// From the evaluated system: DDR4 with 4 bank groups x 4 banks (16 banks) and
// 32K rows per bank. Everything else here is this design's own choice: a
// 64-byte cache line, a 64-bit core data bus, a 64-bit bus beat, 64-bit time
// scaling counters, 16-bit command delays, and the register map below.
package easydram_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned LINE_BITS      = 512;  // one cache line, 64 B
  localparam int unsigned WORD_BITS      = 64;   // programmable core data word
  localparam int unsigned WORDS_PER_LINE = LINE_BITS / WORD_BITS;
  localparam int unsigned BEAT_BITS      = 64;   // memory bus beat
  localparam int unsigned BEATS_PER_LINE = LINE_BITS / BEAT_BITS;
  localparam int unsigned PADDR_BITS     = 32;   // physical address from the LLC
  localparam int unsigned SRC_BITS       = 4;    // bus transaction id
  localparam int unsigned CNT_BITS       = 64;   // time scaling counters
  localparam int unsigned BANK_BITS      = 4;    // 4 bank groups x 4 banks
  localparam int unsigned ROW_BITS       = 15;   // 32K rows
  localparam int unsigned COL_BITS       = 10;   // 1K columns
  localparam int unsigned DELAY_BITS     = 16;   // cycles until next command
  localparam int unsigned MMIO_ADDR_BITS = 32;

  typedef logic [CNT_BITS-1:0]  cnt_t;
  typedef logic [LINE_BITS-1:0] line_t;
  typedef logic [WORD_BITS-1:0] word_t;

  // ---------------------------------------------------------------- DRAM commands
  typedef enum logic [2:0] {
    DDR_NOP  = 3'd0,
    DDR_ACT  = 3'd1,
    DDR_PRE  = 3'd2,
    DDR_RD   = 3'd3,
    DDR_WR   = 3'd4,
    DDR_REF  = 3'd5,
    DDR_PREA = 3'd6
  } ddr_cmd_e;

  // One entry of the command buffer: a DRAM command and the number of DRAM
  // Bender cycles to wait before the next command of the batch is issued.
  typedef struct packed {
    logic [DELAY_BITS-1:0] delay;
    logic [COL_BITS-1:0]   col;
    logic [ROW_BITS-1:0]   row;
    logic [BANK_BITS-1:0]  bank;
    ddr_cmd_e              cmd;
  } bender_cmd_t;

  localparam int unsigned BENDER_CMD_BITS = $bits(bender_cmd_t);

  // ---------------------------------------------------------------- memory requests
  // A main memory request as held in the Incoming Req FIFO. tag is the
  // processor cycle counter value at the moment the request arrived.
  typedef struct packed {
    cnt_t                  tag;
    logic [SRC_BITS-1:0]   source;
    logic                  write;
    logic [PADDR_BITS-1:0] addr;
    line_t                 data;
  } mem_req_t;

  // A response as held in the Outgoing Req FIFO. tag is the processor cycle
  // counter value from which on the processor may see the response.
  typedef struct packed {
    cnt_t                tag;
    logic [SRC_BITS-1:0] source;
    logic                write;   // 1: write acknowledge, no data
    line_t               data;
  } mem_resp_t;

  // ---------------------------------------------------------------- core bus
  // Programmable core data port: one request per cycle, always accepted,
  // read data returned exactly one cycle after a read request.
  typedef struct packed {
    logic                      valid;
    logic                      write;
    logic [MMIO_ADDR_BITS-1:0] addr;
    word_t                     wdata;
  } mmio_req_t;

  typedef struct packed {
    logic  valid;
    word_t rdata;
  } mmio_rsp_t;

  // ---------------------------------------------------------------- address map
  // Region is addr[31:28]; inside a region, addr[11:3] selects a 64-bit register.
  localparam int unsigned REGION_SPM = 0;  // scratchpad memory
  localparam int unsigned REGION_TCL = 1;  // tile control logic
  localparam int unsigned REGION_REQBUF = 2;  // incoming / outgoing req FIFOs
  localparam int unsigned REGION_CMDBUF = 3;  // command buffer
  localparam int unsigned REGION_RDBUF = 4;  // readback buffer
  localparam int unsigned REGION_BENDER = 5;  // DRAM Bender control
  localparam int unsigned NUM_REGIONS  = 6;

  // Tile control logic registers (byte offsets)
  localparam logic [11:0] TCL_CRITICAL   = 12'h000; // rw bit0: critical mode
  localparam logic [11:0] TCL_TS_ENABLE  = 12'h008; // rw bit0: time scaling on
  localparam logic [11:0] TCL_MC_ADVANCE = 12'h010; // w : add to MC cycle counter
  localparam logic [11:0] TCL_PROC_CNT   = 12'h018; // r : processor cycle counter
  localparam logic [11:0] TCL_MC_CNT     = 12'h020; // r : memory controller cycle counter
  localparam logic [11:0] TCL_GLOBAL_CNT = 12'h028; // r : global cycle counter
  localparam logic [11:0] TCL_REQ_COUNT  = 12'h030; // r : requests accepted so far
  localparam logic [11:0] TCL_RESP_COUNT = 12'h038; // r : responses delivered so far

  // Request / response buffer registers
  localparam logic [11:0] RB_IN_STATUS  = 12'h000; // r : bit0 non-empty, [23:8] count
  localparam logic [11:0] RB_IN_ADDR    = 12'h008; // r : head address
  localparam logic [11:0] RB_IN_INFO    = 12'h010; // r : bit0 write, [11:8] source
  localparam logic [11:0] RB_IN_TAG     = 12'h018; // r : head arrival tag
  localparam logic [11:0] RB_IN_POP     = 12'h020; // w : drop head
  localparam logic [11:0] RB_IN_DATA    = 12'h040; // r : 8 words of head write data
  localparam logic [11:0] RB_OUT_STATUS = 12'h100; // r : bit0 full, [23:8] count
  localparam logic [11:0] RB_OUT_INFO   = 12'h108; // w : bit0 write-ack, [11:8] source
  localparam logic [11:0] RB_OUT_TAG    = 12'h110; // w : release tag
  localparam logic [11:0] RB_OUT_PUSH   = 12'h118; // w : push staged response
  localparam logic [11:0] RB_OUT_DATA   = 12'h140; // w : 8 words of response data
  localparam logic [11:0] RB_OUT_PUSH_RD = 12'h120; // w : push staged response with the
                                                    //     readback buffer's head line as data

  // Command buffer registers
  localparam logic [11:0] CB_CMD        = 12'h000; // w : push one bender_cmd_t
  localparam logic [11:0] CB_STATUS     = 12'h008; // r : [15:0] commands, [31:16] lines
  localparam logic [11:0] CB_WDATA_PUSH = 12'h010; // w : push staged write line
  localparam logic [11:0] CB_WDATA      = 12'h040; // w : 8 words of write data
  localparam logic [11:0] CB_WDATA_REQ  = 12'h018; // w : push the Incoming Req FIFO head's
                                                    //     line as write data

  // Readback buffer registers
  localparam logic [11:0] RD_STATUS     = 12'h000; // r : [15:0] lines held
  localparam logic [11:0] RD_POP        = 12'h008; // w : drop head line
  localparam logic [11:0] RD_DATA       = 12'h040; // r : 8 words of head line

  // DRAM Bender control registers
  localparam logic [11:0] DB_START      = 12'h000; // w : execute the batch (flush)
  localparam logic [11:0] DB_STATUS     = 12'h008; // r : bit0 busy
  localparam logic [11:0] DB_CYCLES     = 12'h010; // r : cycles taken by last batch
  localparam logic [11:0] DB_ISSUED     = 12'h018; // r : commands issued by last batch

endpackage
