// diasys_pkg: types and constants shared by the diagnosis system.
//
// The diagnosis NoC is a 16-bit unidirectional ring; every packet is a
// sequence of flits with a `last` marker on the final one. The first three
// flits form the header:
//   flit 0 : [15:14] packet class, [13:8] zero, [7:0] destination address
//   flit 1 : source address (bits 7:0)
//   flit 2 : event type identifier (events) or register address (config)
// The 16-bit width is the paper's; the header layout, the register map and
// the CPU trace bundle are this design's own choices.
package diasys_pkg;

  localparam int unsigned FLIT_W = 16;
  localparam int unsigned ADDR_W = 8;

  typedef struct packed {
    logic              last;
    logic [FLIT_W-1:0] data;
  } flit_t;

  typedef enum logic [1:0] {
    PKT_EVENT     = 2'd0,
    PKT_REG_READ  = 2'd1,
    PKT_REG_WRITE = 2'd2,
    PKT_REG_RESP  = 2'd3
  } pkt_class_e;

  function automatic logic [FLIT_W-1:0] hdr_flit(pkt_class_e cls, logic [ADDR_W-1:0] dest);
    return {cls, 6'b0, dest};
  endfunction

  // State of the observed CPU as seen by an event generator, one entry per
  // cycle: the executed instruction and the register-file writeback port.
  typedef struct packed {
    logic        valid;     // an instruction was executed this cycle
    logic [31:0] pc;        // its program counter
    logic [31:0] insn;      // its instruction word
    logic        wb_en;     // register writeback this cycle
    logic [4:0]  wb_reg;    // writeback register index
    logic [31:0] wb_data;   // writeback value
  } cpu_trace_t;

  // OR1K conventions used by the event generator
  localparam logic [5:0] OR1K_OP_SW = 6'h35;  // l.sw I(rA), rB
  localparam int unsigned OR1K_SP   = 1;      // stack pointer R1
  localparam int unsigned OR1K_LR   = 9;      // link register R9

  // Module type identifiers returned by configuration register 0
  localparam logic [15:0] MODTYPE_EG = 16'h0001;
  localparam logic [15:0] MODTYPE_DP = 16'h0002;
  localparam logic [15:0] MOD_VERSION = 16'h0001;

  // Event generator register map (16-bit registers)
  localparam logic [15:0] EGREG_MODTYPE  = 16'h0000;
  localparam logic [15:0] EGREG_VERSION  = 16'h0001;
  localparam logic [15:0] EGREG_DEST     = 16'h0002;  // event destination
  localparam logic [15:0] EGREG_DROPPED  = 16'h0003;  // events lost to overload
  localparam logic [15:0] EGREG_RASOVF   = 16'h0004;  // return stack overflows
  localparam logic [15:0] EGREG_TRIGBASE = 16'h0100;  // + 4*i + {CTRL,PCLO,PCHI,PAYLOAD}

  // Maximum payload words per event (GPR words + stack words)
  localparam int unsigned MAX_GPR_WORDS   = 7;
  localparam int unsigned MAX_STACK_WORDS = 7;
  localparam int unsigned MAX_WORDS       = MAX_GPR_WORDS + MAX_STACK_WORDS;

  // Per-trigger payload selection
  typedef struct packed {
    logic [2:0] stk_cnt;    // [10:8] number of stack words copied (offsets 0,4,..)
    logic [2:0] gpr_cnt;    // [7:5]  number of registers copied
    logic [4:0] gpr_first;  // [4:0]  first register copied
  } payload_cfg_t;

  typedef struct packed {
    logic [15:0]                 etype;
    logic [31:0]                 tstamp;
    logic [3:0]                  nwords;
    logic [MAX_WORDS-1:0][31:0]  words;   // words[0] is sent first
  } snapshot_t;

  // Wishbone (classic, 32-bit)
  typedef struct packed {
    logic        cyc;
    logic        stb;
    logic        we;
    logic [31:0] adr;
    logic [31:0] dat;
    logic [3:0]  sel;
  } wb_m2s_t;

  typedef struct packed {
    logic        ack;
    logic [31:0] dat;
  } wb_s2m_t;

  // Diagnosis processor network adapter registers (byte offsets)
  localparam logic [3:0] NAREG_RUNQ     = 4'h0;  // read: next event address, 0 if none
  localparam logic [3:0] NAREG_DISCARDQ = 4'h4;  // write: event address to free
  localparam logic [3:0] NAREG_TX       = 4'h8;  // write: {last, flit}
  localparam logic [3:0] NAREG_STATUS   = 4'hC;  // read: {dropped, free slots}

endpackage
