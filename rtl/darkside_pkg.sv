// Shared types and constants of the Darkside cluster model.
//
// The cluster L1 (TCDM) is 128 kB split into 32 word-interleaved banks of
// 4 kB; byte address bits [6:2] select the bank and bits [16:7] the word in
// the bank. Every initiator uses a request/grant handshake: a request is
// accepted in the cycle its grant is high, and the response (read data, also
// signalled for writes) comes back with r_valid one cycle later. These
// numbers (32 banks, 4 kB, 288-bit HWPE port, 9 logarithmic ports shown as
// PORT0..PORT9) follow the paper; the address layout, the handshake details
// and the register maps are this implementation's choices.
package darkside_pkg;

  localparam int unsigned N_CORES      = 8;     // RVNN cores
  localparam int unsigned N_BANKS      = 32;    // TCDM banks
  localparam int unsigned BANK_WORDS   = 1024;  // 4 kB / 4 B
  localparam int unsigned BANK_AW      = $clog2(BANK_WORDS);
  localparam int unsigned HWPE_WORDS   = 9;     // 288-bit shallow port
  localparam int unsigned HWPE_DW      = 32 * HWPE_WORDS;
  localparam int unsigned N_LOG_PORTS  = N_CORES + 2;  // cores, DataMover, DMA
  localparam int unsigned PORT_DMOV    = N_CORES;
  localparam int unsigned PORT_DMA     = N_CORES + 1;

  // 32-bit initiator request on the logarithmic branch
  typedef struct packed {
    logic        req;
    logic        we;
    logic [31:0] addr;   // byte address, word aligned
    logic [3:0]  be;
    logic [31:0] wdata;
  } tcdm_req_t;

  typedef struct packed {
    logic        r_valid;
    logic [31:0] r_data;
  } tcdm_rsp_t;

  // 288-bit wide request of the HWPE (shallow) port
  typedef struct packed {
    logic                  req;
    logic                  we;
    logic [31:0]           addr;  // byte address, word aligned
    logic [HWPE_WORDS*4-1:0] be;
    logic [HWPE_DW-1:0]    wdata;
  } hwpe_req_t;

  typedef struct packed {
    logic               r_valid;
    logic [HWPE_DW-1:0] r_data;
  } hwpe_rsp_t;

  // request as seen by one bank
  typedef struct packed {
    logic               req;
    logic               we;
    logic [BANK_AW-1:0] addr;   // word address inside the bank
    logic [3:0]         be;
    logic [31:0]        wdata;
  } bank_req_t;

  // control (peripheral) port: memory-mapped register access, single cycle
  typedef struct packed {
    logic        req;
    logic        we;
    logic [15:0] addr;   // [15:12] target, [11:0] byte offset
    logic [31:0] wdata;
  } periph_req_t;

  typedef struct packed {
    logic        r_valid;
    logic [31:0] r_data;
  } periph_rsp_t;

  // HWPE register-file layout shared by the three accelerators:
  // 0x00 TRIGGER (write starts a job), 0x04 STATUS (bit0 busy),
  // 0x08 + 4*i job register i
  localparam logic [15:0] HWPE_REG_TRIGGER = 16'h000;
  localparam logic [15:0] HWPE_REG_STATUS  = 16'h004;
  localparam logic [15:0] HWPE_REG_JOB0    = 16'h008;
  localparam int unsigned HWPE_N_JOB_REGS  = 8;

  // RVNN SIMD precision encoding held in the A-/W-PRECISION CSR fields
  typedef enum logic [1:0] {
    PREC_16 = 2'd0,
    PREC_8  = 2'd1,
    PREC_4  = 2'd2,
    PREC_2  = 2'd3
  } prec_e;

  function automatic int unsigned prec_bits(prec_e p);
    case (p)
      PREC_16: return 16;
      PREC_8:  return 8;
      PREC_4:  return 4;
      default: return 2;
    endcase
  endfunction

endpackage
