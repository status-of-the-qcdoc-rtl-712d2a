// qcdoc_pkg: types and constants shared by the QCDOC node RTL.
//
// The on-chip bus is modelled as a single-beat, 128-bit request/grant bus
// standing in for the PLB (128 bits wide in the original design).  A master
// drives a request and holds it unchanged until the slave raises gnt for one
// cycle.  A write completes at gnt.  A read returns its data with rvalid one
// or more cycles after gnt, in order.  Bursts, split transactions and the
// 1/3 clock ratio of the real PLB are not modelled: every block here runs
// on one clock.
//
// The address map is this design's own choice; the original only says the
// eDRAM is memory mapped (4 MB) and the DDR controller covers 2 GB.
package qcdoc_pkg;

  // ---------------- bus ----------------
  localparam int BUS_DW = 128;
  localparam int BUS_BE = BUS_DW / 8;

  typedef struct packed {
    logic              req;
    logic              rnw;     // 1 = read, 0 = write
    logic [31:0]       addr;    // byte address; [3:0] ignored by memory,
                                // [3] picks the half of a 64-bit register
    logic [BUS_BE-1:0] be;      // byte enables for writes
    logic [BUS_DW-1:0] wdata;
  } bus_req_t;

  typedef struct packed {
    logic              gnt;     // request accepted this cycle
    logic              rvalid;  // read data valid
    logic [BUS_DW-1:0] rdata;
  } bus_rsp_t;

  localparam bus_req_t BUS_REQ_IDLE = '0;
  localparam bus_rsp_t BUS_RSP_IDLE = '0;

  // ---------------- address map ----------------
  localparam logic [31:0] EDRAM_BASE   = 32'h0000_0000;
  localparam int          EDRAM_BYTES  = 4 * 1024 * 1024;   // 4 MBytes
  localparam logic [31:0] SCU_REG_BASE = 32'h4000_0000;     // 64 KB window
  localparam logic [31:0] PEC_REG_BASE = 32'h4001_0000;     // 64 KB window
  localparam logic [31:0] DDR_BASE     = 32'h8000_0000;     // 2 GB

  function automatic logic is_edram(input logic [31:0] a);
    return a < (EDRAM_BASE + EDRAM_BYTES);
  endfunction
  function automatic logic is_scu_reg(input logic [31:0] a);
    return a[31:16] == SCU_REG_BASE[31:16];
  endfunction
  function automatic logic is_pec_reg(input logic [31:0] a);
    return a[31:16] == PEC_REG_BASE[31:16];
  endfunction

  // ---------------- eDRAM / PEC ----------------
  localparam int LINE_BITS  = 1024;                 // prefetch line
  localparam int LINE_BYTES = LINE_BITS / 8;        // 128
  localparam int ECC_LANES  = LINE_BITS / 64;       // 16 lanes of (72,64)
  localparam int EDRAM_W    = ECC_LANES * 72;       // 1152 bits

  // ---------------- SCU link packets ----------------
  // Header byte: [7:6] type, [5:4] sequence number, [3:0] parity.
  typedef enum logic [1:0] {
    PKT_NONE = 2'b00,
    PKT_DATA = 2'b01,
    PKT_ACK  = 2'b10,
    PKT_NACK = 2'b11
  } pkt_type_e;

  localparam int DATA_PKT_BYTES = 9;   // header + 8 data bytes

  // parity[k] = XOR of data bits j with j % 4 == k; parity[0] also covers
  // header bits [7:4].  Any single flipped bit of a packet is detected.
  function automatic logic [3:0] pkt_parity(input logic [3:0] ctl,
                                            input logic [63:0] d);
    logic [3:0] p;
    p = '0;
    for (int j = 0; j < 64; j++) p[j % 4] ^= d[j];
    p[0] ^= ^ctl;
    return p;
  endfunction

  function automatic logic [7:0] pkt_header(input pkt_type_e t,
                                            input logic [1:0] seq,
                                            input logic [63:0] d);
    return {t, seq, pkt_parity({t, seq}, d)};
  endfunction

  // ---------------- SCU DMA instruction ----------------
  // One block-strided move: nblk blocks of blen 64-bit words; block k starts
  // at addr + 8*k*stride.
  typedef struct packed {
    logic [11:0] stride;   // words from block start to block start
    logic [9:0]  nblk;     // number of blocks
    logic [9:0]  blen;     // words per block
    logic [31:0] addr;     // byte address, 8-byte aligned
  } scu_instr_t;

endpackage
