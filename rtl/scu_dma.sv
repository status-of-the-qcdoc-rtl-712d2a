// scu_dma: DMA engine of one SCU channel (one send or one receive
// direction of a link), with its instruction SRAM.
//
// The SRAM holds NINSTR block-strided-move instructions (scu_instr_t: base
// address, words per block, number of blocks, block stride).  A start
// pulse runs `start_cnt` consecutive instructions beginning at
// `start_idx`.  A send engine (IS_SEND=1) reads each 64-bit word from
// memory over its bus port and pushes it into the send register; a receive
// engine pops words from the receive register and writes them to memory.
// Word k of block b of an instruction is at addr + 8*(b*stride + k).
// One bus transfer is in flight at a time; a word travels in one half of a
// 128-bit beat, chosen by address bit 3.  `done` pulses when the last
// instruction finishes.  That the engine executes block-strided moves held
// in its own SRAM follows the original; the instruction fields, SRAM depth
// and start mechanism are this design's choices.
module scu_dma
  import qcdoc_pkg::*;
#(
  parameter bit IS_SEND = 1'b1,
  parameter int NINSTR  = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  // instruction SRAM write port
  input  logic        iw_en,
  input  logic [$clog2(NINSTR)-1:0] iw_idx,
  input  scu_instr_t  iw_data,
  // control
  input  logic        start,
  input  logic [$clog2(NINSTR)-1:0] start_idx,
  input  logic [$clog2(NINSTR):0]   start_cnt,
  output logic        busy,
  output logic        done,
  // memory side
  output bus_req_t    m_req,
  input  bus_rsp_t    m_rsp,
  // register side: send engines push, receive engines pop
  output logic        push_valid,
  input  logic        push_ready,
  output logic [63:0] push_data,
  input  logic        pop_valid,
  output logic        pop_ready,
  input  logic [63:0] pop_data
);
  localparam int IW = $clog2(NINSTR);
  scu_instr_t sram [NINSTR];

  typedef enum logic [2:0] {IDLE, LOAD, XFER, RD_WAIT, PUSH, NEXT} st_e;
  st_e st;

  scu_instr_t  ins;
  logic [IW-1:0] ip;
  logic [IW:0]   left;
  logic [9:0]  w, b;
  logic [31:0] blk_base, cur;
  logic [63:0] word;

  always_ff @(posedge clk) if (iw_en) sram[iw_idx] <= iw_data;

  assign busy = st != IDLE;

  // bus request
  always_comb begin
    m_req = BUS_REQ_IDLE;
    if (st == XFER && (IS_SEND || pop_valid)) begin
      m_req.req   = 1'b1;
      m_req.rnw   = IS_SEND;
      m_req.addr  = {cur[31:4], 4'b0};
      m_req.be    = cur[3] ? 16'hFF00 : 16'h00FF;
      m_req.wdata = {pop_data, pop_data};
    end
  end
  assign pop_ready  = !IS_SEND && st == XFER && m_rsp.gnt;
  assign push_valid = IS_SEND && st == PUSH;
  assign push_data  = word;

  logic word_done;
  assign word_done = (st == PUSH && push_ready) || (!IS_SEND && st == XFER && m_rsp.gnt);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      st <= IDLE; ins <= '0; ip <= '0; left <= '0; w <= '0; b <= '0;
      blk_base <= '0; cur <= '0; word <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (st)
        IDLE: if (start && start_cnt != 0) begin
          ip <= start_idx; left <= start_cnt; st <= LOAD;
        end
        LOAD: begin
          ins      <= sram[ip];
          blk_base <= sram[ip].addr;
          cur      <= sram[ip].addr;
          w <= '0; b <= '0;
          st <= (sram[ip].blen == 0 || sram[ip].nblk == 0) ? NEXT : XFER;
        end
        XFER: if (m_rsp.gnt) st <= IS_SEND ? RD_WAIT : XFER;
        RD_WAIT: if (m_rsp.rvalid) begin
          word <= cur[3] ? m_rsp.rdata[127:64] : m_rsp.rdata[63:0];
          st   <= PUSH;
        end
        PUSH: ;
        NEXT: begin
          if (left == 1) begin st <= IDLE; done <= 1'b1; end
          else begin left <= left - 1'b1; ip <= ip + 1'b1; st <= LOAD; end
        end
        default: st <= IDLE;
      endcase
      if (word_done) begin
        if (w + 1'b1 == ins.blen) begin
          w <= '0;
          if (b + 1'b1 == ins.nblk) st <= NEXT;
          else begin
            b        <= b + 1'b1;
            blk_base <= blk_base + {17'd0, ins.stride, 3'd0};
            cur      <= blk_base + {17'd0, ins.stride, 3'd0};
            st       <= XFER;
          end
        end else begin
          w   <= w + 1'b1;
          cur <= cur + 32'd8;
          st  <= XFER;
        end
      end
    end
endmodule
