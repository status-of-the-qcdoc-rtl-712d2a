// edram: the 4 MByte embedded DRAM macro, 1152 bits wide (1024 data bits
// plus 128 ECC bits), written as a synthesizable array with the timing of
// a slow macro.
//
// One command is accepted when `ready` is high: a read, a write or a
// refresh of one row.  Each command keeps the array busy for CYCLE clocks.
// Read data appear with `rvalid` CYCLE clocks after the command.  With
// CYCLE = 8 and a 128-byte line, the array moves 16 bytes per clock,
// i.e. 8 GBytes/s at 500 MHz, the eDRAM bandwidth the original gives.
// Refresh does not change the stored data in this model; it only takes
// its slot.  The width and the size follow the original; the command
// interface and the cycle time are this design's choices.
module edram
  import qcdoc_pkg::*;
#(
  parameter int DEPTH = EDRAM_BYTES / LINE_BYTES,   // 32768 rows
  parameter int CYCLE = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  output logic                     ready,
  input  logic                     cmd_rd,
  input  logic                     cmd_wr,
  input  logic                     cmd_ref,
  input  logic [$clog2(DEPTH)-1:0] addr,
  input  logic [EDRAM_W-1:0]       wdata,
  output logic                     rvalid,
  output logic [EDRAM_W-1:0]       rdata
);
  logic [EDRAM_W-1:0] mem [DEPTH];
  logic [$clog2(CYCLE+1)-1:0] busy;
  logic pend_rd;
  logic [$clog2(DEPTH)-1:0] raddr;

  assign ready = (busy == 0);

  always_ff @(posedge clk) begin
    if (ready && cmd_wr) mem[addr] <= wdata;
    if (busy == 1 && pend_rd) rdata <= mem[raddr];
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      busy    <= '0;
      pend_rd <= 1'b0;
      raddr   <= '0;
      rvalid  <= 1'b0;
    end else begin
      rvalid <= 1'b0;
      if (ready) begin
        if (cmd_rd || cmd_wr || cmd_ref) busy <= ($bits(busy))'(CYCLE);
        pend_rd <= cmd_rd;
        raddr   <= addr;
      end else begin
        busy <= busy - 1'b1;
        if (busy == 1) begin
          rvalid  <= pend_rd;
          pend_rd <= 1'b0;
        end
      end
    end

  // only one command per slot
  a_one_cmd: assert property (@(posedge clk) disable iff (!rst_n)
    ready |-> $onehot0({cmd_rd, cmd_wr, cmd_ref}));
endmodule
