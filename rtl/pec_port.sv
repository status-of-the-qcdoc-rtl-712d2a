// pec_port: data interface of one PEC port (the PDB, the PLB slave or the
// DMA engine), with the port's read prefetch registers and write buffers.
//
// Read prefetch: four 1024-bit line registers, paired in two sets so that
// two streams at different addresses can ping-pong without evicting each
// other.  A read miss loads a set (least recently used) with the demanded
// line and the line after it: the prefetch is two lines deep.  When a read
// hits one register of a set, the other register of the set is loaded with
// the line that follows the hit, so a sequential stream keeps one line ahead.
// Write buffers: two 1024-bit line registers with byte masks.  A write
// merges into the buffer holding its line or takes a free buffer; when both
// are full the older one is written back first.  A buffer is also written
// back when the eDRAM controller asks for it (another read wants its line).
//
// Coherency: every write accepted by any port invalidates that line in the
// read registers of all ports (inv_* inputs); a fill that was in flight for
// that line is thrown away.  Together with the controller holding back reads
// of buffered lines, no port reads stale data.
//
// Bus timing: a read that hits is granted in the cycle it is presented and
// returns data one cycle later; a read that misses is granted once its line
// has arrived.  Writes are granted when buffered.  Register counts, line
// size and pairing follow the original; the replacement and prefetch rules
// and the handshakes are this design's choices.
module pec_port
  import qcdoc_pkg::*;
#(
  parameter int NP  = 3,
  parameter int LAW = 15
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // bus side (eDRAM addresses only)
  input  bus_req_t              req,
  output bus_rsp_t              rsp,
  // line read channel to the eDRAM controller
  output logic                  rd_req,
  output logic [LAW-1:0]        rd_line,
  input  logic                  rd_ack,
  input  logic [LINE_BITS-1:0]  rd_data,
  // line write channel
  output logic                  wr_req,
  output logic [LAW-1:0]        wr_line,
  output logic [LINE_BITS-1:0]  wr_data,
  output logic [LINE_BYTES-1:0] wr_mask,
  input  logic                  wr_ack,
  // write buffer state and flush requests
  output logic [1:0]            wb_valid,
  output logic [LAW-1:0]        wb_tag [2],
  input  logic                  flush_req,
  input  logic [LAW-1:0]        flush_line,
  // coherency
  output logic                  inv_out,
  output logic [LAW-1:0]        inv_out_line,
  input  logic                  inv_in      [NP],
  input  logic [LAW-1:0]        inv_in_line [NP],
  // events for statistics (one cycle pulses)
  output logic                  ev_hit,
  output logic                  ev_miss,
  output logic                  ev_prefetch,
  output logic                  ev_wmerge
);
  // ---------------- read registers ----------------
  logic [LINE_BITS-1:0] rdat  [4];
  logic [LAW-1:0]       rtag  [4];
  logic [3:0]           rval, rpend, rfly;
  logic                 lru;               // set to replace next
  logic                 fill_busy, fill_stale;
  logic [1:0]           fill_slot;
  logic [LAW-1:0]       fill_tag;

  // ---------------- write buffers ----------------
  logic [LINE_BITS-1:0]  wdat  [2];
  logic [LINE_BYTES-1:0] wmsk  [2];
  logic                  wb_new;           // most recently allocated
  logic                  fl_busy;
  logic                  fl_idx;

  logic [LAW-1:0] line;
  logic [2:0]     chunk;
  assign line  = req.addr[LAW+6:7];
  assign chunk = req.addr[6:4];

  // ---------------- read lookup ----------------
  logic       hit, waiting;
  logic [1:0] hslot;
  always_comb begin
    hit = 1'b0; waiting = 1'b0; hslot = '0;
    for (int s = 0; s < 4; s++) begin
      if (rval[s] && rtag[s] == line) begin hit = 1'b1; hslot = 2'(s); end
      if (!rval[s] && (rpend[s] || rfly[s]) && rtag[s] == line) waiting = 1'b1;
    end
  end

  logic rd_go, rd_alloc;
  assign rd_go    = req.req && req.rnw && hit;
  assign rd_alloc = req.req && req.rnw && !hit && !waiting;

  // other register of the hit set, and whether it already covers line+1
  logic [1:0] oslot;
  logic       need_pf;
  assign oslot   = hslot ^ 2'b01;
  assign need_pf = rd_go && !(rtag[oslot] == line + 1'b1 &&
                              (rval[oslot] || rpend[oslot] || rfly[oslot]));

  // ---------------- write lookup ----------------
  logic wmatch, wfree_ok;
  logic wm_idx, wf_idx;
  always_comb begin
    wmatch = 1'b0; wm_idx = 1'b0;
    for (int b = 0; b < 2; b++)
      if (wb_valid[b] && wb_tag[b] == line && !(fl_busy && fl_idx == b[0])) begin
        wmatch = 1'b1; wm_idx = b[0];
      end
    wfree_ok = !wb_valid[0] || !wb_valid[1];
    wf_idx   = wb_valid[0] ? 1'b1 : 1'b0;
  end
  logic wr_inflight_match;     // its line is being written back: wait
  assign wr_inflight_match = fl_busy && wb_valid[fl_idx] && wb_tag[fl_idx] == line;

  logic wr_go;
  assign wr_go = req.req && !req.rnw && !wr_inflight_match && (wmatch || wfree_ok);

  logic rvalid_q;
  logic [BUS_DW-1:0] rdata_q;
  assign rsp.gnt    = rd_go || wr_go;
  assign rsp.rvalid = rvalid_q;
  assign rsp.rdata  = rdata_q;

  assign inv_out      = wr_go;
  assign inv_out_line = line;

  assign ev_hit      = rd_go;
  assign ev_miss     = rd_alloc;
  assign ev_prefetch = need_pf;
  assign ev_wmerge   = wr_go && wmatch;

  // ---------------- fill engine ----------------
  logic [1:0] pf_pick;
  logic       pf_any;
  always_comb begin
    pf_any = 1'b0; pf_pick = '0;
    for (int s = 3; s >= 0; s--)
      if (rpend[s]) begin pf_any = 1'b1; pf_pick = 2'(s); end
    for (int s = 3; s >= 0; s--)        // demanded line first
      if (rpend[s] && rtag[s] == line && req.req && req.rnw) pf_pick = 2'(s);
  end
  assign rd_req  = fill_busy;
  assign rd_line = fill_tag;

  // ---------------- write-back engine ----------------
  logic fl_start;
  logic fl_start_idx;
  always_comb begin
    fl_start = 1'b0; fl_start_idx = 1'b0;
    if (!fl_busy) begin
      if (flush_req) begin
        for (int b = 0; b < 2; b++)
          if (wb_valid[b] && wb_tag[b] == flush_line) begin
            fl_start = 1'b1; fl_start_idx = b[0];
          end
      end
      if (!fl_start && req.req && !req.rnw && !wmatch && !wfree_ok &&
          !wr_inflight_match) begin
        fl_start = 1'b1; fl_start_idx = ~wb_new;
      end
    end
  end
  assign wr_req  = fl_busy;
  assign wr_line = wb_tag[fl_idx];
  assign wr_data = wdat[fl_idx];
  assign wr_mask = wmsk[fl_idx];

  // ---------------- state ----------------
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      rval <= '0; rpend <= '0; rfly <= '0; lru <= 1'b0;
      fill_busy <= 1'b0; fill_stale <= 1'b0; fill_slot <= '0; fill_tag <= '0;
      wb_valid <= '0; wb_new <= 1'b0; fl_busy <= 1'b0; fl_idx <= 1'b0;
      rvalid_q <= 1'b0;
      for (int s = 0; s < 4; s++) rtag[s] <= '0;
      for (int b = 0; b < 2; b++) begin wb_tag[b] <= '0; wmsk[b] <= '0; end
    end else begin
      rvalid_q <= rd_go;

      // read hit: keep the other register of the set one line ahead
      if (rd_go) begin
        lru <= ~hslot[1];
        if (need_pf) begin
          rtag[oslot]  <= line + 1'b1;
          rval[oslot]  <= 1'b0;
          rpend[oslot] <= 1'b1;
        end
      end
      // read miss: load a whole set with line and line+1
      if (rd_alloc) begin
        rtag[{lru, 1'b0}]  <= line;
        rtag[{lru, 1'b1}]  <= line + 1'b1;
        rval[{lru, 1'b0}]  <= 1'b0;  rval[{lru, 1'b1}]  <= 1'b0;
        rpend[{lru, 1'b0}] <= 1'b1;  rpend[{lru, 1'b1}] <= 1'b1;
        lru <= ~lru;
      end

      // fill engine
      if (!fill_busy && pf_any) begin
        fill_busy        <= 1'b1;
        fill_stale       <= 1'b0;
        fill_slot        <= pf_pick;
        fill_tag         <= rtag[pf_pick];
        rpend[pf_pick]   <= 1'b0;
        rfly[pf_pick]    <= 1'b1;
      end
      if (fill_busy && rd_ack) begin
        fill_busy       <= 1'b0;
        rfly[fill_slot] <= 1'b0;
        if (!fill_stale && rtag[fill_slot] == fill_tag && !rpend[fill_slot]) begin
          rval[fill_slot] <= 1'b1;
        end
      end

      // invalidations from writes on any port
      for (int p = 0; p < NP; p++)
        if (inv_in[p]) begin
          for (int s = 0; s < 4; s++)
            if (rtag[s] == inv_in_line[p]) begin
              rval[s]  <= 1'b0;
              rpend[s] <= 1'b0;
            end
          if (fill_busy && fill_tag == inv_in_line[p]) fill_stale <= 1'b1;
        end

      // writes into the buffers
      if (wr_go) begin
        if (wmatch) begin
          for (int k = 0; k < BUS_BE; k++)
            if (req.be[k]) wmsk[wm_idx][16*chunk + k] <= 1'b1;
        end else begin
          wb_valid[wf_idx] <= 1'b1;
          wb_tag[wf_idx]   <= line;
          wb_new           <= wf_idx;
          for (int k = 0; k < LINE_BYTES; k++)
            wmsk[wf_idx][k] <= (k / 16 == int'(chunk)) && req.be[k % 16];
        end
      end

      // write-back engine
      if (fl_start) begin
        fl_busy <= 1'b1;
        fl_idx  <= fl_start_idx;
      end
      if (fl_busy && wr_ack) begin
        fl_busy          <= 1'b0;
        wb_valid[fl_idx] <= 1'b0;
      end
    end

  // data registers (no reset needed: guarded by valid bits)
  always_ff @(posedge clk) begin
    if (rd_go) rdata_q <= rdat[hslot][128*chunk +: 128];
    if (fill_busy && rd_ack) rdat[fill_slot] <= rd_data;
    if (wr_go)
      for (int k = 0; k < BUS_BE; k++)
        if (req.be[k]) wdat[wmatch ? wm_idx : wf_idx][128*chunk + 8*k +: 8] <= req.wdata[8*k +: 8];
  end

  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    req.req && !rsp.gnt |=> req.req && $stable(req.addr) && $stable(req.rnw));
endmodule
