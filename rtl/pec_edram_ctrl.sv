// pec_edram_ctrl: eDRAM control, arbitration, R/W control and ECC of the
// prefetching eDRAM controller (PEC).
//
// Three ports (PDB, PLB slave, DMA) each present a line read channel and a
// line write channel (1024-bit lines with a byte mask); the refresh timer
// presents row refreshes.  Refresh wins; among the six port channels a
// round-robin arbiter picks the next command whenever the eDRAM is ready.
//
// Data are stored as 16 SEC-DED lanes (72,64) in the 1152-bit eDRAM word.
// Reads are corrected on the way out; one pulse per line read reports a
// corrected lane, another an uncorrectable one.  A write whose mask does
// not cover the whole line is done as read-modify-write so that the check
// bits stay consistent.
//
// Coherency: a line read is held back while any port's write buffer holds
// the same line.  The controller asks that port to flush it (flush_req,
// flush_line) and performs the read afterwards, so a read never returns
// data older than a buffered write.  The ports invalidate their prefetch
// lines themselves on writes (see pec_port).
//
// Handshake: req and its fields stay stable until the matching ack, which
// is high for one cycle.  Read data are valid with rd_ack.
module pec_edram_ctrl
  import qcdoc_pkg::*;
#(
  parameter int NP  = 3,
  parameter int LAW = 15          // line address width (32768 lines)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // port read channels
  input  logic                  rd_req  [NP],
  input  logic [LAW-1:0]        rd_line [NP],
  output logic                  rd_ack  [NP],
  output logic [LINE_BITS-1:0]  rd_data,
  // port write channels
  input  logic                  wr_req  [NP],
  input  logic [LAW-1:0]        wr_line [NP],
  input  logic [LINE_BITS-1:0]  wr_data [NP],
  input  logic [LINE_BYTES-1:0] wr_mask [NP],
  output logic                  wr_ack  [NP],
  // write buffer contents of every port, for the coherency check
  input  logic [1:0]            wb_valid [NP],
  input  logic [LAW-1:0]        wb_tag   [NP][2],
  output logic                  flush_req [NP],
  output logic [LAW-1:0]        flush_line,
  // refresh
  input  logic                  ref_req,
  input  logic [LAW-1:0]        ref_row,
  output logic                  ref_ack,
  // ECC events (one cycle pulses)
  output logic                  ecc_corrected,
  output logic                  ecc_uncorrectable,
  // eDRAM macro
  input  logic                  e_ready,
  output logic                  e_rd,
  output logic                  e_wr,
  output logic                  e_ref,
  output logic [LAW-1:0]        e_addr,
  output logic [EDRAM_W-1:0]    e_wdata,
  input  logic                  e_rvalid,
  input  logic [EDRAM_W-1:0]    e_rdata
);
  typedef enum logic [2:0] {IDLE, RD_WAIT, RD_DONE, RMW_WAIT, RMW_WR} st_e;
  st_e st;

  localparam int NS = 2 * NP;
  localparam int SW = $clog2(NS);
  localparam int PW = $clog2(NP > 1 ? NP : 2);

  logic [NS-1:0] eligible;
  logic [SW-1:0] sidx;
  logic [PW-1:0] cur;          // port being served
  logic [LAW-1:0] cur_line;
  logic [LINE_BITS-1:0] merged;
  logic [NP-1:0] blocked;

  // ---------------- ECC ----------------
  logic [LINE_BITS-1:0] enc_in, dec_out;
  logic [EDRAM_W-1:0]   enc_out;
  logic [ECC_LANES-1:0] lane_corr, lane_unc;

  for (genvar l = 0; l < ECC_LANES; l++) begin : g_ecc
    secded_72_64 u_ecc (
      .enc_data(enc_in[64*l +: 64]),  .enc_cw(enc_out[72*l +: 72]),
      .dec_cw(e_rdata[72*l +: 72]),   .dec_data(dec_out[64*l +: 64]),
      .dec_corrected(lane_corr[l]),   .dec_uncorrectable(lane_unc[l])
    );
  end

  assign ecc_corrected     = e_rvalid && |lane_corr && !(|lane_unc);
  assign ecc_uncorrectable = e_rvalid && |lane_unc;

  // ---------------- coherency check ----------------
  always_comb begin
    logic found;
    flush_line = '0;
    found = 1'b0;
    for (int p = 0; p < NP; p++) flush_req[p] = 1'b0;
    for (int i = 0; i < NP; i++) begin
      blocked[i] = 1'b0;
      for (int p = 0; p < NP; p++)
        for (int b = 0; b < 2; b++)
          if (rd_req[i] && wb_valid[p][b] && wb_tag[p][b] == rd_line[i]) begin
            blocked[i] = 1'b1;
            if (!found) begin
              found        = 1'b1;
              flush_req[p] = 1'b1;
              flush_line   = rd_line[i];
            end
          end
    end
  end

  always_comb
    for (int i = 0; i < NP; i++) begin
      eligible[i]      = rd_req[i] && !blocked[i];
      eligible[NP + i] = wr_req[i];
    end

  logic issue;
  assign issue = (st == IDLE) && e_ready && !ref_req && |eligible;

  rr_arbiter #(.N(NS)) u_rr (
    .clk, .rst_n, .req(eligible), .advance(issue), .gnt(), .gnt_idx(sidx)
  );

  logic sel_is_wr, sel_full;
  logic [PW-1:0] wsrc;
  assign sel_is_wr = int'(sidx) >= NP;
  assign wsrc      = PW'(sel_is_wr ? sidx - SW'(NP) : sidx);
  assign sel_full  = &wr_mask[wsrc];

  // merge of the buffered write into the line read back (RMW)
  always_comb
    for (int b = 0; b < LINE_BYTES; b++)
      merged[8*b +: 8] = wr_mask[cur][b] ? wr_data[cur][8*b +: 8]
                                         : dec_out[8*b +: 8];

  logic [LINE_BITS-1:0] rmw_q;

  always_comb begin
    e_rd = 1'b0; e_wr = 1'b0; e_ref = 1'b0;
    e_addr = '0;
    enc_in = rmw_q;
    ref_ack = 1'b0;
    for (int i = 0; i < NP; i++) begin
      rd_ack[i] = 1'b0;
      wr_ack[i] = 1'b0;
    end
    case (st)
      IDLE: if (e_ready) begin
        if (ref_req) begin
          e_ref   = 1'b1;
          e_addr  = ref_row;
          ref_ack = 1'b1;
        end else if (|eligible) begin
          if (!sel_is_wr) begin
            e_rd   = 1'b1;
            e_addr = rd_line[wsrc];
          end else begin
            e_addr = wr_line[wsrc];
            if (sel_full) begin
              e_wr         = 1'b1;
              enc_in       = wr_data[wsrc];
              wr_ack[wsrc] = 1'b1;
            end else begin
              e_rd = 1'b1;           // read part of read-modify-write
            end
          end
        end
      end
      RD_DONE: rd_ack[cur] = 1'b1;
      RMW_WR: if (e_ready) begin
        e_wr        = 1'b1;
        e_addr      = cur_line;
        wr_ack[cur] = 1'b1;
      end
      default: ;
    endcase
  end
  assign e_wdata = enc_out;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      st       <= IDLE;
      cur      <= '0;
      cur_line <= '0;
      rd_data  <= '0;
      rmw_q    <= '0;
    end else begin
      case (st)
        IDLE: if (issue) begin
          cur      <= wsrc;
          cur_line <= e_addr;
          if (!sel_is_wr)     st <= RD_WAIT;
          else if (!sel_full) st <= RMW_WAIT;
        end
        RD_WAIT: if (e_rvalid) begin
          rd_data <= dec_out;
          st      <= RD_DONE;
        end
        RD_DONE: st <= IDLE;
        RMW_WAIT: if (e_rvalid) begin
          rmw_q <= merged;
          st    <= RMW_WR;
        end
        RMW_WR: if (e_ready) st <= IDLE;
        default: st <= IDLE;
      endcase
    end

  a_single_cmd: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({e_rd, e_wr, e_ref}));
endmodule
