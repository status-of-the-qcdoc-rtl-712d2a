// tb_qcdoc_asic: end-to-end test of the node at its default size.
//
// The 12 links are looped back as a one-node torus: link 2k transmits into
// link 2k+1 and link 2k+1 into link 2k (the +x output of a node whose
// torus is one node wide enters its own -x input).  A small DDR memory
// model answers on the external PLB slave port.  All traffic starts at the
// PDB port, as the processor's would.  The test:
//   1. writes a pattern into the eDRAM over the PDB and reads it back,
//      checking the hit latency (data one cycle after the request);
//   2. sends 64 words over link 0 with a strided receive on link 1,
//      flipping one bit on the wire so that the word is resent;
//   3. sends 4 words over link 2 with passthru on link 3 forwarding them to
//      link 4 (and keeping a copy), received on link 5;
//   4. copies eDRAM to DDR and back with the PEC DMA, from a line that
//      is still in the PDB write buffer (coherency flush);
//   5. corrupts one and two bits of stored eDRAM lines and checks
//      correction and detection;
//   6. streams 4 KB from the eDRAM over the PDB, one request per clock,
//      and checks the peak (one 16-byte beat per clock within a line) and
//      the sustained rate (above 6.4 bytes per clock);
//   7. starts 8 send and 8 receive channels with one register write, each
//      moving the 48-word face of a 2^4 lattice, and checks the data and
//      a bound of 64 clocks per word.
// Each mechanism is counted; one that never happened is a failure.
`timescale 1ns/1ps
module tb_qcdoc_asic;
  import qcdoc_pkg::*;
  localparam int NL = 12;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  bus_req_t pdb_req, plb_m_req, plb_s_req;
  bus_rsp_t pdb_rsp, plb_m_rsp, plb_s_rsp;
  logic       tx_valid [NL], rx_valid [NL];
  logic [7:0] tx_byte  [NL], rx_byte  [NL];
  logic irq_scu, irq_dma, irq_ecc;

  qcdoc_asic dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- link loopback with error injection ----------------
  int  flip_at [NL];          // byte index on which to flip bit 2, -1 none
  int  nbytes  [NL];
  always_ff @(posedge clk)
    for (int l = 0; l < NL; l++) begin
      rx_valid[l ^ 1] <= tx_valid[l];
      rx_byte[l ^ 1]  <= tx_byte[l] ^ ((tx_valid[l] && nbytes[l] == flip_at[l]) ? 8'h04 : 8'h00);
      if (tx_valid[l]) nbytes[l] <= nbytes[l] + 1;
    end

  // ---------------- DDR model on the external slave port ----------------
  logic [127:0] ddr [1024];
  int ddr_dly;
  logic ddr_rv; logic [127:0] ddr_rd;
  always_comb begin
    plb_s_rsp.gnt    = plb_s_req.req && ddr_dly == 2;
    plb_s_rsp.rvalid = ddr_rv;
    plb_s_rsp.rdata  = ddr_rd;
  end
  always_ff @(posedge clk) begin
    ddr_rv <= 1'b0;
    if (plb_s_req.req && ddr_dly < 2) ddr_dly <= ddr_dly + 1;
    if (plb_s_rsp.gnt) begin
      ddr_dly <= 0;
      if (plb_s_req.rnw) begin
        ddr_rv <= 1'b1;
        ddr_rd <= ddr[plb_s_req.addr[13:4]];
      end else
        for (int b = 0; b < 16; b++)
          if (plb_s_req.be[b]) ddr[plb_s_req.addr[13:4]][8*b +: 8] <= plb_s_req.wdata[8*b +: 8];
    end
  end

  // ---------------- PDB access tasks ----------------
  // Requests are driven and released at falling edges; the DUT samples at
  // rising edges.
  task automatic pdb_wr(input logic [31:0] a, input logic [127:0] d, input logic [15:0] be);
    pdb_req = '{req: 1'b1, rnw: 1'b0, addr: a, be: be, wdata: d};
    #0.1;
    while (!pdb_rsp.gnt) begin @(negedge clk); #0.1; end
    @(negedge clk);
    pdb_req = BUS_REQ_IDLE;
  endtask
  task automatic pdb_rd(input logic [31:0] a, output logic [127:0] d, output int lat);
    lat = 1;
    pdb_req = '{req: 1'b1, rnw: 1'b1, addr: a, be: '0, wdata: '0};
    #0.1;
    while (!pdb_rsp.gnt) begin @(negedge clk); #0.1; lat++; end
    @(negedge clk);
    pdb_req = BUS_REQ_IDLE;
    while (!pdb_rsp.rvalid) @(negedge clk);
    d = pdb_rsp.rdata;
  endtask
  task automatic wr64(input logic [31:0] a, input logic [63:0] v);
    pdb_wr(a, {v, v}, a[3] ? 16'hFF00 : 16'h00FF);
  endtask
  task automatic rd64(input logic [31:0] a, output logic [63:0] v);
    logic [127:0] d; int lat;
    pdb_rd(a, d, lat);
    v = a[3] ? d[127:64] : d[63:0];
  endtask

  function automatic logic [63:0] pat(input int i);
    return {32'hC0DE_0000 + 32'(i), 32'h1234_5678 ^ 32'(i * 977)};
  endfunction

  // ---------------- mechanism counters ----------------
  int n_parity, n_resend, n_forward, n_prefetch, n_refresh, n_coh, n_rmw, n_corr, n_dup;
  always_ff @(posedge clk) begin
    n_parity   <= n_parity   + int'(dut.ev_parity);
    n_resend   <= n_resend   + int'(dut.ev_resend);
    n_forward  <= n_forward  + int'(dut.ev_forward);
    n_prefetch <= n_prefetch + int'(dut.ev_prefetch);
    n_refresh  <= n_refresh  + int'(dut.ev_refresh);
    n_coh      <= n_coh      + int'(dut.ev_coh_flush);
    n_rmw      <= n_rmw      + int'(dut.ev_rmw);
    n_corr     <= n_corr     + int'(dut.ev_ecc_corr);
    n_dup      <= n_dup      + int'(dut.ev_duplicate);
  end

  // ---------------- watchdog ----------------
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wait_done(input logic [31:0] mask);
    logic [63:0] v;
    int n;
    n = 0;
    do begin rd64(SCU_REG_BASE + 32'h10, v); n++; end while ((v[31:0] & mask) != mask && n < 20000);
    check((v[31:0] & mask) == mask, $sformatf("SCU channels finished (%h)", v));
  endtask

  function automatic logic [63:0] instr(input logic [31:0] a, input int blen, input int nblk, input int stride);
    scu_instr_t i;
    i.addr = a; i.blen = 10'(blen); i.nblk = 10'(nblk); i.stride = 12'(stride);
    return 64'(i);
  endfunction

  initial begin
    logic [127:0] d; logic [63:0] v; int lat, t0, ok;
    pdb_req = BUS_REQ_IDLE; plb_m_req = BUS_REQ_IDLE;
    ddr_dly = 0;
    n_parity = 0; n_resend = 0; n_forward = 0; n_prefetch = 0; n_refresh = 0;
    n_coh = 0; n_rmw = 0; n_corr = 0; n_dup = 0;
    for (int l = 0; l < NL; l++) begin flip_at[l] = -1; nbytes[l] = 0; end
    for (int i = 0; i < 1024; i++) ddr[i] = '0;
    // a cleared array is a valid ECC image (all-zero code words)
    for (int i = 0; i < (EDRAM_BYTES / LINE_BYTES); i++) dut.u_pec.u_edram.mem[i] = '0;
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    @(negedge clk);

    // 1. PDB write and read back
    for (int i = 0; i < 64; i++) wr64(32'h1000 + 32'(8 * i), pat(i));
    ok = 1;
    for (int i = 0; i < 64; i++) begin
      rd64(32'h1000 + 32'(8 * i), v);
      if (v != pat(i)) ok = 0;
    end
    check(ok == 1, "PDB write/read back");
    // stream through one more time: a hit is granted at once
    pdb_rd(32'h1000, d, lat);
    pdb_rd(32'h1010, d, lat);
    check(lat == 1, $sformatf("PDB hit granted in the request cycle (%0d)", lat));
    check(d == {pat(3), pat(2)}, "PDB hit data");

    // 2. link 0 -> link 1, strided receive, one bit error on the wire
    wr64(SCU_REG_BASE + 32'h1000 + 32'h80 * 0, instr(32'h1000, 8, 8, 8));
    wr64(SCU_REG_BASE + 32'h1000 + 32'h80 * 13, instr(32'h4000, 8, 8, 16));
    flip_at[0] = 22;          // data byte of the third packet
    wr64(SCU_REG_BASE + 32'h0, 64'h0000_2001);   // START channels 0 and 13
    t0 = $time;
    wait_done(32'h0000_2001);
    ok = 1;
    for (int b = 0; b < 8; b++)
      for (int k = 0; k < 8; k++) begin
        rd64(32'h4000 + 32'(8 * (16 * b + k)), v);
        if (v != pat(8 * b + k)) ok = 0;
      end
    check(ok == 1, "64 words over link 0 arrive strided in memory");
    rd64(SCU_REG_BASE + 32'h18, v);
    check(v[31:0] >= 1 && v[63:32] >= 1, $sformatf("parity error counted and resent (%h, %0d %0d)", v, n_parity, n_resend));
    wr64(SCU_REG_BASE + 32'h10, 64'hFF_FFFF);     // clear DONE

    // 3. passthru: link 2 -> rx 3 -> forwarded to tx 4 -> rx 5
    wr64(SCU_REG_BASE + 32'h200 + 8 * 3, 64'h43);  // on, keep, dst 4
    wr64(SCU_REG_BASE + 32'h1000 + 32'h80 * 2, instr(32'h1000, 4, 1, 0));
    wr64(SCU_REG_BASE + 32'h1000 + 32'h80 * 17, instr(32'h6000, 4, 1, 0));
    wr64(SCU_REG_BASE + 32'h1000 + 32'h80 * 15, instr(32'h7000, 4, 1, 0));
    wr64(SCU_REG_BASE + 32'h0, 64'h2_8004);        // channels 2, 15, 17
    wait_done(32'h2_8004);
    ok = 1;
    for (int k = 0; k < 4; k++) begin
      rd64(32'h6000 + 32'(8 * k), v); if (v != pat(k)) ok = 0;
      rd64(32'h7000 + 32'(8 * k), v); if (v != pat(k)) ok = 0;
    end
    check(ok == 1, "passthru forwarded and kept 4 words");

    // 4. PEC DMA eDRAM -> DDR -> eDRAM, source still in the PDB write buffer
    for (int i = 0; i < 32; i++) wr64(32'h9000 + 32'(8 * i), pat(100 + i));
    wr64(PEC_REG_BASE + 32'h00, 64'h9000);
    wr64(PEC_REG_BASE + 32'h08, 64'h8000_0100);
    wr64(PEC_REG_BASE + 32'h10, 64'd256);
    wr64(PEC_REG_BASE + 32'h18, 64'd1);
    do rd64(PEC_REG_BASE + 32'h20, v); while (v[1] == 0);
    ok = 1;
    for (int i = 0; i < 16; i++)
      if (ddr[16 + i] != {pat(100 + 2 * i + 1), pat(100 + 2 * i)}) ok = 0;
    check(ok == 1, "DMA eDRAM to DDR");
    wr64(PEC_REG_BASE + 32'h00, 64'h8000_0100);
    wr64(PEC_REG_BASE + 32'h08, 64'hA000);
    wr64(PEC_REG_BASE + 32'h18, 64'd1);
    do rd64(PEC_REG_BASE + 32'h20, v); while (v[1] == 0);
    ok = 1;
    for (int i = 0; i < 32; i++) begin
      rd64(32'hA000 + 32'(8 * i), v); if (v != pat(100 + i)) ok = 0;
    end
    check(ok == 1, "DMA DDR to eDRAM, read back over PDB");

    // 5. ECC: one bit in line 0x9000/128, two bits in line 0x1_0000/128
    dut.u_pec.u_edram.mem[32'h9000 >> 7][10] ^= 1'b1;
    rd64(32'h9008, v);
    check(v == pat(101), "single-bit eDRAM error corrected");
    check(irq_ecc == 0, "no uncorrectable error yet");
    dut.u_pec.u_edram.mem[32'h1_0000 >> 7][20] ^= 1'b1;
    dut.u_pec.u_edram.mem[32'h1_0000 >> 7][30] ^= 1'b1;
    rd64(32'h1_0000, v);
    check(irq_ecc == 1, "double-bit eDRAM error detected");
    rd64(PEC_REG_BASE + 32'h28, v);
    check(v[31:0] >= 1, "corrected count register");

    // 6. sequential PDB read stream of 4 KB from eDRAM (a fresh region, so
    //    every line comes from the array): one request per clock, measure
    //    bytes per clock against the eDRAM's 16 bytes per clock
    for (int i = 0; i < 256; i++)
      pdb_wr(32'h2_0000 + 32'(16 * i), {pat(2 * i + 1), pat(2 * i)}, 16'hFFFF);
    for (int i = 0; i < 8; i++) pdb_rd(32'h3_0000 + 32'(128 * i), d, lat);  // evict the write region
    begin
      int nbeat, cyc, bad, run, maxrun;
      nbeat = 0; cyc = 0; bad = 0; run = 0; maxrun = 0;
      fork
        for (int i = 0; i < 256; i++) begin
          pdb_req = '{req: 1'b1, rnw: 1'b1, addr: 32'h2_0000 + 32'(16 * i), be: '0, wdata: '0};
          #0.1;
          while (!pdb_rsp.gnt) begin @(negedge clk); #0.1; end
          @(negedge clk);
          pdb_req = BUS_REQ_IDLE;
        end
        while (nbeat < 256) begin
          @(negedge clk);
          cyc++;
          if (pdb_rsp.rvalid) begin
            if (pdb_rsp.rdata != {pat(2 * nbeat + 1), pat(2 * nbeat)}) bad++;
            nbeat++;
            run++;
            if (run > maxrun) maxrun = run;
          end else run = 0;
        end
      join
      check(bad == 0, "streamed PDB data");
      $display("PDB stream: %0d bytes in %0d clocks = %0.2f bytes/clock", 256 * 16, cyc, 4096.0 / cyc);
      // peak: a prefetched line is read at one beat per clock (8 GB/s at
      // 500 MHz); sustained: at least 6.4 bytes/clock (3.2 GB/s)
      check(maxrun >= 8, $sformatf("PDB peak of one beat per clock over a line (%0d)", maxrun));
      check(cyc <= 640, $sformatf("PDB sustained stream above 6.4 bytes/clock (%0d clocks)", cyc));
    end

    // 7. 4-D nearest-neighbour exchange of a 2^4 lattice surface: links
    //    0-7 each send 48 words (8 sites x 3 complex x 16 bytes), started
    //    by one START write of 8 send and 8 receive channels
    wr64(SCU_REG_BASE + 32'h200 + 8 * 3, 64'h0);   // passthru off again
    wr64(SCU_REG_BASE + 32'h10, 64'hFF_FFFF);      // clear DONE
    for (int l = 0; l < 8; l++) begin
      for (int k = 0; k < 48; k++) wr64(32'h4_0000 + 32'(32'h400 * l + 8 * k), pat(1000 * l + k));
      wr64(SCU_REG_BASE + 32'h1000 + 32'h80 * l, instr(32'h4_0000 + 32'(32'h400 * l), 48, 1, 0));
      wr64(SCU_REG_BASE + 32'h1000 + 32'h80 * (12 + l), instr(32'h5_0000 + 32'(32'h400 * l), 48, 1, 0));
    end
    begin
      int c0, c1;
      c0 = int'($time / 2);
      wr64(SCU_REG_BASE + 32'h0, 64'h0F_F0FF);     // channels 0-7 and 12-19
      wait_done(32'h0F_F0FF);
      c1 = int'($time / 2);
      ok = 1;
      for (int l = 0; l < 8; l++)
        for (int k = 0; k < 48; k++) begin
          rd64(32'h5_0000 + 32'(32'h400 * (l ^ 1) + 8 * k), v);
          if (v != pat(1000 * l + k)) ok = 0;
        end
      check(ok == 1, "4-D exchange: 8 x 48 words arrive on the facing links");
      $display("4-D exchange: 8 x 48 words in %0d clocks (one link alone needs %0d byte times)", c1 - c0, 48 * 9);
      // the eight receive streams share the two write buffers of the PEC's
      // PLB-slave port, so nearly every 8-byte store costs a line
      // read-modify-write; the bound is 64 clocks per word
      check(c1 - c0 < 8 * 48 * 64, $sformatf("4-D exchange within 64 clocks per word (%0d clocks)", c1 - c0));
    end

    // mechanisms
    check(n_parity  > 0, "link parity error happened");
    check(n_resend  > 0, "resend happened");
    check(n_dup     > 0, "out-of-sequence drop happened");
    check(n_forward > 0, "passthru forward happened");
    check(n_prefetch > 0, "prefetch happened");
    check(n_refresh > 0, "refresh happened");
    check(n_coh     > 0, "coherency flush happened");
    check(n_rmw     > 0, "read-modify-write happened");
    check(n_corr    > 0, "ECC correction happened");
    $display("mechanisms: parity=%0d resend=%0d dup=%0d forward=%0d prefetch=%0d refresh=%0d coh=%0d rmw=%0d corr=%0d",
             n_parity, n_resend, n_dup, n_forward, n_prefetch, n_refresh, n_coh, n_rmw, n_corr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
