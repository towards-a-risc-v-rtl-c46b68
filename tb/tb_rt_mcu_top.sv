// tb_rt_mcu_top: end-to-end test of the MCU at its default parameters
// (256 CLIC lines, 128 KiB scratchpad, 32 PLIC sources, 16 IOTLB entries).
//
// The testbench plays the core (an AXI master for loads/stores plus the CSR,
// trap and mret signals of the pipeline), the host (an AXI master with virtual
// addresses) and the outside slaves (two small scratchpads stand in for the
// host's shared memory and the peripherals). It walks through the operations of
// the design: SPM access, CLINT timer interrupt through the CLIC, a DMA copy
// whose completion interrupt goes PLIC -> meip -> CLIC -> trap and is claimed
// and completed, host access through the IOMMU and an IOMMU fault interrupt,
// contention of core and host at the scratchpad, a vectored (SHV) local
// interrupt, its pre-emption by a higher level (nesting), a lower level that
// must wait, tail-chaining through mnxti, the outbound ports and an unmapped
// address. Each mechanism is counted and one that never happened is a failure.
module tb_rt_mcu_top;
  import mcu_pkg::*;

  logic clk = 0, rst_n = 0, tick = 0;
  axi_req_t req, req2, hm_req, pe_req;
  axi_rsp_t rsp, rsp2, hm_rsp, pe_rsp;
  logic csr_v = 0, trap, trap_table, mret = 0;
  logic [1:0] csr_op = 0;
  logic [11:0] csr_a = 0;
  logic [63:0] csr_wd = 0, csr_rd, pc = 64'h7000_0400, trap_pc, trap_cause, mepc;
  logic [28:0] ext_irq = '0;
  logic [239:0] local_irq = '0;
  int checks = 0, failures = 0;

  rt_mcu_top dut (
    .clk_i(clk), .rst_ni(rst_n), .rtc_tick_i(tick),
    .core_req_i(req), .core_rsp_o(rsp),
    .csr_valid_i(csr_v), .csr_op_i(csr_op), .csr_addr_i(csr_a), .csr_wdata_i(csr_wd),
    .csr_rdata_o(csr_rd), .pc_i(pc), .trap_o(trap), .trap_pc_o(trap_pc),
    .trap_table_o(trap_table), .trap_cause_o(trap_cause), .mret_i(mret), .mepc_o(mepc),
    .host_req_i(req2), .host_rsp_o(rsp2),
    .host_mem_req_o(hm_req), .host_mem_rsp_i(hm_rsp),
    .periph_req_o(pe_req), .periph_rsp_i(pe_rsp),
    .ext_irq_i(ext_irq), .local_irq_i(local_irq));

  // stand-ins for the host shared memory and the peripherals
  spm #(.SIZE_BYTES(4096)) host_mem (.clk_i(clk), .rst_ni(rst_n), .axi_req_i(hm_req), .axi_rsp_o(hm_rsp));
  spm #(.SIZE_BYTES(4096)) periph   (.clk_i(clk), .rst_ni(rst_n), .axi_req_i(pe_req), .axi_rsp_o(pe_rsp));

  always #5 clk = ~clk;

  // ---- mechanism counters ----
  int n_timer, n_ext, n_dma, n_iommu_hit, n_iommu_fault, n_contention, n_vectored,
      n_nested, n_refused, n_tail, n_decerr, n_outbound;
  always @(posedge clk) if (rst_n && req.aw_valid && !rsp.aw_ready && req2.w_valid) n_contention++;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---- AXI4 master tasks (one transaction at a time) ----
  // Inputs are driven just after a rising edge and sampled at the falling edge,
  // so a handshake seen at the falling edge completes at the next rising edge.
  data_t wbuf [256];
  data_t rbuf [256];
  logic [1:0] last_resp;
  logic       proto_err;     // wrong id or RLAST position
  int         beat_cycles;   // cycles from the first to the last data beat
  int         first_lat;     // cycles from the address handshake to the first data/response

  task automatic axi_write(input addr_t a, input int n, input strb_t s = '1,
                           input logic [1:0] burst = BURST_INCR);
    int c;
    req.aw = '{id: 4'h3, addr: a, len: 8'(n - 1), size: 3'd3, burst: burst};
    req.aw_valid = 1;
    forever begin @(negedge clk); if (rsp.aw_ready) break; end
    @(posedge clk); #1 req.aw_valid = 0;
    for (int i = 0; i < n; i++) begin
      req.w = '{data: wbuf[i], strb: s, last: i == n - 1};
      req.w_valid = 1;
      forever begin @(negedge clk); if (rsp.w_ready) break; end
      @(posedge clk); #1;
    end
    req.w_valid = 0;
    req.b_ready = 1;
    c = 0;
    forever begin @(negedge clk); if (rsp.b_valid) break; c++; end
    first_lat = c;
    last_resp = rsp.b.resp;
    proto_err = rsp.b.id != 4'h3;
    @(posedge clk); #1;
    req.b_ready = 0;
  endtask

  task automatic axi_read(input addr_t a, input int n, input logic [2:0] sz = 3'd3,
                          input logic [1:0] burst = BURST_INCR);
    int i, first;
    req.ar = '{id: 4'h5, addr: a, len: 8'(n - 1), size: sz, burst: burst};
    req.ar_valid = 1;
    forever begin @(negedge clk); if (rsp.ar_ready) break; end
    @(posedge clk); #1 req.ar_valid = 0;
    req.r_ready = 1;
    i = 0; first = -1; last_resp = RESP_OKAY; proto_err = 0;
    for (int c = 0; c < 5000 && i < n; c++) begin
      @(negedge clk);
      if (rsp.r_valid) begin
        if (first < 0) begin first = c; first_lat = c; end
        rbuf[i] = rsp.r.data;
        if (rsp.r.resp != RESP_OKAY) last_resp = rsp.r.resp;
        if (rsp.r.id != 4'h5) proto_err = 1;
        if (rsp.r.last != (i == n - 1)) proto_err = 1;
        beat_cycles = c - first;
        i++;
      end
      @(posedge clk); #1;
    end
    if (i != n) proto_err = 1;
    req.r_ready = 0;
  endtask

  // ---- the same tasks for the host port ----
  data_t wbuf2 [256];
  data_t rbuf2 [256];
  logic [1:0] last_resp2;
  logic       proto_err2;     // wrong id or RLAST position
  int         beat_cycles2;   // cycles from the first to the last data beat
  int         first_lat2;     // cycles from the address handshake to the first data/response

  task automatic axi_write2(input addr_t a, input int n, input strb_t s = '1,
                           input logic [1:0] burst = BURST_INCR);
    int c;
    req2.aw = '{id: 4'h3, addr: a, len: 8'(n - 1), size: 3'd3, burst: burst};
    req2.aw_valid = 1;
    forever begin @(negedge clk); if (rsp2.aw_ready) break; end
    @(posedge clk); #1 req2.aw_valid = 0;
    for (int i = 0; i < n; i++) begin
      req2.w = '{data: wbuf2[i], strb: s, last: i == n - 1};
      req2.w_valid = 1;
      forever begin @(negedge clk); if (rsp2.w_ready) break; end
      @(posedge clk); #1;
    end
    req2.w_valid = 0;
    req2.b_ready = 1;
    c = 0;
    forever begin @(negedge clk); if (rsp2.b_valid) break; c++; end
    first_lat2 = c;
    last_resp2 = rsp2.b.resp;
    proto_err2 = rsp2.b.id != 4'h3;
    @(posedge clk); #1;
    req2.b_ready = 0;
  endtask

  task automatic axi_read2(input addr_t a, input int n, input logic [2:0] sz = 3'd3,
                          input logic [1:0] burst = BURST_INCR);
    int i, first;
    req2.ar = '{id: 4'h5, addr: a, len: 8'(n - 1), size: sz, burst: burst};
    req2.ar_valid = 1;
    forever begin @(negedge clk); if (rsp2.ar_ready) break; end
    @(posedge clk); #1 req2.ar_valid = 0;
    req2.r_ready = 1;
    i = 0; first = -1; last_resp2 = RESP_OKAY; proto_err2 = 0;
    for (int c = 0; c < 5000 && i < n; c++) begin
      @(negedge clk);
      if (rsp2.r_valid) begin
        if (first < 0) begin first = c; first_lat2 = c; end
        rbuf2[i] = rsp2.r.data;
        if (rsp2.r.resp != RESP_OKAY) last_resp2 = rsp2.r.resp;
        if (rsp2.r.id != 4'h5) proto_err2 = 1;
        if (rsp2.r.last != (i == n - 1)) proto_err2 = 1;
        beat_cycles2 = c - first;
        i++;
      end
      @(posedge clk); #1;
    end
    if (i != n) proto_err2 = 1;
    req2.r_ready = 0;
  endtask

  // ---- core helpers ----
  task automatic wr32(input addr_t a, input logic [31:0] d);
    wbuf[0] = a[2] ? {d, 32'h0} : {32'h0, d};
    axi_write(a, 1, a[2] ? 8'hF0 : 8'h0F);
  endtask

  task automatic rd32(input addr_t a, output logic [31:0] d);
    axi_read(a, 1, 3'd2);
    d = a[2] ? rbuf[0][63:32] : rbuf[0][31:0];
  endtask

  task automatic csr(input logic [1:0] op, input logic [11:0] a, input logic [63:0] d,
                     output logic [63:0] r);
    csr_v = 1; csr_op = op; csr_a = a; csr_wd = d;
    #1 r = csr_rd;
    @(posedge clk); #1;
    csr_v = 0; csr_op = 0;
  endtask

  task automatic do_mret();
    mret = 1;
    @(posedge clk); #1;
    mret = 0;
  endtask

  // wait for a trap; returns the cause id (-1 on timeout)
  task automatic wait_trap(input int max, output int id, output logic [63:0] tpc, output logic tbl);
    id = -1;
    for (int c = 0; c < max; c++) begin
      @(negedge clk);
      if (trap) begin
        id = int'(trap_cause[11:0]); tpc = trap_pc; tbl = trap_table;
        @(posedge clk); #1;
        return;
      end
    end
  endtask

  task automatic clic_line(input int i, input logic [7:0] ctl, input logic shv, input logic edge_b);
    wr32(CLIC_BASE + 64'h1000 + 64'(4 * i), {ctl, 5'b0, 1'b0, edge_b, shv, 7'b0, 1'b1, 8'h0});
  endtask

  task automatic pulse_local(input int line);
    local_irq[line - 16] = 1;
    @(posedge clk); #1;
    local_irq[line - 16] = 0;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam addr_t MTVEC = 64'h7000_1000;
  localparam addr_t MTVT  = 64'h7000_2000;
  logic [63:0] r, tpc, saved_mcause;
  logic [31:0] v;
  logic tbl;
  int id;
  data_t d [16];

  initial begin
    req = '0; req2 = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    tick = 1;

    // ---------- core <-> scratchpad ----------
    for (int i = 0; i < 16; i++) begin d[i] = {$urandom, $urandom}; wbuf[i] = d[i]; end
    axi_write(SPM_BASE, 16);
    axi_read(SPM_BASE, 16);
    begin
      int bad = 0;
      for (int i = 0; i < 16; i++) if (rbuf[i] != d[i]) bad++;
      check(bad == 0 && last_resp == RESP_OKAY, "core SPM burst");
    end

    // ---------- interrupt set-up ----------
    csr(2'd1, 12'h305, MTVEC, r);
    csr(2'd1, 12'h307, MTVT, r);
    csr(2'd2, 12'h300, 64'h8, r);                  // MIE
    wr32(CLIC_BASE, 8);                            // nlbits = 8: level = clicintctl
    clic_line(IRQ_MTI, 8'h40, 0, 0);
    clic_line(IRQ_MEI, 8'h60, 0, 0);
    clic_line(20, 8'h80, 1, 1);                    // vectored, edge
    clic_line(21, 8'hC0, 0, 1);                    // higher level, edge
    clic_line(22, 8'h50, 0, 1);
    clic_line(23, 8'h58, 0, 1);
    rd32(CLIC_BASE + 64'h1000 + 4 * 20, v);
    check(v == 32'h80C3_0100, $sformatf("CLIC line 20 config %h", v));

    // ---------- CLINT timer -> CLIC line 7 -> trap ----------
    wr32(CLINT_BASE + 64'h4000, 32'd300);
    wr32(CLINT_BASE + 64'h4004, 32'd0);
    wait_trap(2000, id, tpc, tbl);
    check(id == IRQ_MTI && tpc == MTVEC && !tbl, $sformatf("timer trap id %0d pc %h", id, tpc));
    rd32(CLINT_BASE + 64'hBFF8, v);
    check(v >= 300, "mtime passed mtimecmp");
    if (id == IRQ_MTI) n_timer++;
    wr32(CLINT_BASE + 64'h4004, 32'hFFFF_FFFF);    // handler: push the compare away
    repeat (4) @(posedge clk); #1;
    do_mret();
    repeat (4) @(posedge clk); #1;
    check(!trap, "timer interrupt withdrawn");

    // ---------- DMA copy -> PLIC source 1 -> meip -> CLIC line 11 ----------
    wr32(PLIC_BASE + 64'h4, 1);                    // priority source 1
    wr32(PLIC_BASE + 64'h8, 2);                    // priority source 2
    wr32(PLIC_BASE + 64'h2000, 32'b110);           // enable 1, 2 for M
    wr32(DMA_BASE + 64'h00, 32'h7000_0000);
    wr32(DMA_BASE + 64'h04, 0);
    wr32(DMA_BASE + 64'h08, 32'h7000_4000);
    wr32(DMA_BASE + 64'h0C, 0);
    wr32(DMA_BASE + 64'h10, 128);
    wr32(DMA_BASE + 64'h14, 1);
    wait_trap(2000, id, tpc, tbl);
    check(id == IRQ_MEI, $sformatf("DMA completion trap id %0d", id));
    rd32(PLIC_BASE + 64'h20_0004, v);
    check(v == 1, $sformatf("PLIC claim %0d exp 1 (DMA)", v));
    if (id == IRQ_MEI && v == 1) n_ext++;
    wr32(DMA_BASE + 64'h18, 2);                    // clear DMA done
    wr32(PLIC_BASE + 64'h20_0004, 1);              // complete
    repeat (4) @(posedge clk); #1;
    do_mret();
    axi_read(SPM_BASE + 64'h4000, 16);
    begin
      int bad = 0;
      for (int i = 0; i < 16; i++) if (rbuf[i] != d[i]) bad++;
      check(bad == 0, $sformatf("DMA copy mismatches %0d", bad));
      if (bad == 0) n_dma++;
    end

    // ---------- host access through the IOMMU ----------
    // VA page 0x40000 -> PA page 0x70004 (the DMA destination), read/write
    wr32(IOMMU_BASE + 64'h00, 32'h0004_0000);
    wr32(IOMMU_BASE + 64'h04, 0);
    wr32(IOMMU_BASE + 64'h08, 32'h0007_0004);
    wr32(IOMMU_BASE + 64'h0C, 0);
    wr32(IOMMU_BASE + 64'h10, 7);
    wr32(IOMMU_BASE + 64'h800, 1);
    axi_read2(64'h4000_0000, 16);
    begin
      int bad = 0;
      for (int i = 0; i < 16; i++) if (rbuf2[i] != d[i]) bad++;
      check(bad == 0 && last_resp2 == RESP_OKAY, $sformatf("host read via IOMMU, %0d bad", bad));
      if (bad == 0) n_iommu_hit++;
    end
    // host and core write the scratchpad at the same time
    for (int i = 0; i < 16; i++) begin wbuf2[i] = 64'(1000 + i); wbuf[i] = 64'(2000 + i); end
    fork
      axi_write2(64'h4000_0100, 16);
      begin repeat (2) @(posedge clk); #1; axi_write(SPM_BASE + 64'h300, 16); end
    join
    axi_read(SPM_BASE + 64'h4100, 16);
    check(rbuf[0] == 1000 && rbuf[15] == 1015, "host write landed at the physical address");
    axi_read(SPM_BASE + 64'h300, 16);
    check(rbuf[0] == 2000 && rbuf[15] == 2015, "core write alongside");
    // host miss -> SLVERR and IOMMU fault -> PLIC source 2 -> trap
    axi_read2(64'h5000_0000, 2);
    check(last_resp2 == RESP_SLVERR, "host miss SLVERR");
    wait_trap(500, id, tpc, tbl);
    check(id == IRQ_MEI, $sformatf("IOMMU fault trap id %0d", id));
    rd32(PLIC_BASE + 64'h20_0004, v);
    check(v == 2, $sformatf("PLIC claim %0d exp 2 (IOMMU)", v));
    rd32(IOMMU_BASE + 64'h808, v);
    check(v == 32'h5000_0000, "fault address");
    if (v == 32'h5000_0000) n_iommu_fault++;
    wr32(IOMMU_BASE + 64'h804, 3);
    wr32(PLIC_BASE + 64'h20_0004, 2);
    repeat (4) @(posedge clk); #1;
    do_mret();

    // ---------- vectored interrupt, nesting, refusal, tail-chaining ----------
    pc = 64'h7000_0500;
    pulse_local(20);
    wait_trap(50, id, tpc, tbl);
    check(id == 20 && tbl && tpc == MTVT + 8 * 20, $sformatf("vectored trap id %0d pc %h", id, tpc));
    if (id == 20 && tbl) n_vectored++;
    csr(2'd0, 12'hFB1, 0, r);
    check(r[31:24] == 8'h80, "mil 0x80 in handler");
    csr(2'd0, 12'h342, 0, saved_mcause);           // handler saves mcause, as software
    csr(2'd2, 12'h300, 64'h8, r);                  // must before re-enabling interrupts
    pulse_local(22);                                // level 0x50: must wait
    wait_trap(20, id, tpc, tbl);
    check(id == -1, "lower level does not pre-empt");
    if (id == -1) n_refused++;
    pc = 64'h7000_0600;
    pulse_local(21);                                // level 0xC0: pre-empts
    wait_trap(50, id, tpc, tbl);
    check(id == 21 && !tbl && tpc == MTVEC, $sformatf("nested trap id %0d", id));
    csr(2'd0, 12'h342, 0, r);
    check(r[23:16] == 8'h80, "nested mcause.mpil = 0x80");
    if (id == 21 && r[23:16] == 8'h80) n_nested++;
    do_mret();
    check(mepc == 64'h7000_0600, "mepc of the nested trap");
    csr(2'd0, 12'hFB1, 0, r);
    check(r[31:24] == 8'h80, "level back to 0x80");
    // still in the level-0x80 handler with MIE=1: 22 waits. Disable MIE, restore
    // mcause, and let the handler pick up 23 and then 22 by mnxti before returning.
    csr(2'd3, 12'h300, 64'h8, r);
    csr(2'd1, 12'h342, saved_mcause, r);
    pulse_local(23);
    repeat (3) @(posedge clk); #1;
    csr(2'd2, 12'h345, 64'h0, r);
    check(r == MTVT + 8 * 23, $sformatf("mnxti -> line 23 entry %h", r));
    if (r == MTVT + 8 * 23) n_tail++;
    repeat (3) @(posedge clk); #1;
    csr(2'd2, 12'h345, 64'h0, r);
    check(r == MTVT + 8 * 22, $sformatf("mnxti -> line 22 entry %h", r));
    if (r == MTVT + 8 * 22) n_tail++;
    repeat (3) @(posedge clk); #1;
    csr(2'd2, 12'h345, 64'h0, r);
    check(r == 0, "mnxti -> nothing left");
    do_mret();
    csr(2'd0, 12'hFB1, 0, r);
    check(r[31:24] == 8'h00, "back at level 0");

    // ---------- outbound ports and unmapped address ----------
    wbuf[0] = 64'hFEED_F00D;
    axi_write(HOST_BASE + 64'h40, 1);
    axi_read(HOST_BASE + 64'h40, 1);
    check(rbuf[0] == 64'hFEED_F00D && host_mem.mem[8] == 64'hFEED_F00D, "host shared memory");
    wbuf[0] = 64'h0000_0041;
    axi_write(PERIPH_BASE + 64'h8, 1);
    check(periph.mem[1] == 64'h41, "peripheral port");
    if (host_mem.mem[8] == 64'hFEED_F00D && periph.mem[1] == 64'h41) n_outbound++;
    axi_read(64'h0000_0000_0000_0100, 1);
    check(last_resp == RESP_DECERR, "unmapped address DECERR");
    if (last_resp == RESP_DECERR) n_decerr++;

    // ---------- every mechanism happened ----------
    $display("mechanisms: timer=%0d ext=%0d dma=%0d iommu_hit=%0d iommu_fault=%0d contention=%0d vectored=%0d nested=%0d refused=%0d tail_chain=%0d outbound=%0d decerr=%0d",
             n_timer, n_ext, n_dma, n_iommu_hit, n_iommu_fault, n_contention, n_vectored,
             n_nested, n_refused, n_tail, n_outbound, n_decerr);
    check(n_timer > 0, "timer interrupt happened");
    check(n_ext > 0, "PLIC external interrupt happened");
    check(n_dma > 0, "DMA copy happened");
    check(n_iommu_hit > 0, "IOMMU translation happened");
    check(n_iommu_fault > 0, "IOMMU fault happened");
    check(n_contention > 0, "interconnect contention happened");
    check(n_vectored > 0, "vectored interrupt happened");
    check(n_nested > 0, "nesting happened");
    check(n_refused > 0, "lower-level refusal happened");
    check(n_tail > 0, "tail-chaining happened");
    check(n_outbound > 0, "outbound access happened");
    check(n_decerr > 0, "decode error happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
