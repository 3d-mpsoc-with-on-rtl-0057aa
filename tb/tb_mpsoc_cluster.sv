// End-to-end testbench of one eight-core cluster at its full size (32 KB L1s,
// 1 MB 16-way L2, 4x2 mesh), with a behavioural main memory on the L2 port.
//
// Eight core processes run at once. Each one
//   * loads and stores words of a small shared region. Every word has one
//     writer (word index mod 8), so lines are shared and migrate between
//     caches while each word's value stays well defined. A stored value
//     encodes {writer, address, sequence number};
//   * fetches instructions from a code region that core 0 sometimes rewrites,
//     so instruction caches get invalidated by snoops;
//   * sends messages over the NoC to random cores.
// Core 0 also writes 40 lines that fall into one L2 set, which overflows the
// 16 ways and forces dirty L2 evictions to memory.
//
// Checks: a load of a word the core wrote itself returns its last value; a
// load of another core's word returns that writer's value with a sequence
// number no older than the one this core saw before and no newer than the
// writer issued (per-location coherence). After the traffic, every core reads
// every word and must see its final value. Every message must reach the core
// it was sent to. Each mechanism of the design must occur at least once:
// cache-to-cache transfer, L2 read, L1 write-back, upgrade, invalidating snoop
// hit, instruction-cache invalidation, L2 miss, L2 dirty eviction, bus
// contention, NoC back-pressure.
module tb_mpsoc_cluster;
  import mpsoc_pkg::*;

  localparam int NC = 8;
  localparam logic [31:0] SHARED = 32'h0001_0000;  // 16 lines
  localparam logic [31:0] CODE   = 32'h0002_0000;  // 8 lines
  localparam logic [31:0] FAR    = 32'h0040_0000;  // L2 set-conflict lines
  localparam int SH_WORDS = 16 * 16;
  localparam int CODE_WORDS = 8 * 16;
  localparam int OPS = 400;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [NC-1:0] ireq_valid, ireq_ready, iresp_valid;
  logic [31:0]   ireq_addr [NC];
  logic [31:0]   iresp_rdata [NC];
  logic [NC-1:0] dreq_valid, dreq_ready, dreq_we, dresp_valid;
  logic [31:0]   dreq_addr [NC];
  logic [31:0]   dreq_wdata [NC];
  logic [31:0]   dresp_rdata [NC];
  flit_t         inj_flit [NC];
  flit_t         ej_flit [NC];
  logic [NC-1:0] inj_valid, inj_ready, ej_valid, ej_ready;
  logic mem_req_valid, mem_req_ready, mem_req_we, mem_wvalid, mem_wready, mem_rvalid;
  line_addr_t mem_req_addr;
  beat_t mem_wdata, mem_rdata;
  int unsigned mem_reads, mem_writes;

  mpsoc_cluster dut (.*);

  mem_model u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req_we(mem_req_we), .req_addr(mem_req_addr), .wvalid(mem_wvalid),
    .wready(mem_wready), .wdata(mem_wdata), .rvalid(mem_rvalid), .rdata(mem_rdata),
    .reads(mem_reads), .writes(mem_writes)
  );

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  // ---------------- reference -----------------------------------------------------
  logic [31:0] last_val [logic [29:0]];   // final value of each written word
  int          issued   [logic [29:0]];   // writes issued per word
  int          seen     [NC][logic [29:0]];

  function automatic logic [31:0] init_word(logic [31:0] a);
    return {a[31:2], 2'b00} ^ 32'hA500_0000;
  endfunction
  function automatic int writer_of(logic [31:0] a);
    return (a >= CODE && a < CODE + CODE_WORDS * 4) ? 0 : int'(a[4:2]);
  endfunction
  function automatic logic [31:0] ref_word(logic [31:0] a);
    return last_val.exists(a[31:2]) ? last_val[a[31:2]] : init_word(a);
  endfunction

  // check a value read by core c at address a while others may be writing
  task automatic check_read(int c, logic [31:0] a, logic [31:0] v);
    int w, s;
    w = writer_of(a);
    if (w == c && !(a >= CODE && a < CODE + CODE_WORDS * 4 && c != 0)) begin
      chk(v == ref_word(a), $sformatf("core %0d own word %h: got %h want %h", c, a, v, ref_word(a)));
      return;
    end
    if (v == init_word(a)) s = 0;
    else begin
      chk(v[31:28] == 4'(w) && v[27:16] == a[13:2],
          $sformatf("core %0d word %h: foreign value %h", c, a, v));
      s = int'(v[15:0]);
    end
    chk(s <= (issued.exists(a[31:2]) ? issued[a[31:2]] : 0),
        $sformatf("core %0d word %h: value from the future", c, a));
    chk(s >= (seen[c].exists(a[31:2]) ? seen[c][a[31:2]] : 0),
        $sformatf("core %0d word %h: went back in time (%0d)", c, a, s));
    seen[c][a[31:2]] = s;
  endtask

  // ---------------- core ports ---------------------------------------------------------
  task automatic dacc(int c, bit we, logic [31:0] a, logic [31:0] d, output logic [31:0] v);
    @(negedge clk);
    dreq_valid[c] = 1; dreq_we[c] = we; dreq_addr[c] = a; dreq_wdata[c] = d;
    do @(posedge clk); while (!dreq_ready[c]);
    @(negedge clk);
    dreq_valid[c] = 0;
    while (!dresp_valid[c]) @(negedge clk);
    v = dresp_rdata[c];
  endtask

  task automatic store(int c, logic [31:0] a);
    logic [31:0] v, d;
    int s;
    s = (issued.exists(a[31:2]) ? issued[a[31:2]] : 0) + 1;
    issued[a[31:2]] = s;
    d = {4'(c), a[13:2], 16'(s)};
    dacc(c, 1, a, d, v);
    last_val[a[31:2]] = d;
  endtask

  task automatic load(int c, logic [31:0] a);
    logic [31:0] v;
    dacc(c, 0, a, 0, v);
    check_read(c, a, v);
  endtask

  task automatic fetch(int c, logic [31:0] a);
    @(negedge clk);
    ireq_valid[c] = 1; ireq_addr[c] = a;
    do @(posedge clk); while (!ireq_ready[c]);
    @(negedge clk);
    ireq_valid[c] = 0;
    while (!iresp_valid[c]) @(negedge clk);
    check_read(c, a, iresp_rdata[c]);
  endtask

  task automatic core_run(int c);
    for (int i = 0; i < OPS; i++) begin
      int r;
      logic [31:0] a;
      r = $urandom % 100;
      if (r < 60) begin
        a = SHARED + 32'(($urandom % SH_WORDS) * 4);
        if ($urandom % 2 && writer_of(a) == c) store(c, a); else load(c, a);
      end else if (r < 80) begin
        // own words only, so that stores happen often
        a = SHARED + 32'((($urandom % (SH_WORDS / 8)) * 8 + c) * 4);
        store(c, a);
      end else if (r < 95 || c != 0) begin
        fetch(c, CODE + 32'(($urandom % CODE_WORDS) * 4));
      end else begin
        store(c, CODE + 32'(($urandom % CODE_WORDS) * 4));
      end
    end
  endtask

  // ---------------- NoC traffic -----------------------------------------------------------
  int sent_to [NC];
  int got_at [NC];
  int noc_misroute = 0;
  always @(posedge clk) if (rst_n)
    for (int d = 0; d < NC; d++)
      if (ej_valid[d] && ej_ready[d]) begin
        if (ej_flit[d].kind inside {FL_TAIL, FL_SINGLE}) got_at[d]++;
        if (int'(ej_flit[d].data[31:28]) != d) noc_misroute++;
      end
  always @(negedge clk) ej_ready = NC'($urandom) | NC'($urandom);

  task automatic noc_run(int s);
    for (int n = 0; n < 40; n++) begin
      int d, len;
      d = $urandom % NC;
      len = $urandom % 4 + 1;
      sent_to[d]++;
      for (int i = 0; i < len; i++) begin
        flit_t f;
        f.kind = (len == 1) ? FL_SINGLE : (i == 0) ? FL_HEAD : (i == len-1) ? FL_TAIL : FL_BODY;
        f.data = {4'(d), 22'(0), 3'(d / 4), 3'(d % 4)};
        inj_flit[s] = f; inj_valid[s] = 1;
        do @(posedge clk); while (!inj_ready[s]);
        @(negedge clk);
        inj_valid[s] = 0;
      end
    end
  endtask

  // ---------------- mechanism counters ------------------------------------------------------
  int n_c2c, n_l2rd, n_wb, n_upg, n_inv_hit, n_icache_inv, n_contention, n_noc_bp;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_cci.state_q == dut.u_cci.C_SNOOP_RESP) begin
      if (dut.u_cci.any_owner && dut.u_cci.cmd_q != CMD_UPGRADE) n_c2c++;
      if (!dut.u_cci.any_owner && dut.u_cci.cmd_q != CMD_UPGRADE) n_l2rd++;
      if (dut.u_cci.cmd_q == CMD_UPGRADE) n_upg++;
      if (dut.u_cci.s_inv && |(dut.u_cci.s_hit & dut.u_cci.s_resp_valid)) n_inv_hit++;
      for (int c = 0; c < NC; c++)
        if (dut.u_cci.s_inv && dut.snp_hit[2*c+1] && dut.snp_resp_valid[2*c+1]) n_icache_inv++;
    end
    if (dut.u_cci.state_q == dut.u_cci.C_GRANT && dut.u_cci.m_cmd_valid[dut.u_cci.gidx_q] &&
        dut.u_cci.m_cmd[dut.u_cci.gidx_q] == CMD_WRITEBACK) n_wb++;
    if ($countones(dut.bus_req) > 1) n_contention++;
    if (|(inj_valid & ~inj_ready)) n_noc_bp++;
  end

  initial begin
    logic [31:0] v;
    int mr0, mw0;
    ireq_valid = '0; dreq_valid = '0; dreq_we = '0; inj_valid = '0; ej_ready = '1;
    for (int c = 0; c < NC; c++) begin
      ireq_addr[c] = '0; dreq_addr[c] = '0; dreq_wdata[c] = '0; inj_flit[c] = '0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);

    fork
      core_run(0); core_run(1); core_run(2); core_run(3);
      core_run(4); core_run(5); core_run(6); core_run(7);
      noc_run(0); noc_run(1); noc_run(2); noc_run(3);
      noc_run(4); noc_run(5); noc_run(6); noc_run(7);
    join

    // L2 set overflow: 40 dirty lines 64 KB apart (one L2 set, and one L1 set)
    mr0 = mem_reads; mw0 = mem_writes;
    for (int i = 0; i < 40; i++) store(0, FAR + 32'(i) * 32'h0001_0000);
    for (int i = 0; i < 40; i++) load(1, FAR + 32'(i) * 32'h0001_0000);

    // Final coherence sweep: every core reads every word
    for (int c = 0; c < NC; c++) begin
      for (int w = 0; w < SH_WORDS; w++) begin
        logic [31:0] a;
        a = SHARED + 32'(w * 4);
        dacc(c, 0, a, 0, v);
        chk(v == ref_word(a), $sformatf("final core %0d word %h: got %h want %h", c, a, v, ref_word(a)));
      end
      for (int w = 0; w < CODE_WORDS; w += 3) begin
        logic [31:0] a;
        a = CODE + 32'(w * 4);
        fetch(c, a);
        chk(iresp_rdata[c] == ref_word(a), $sformatf("final fetch core %0d word %h", c, a));
      end
    end

    repeat (50) @(negedge clk);
    for (int d = 0; d < NC; d++) chk(got_at[d] == sent_to[d], $sformatf("messages at core %0d: %0d of %0d", d, got_at[d], sent_to[d]));
    chk(noc_misroute == 0, "messages delivered to the wrong core");

    $display("mechanisms: c2c %0d, L2 reads %0d, L1 write-backs %0d, upgrades %0d, inval hits %0d, I-cache inval %0d, L2 misses %0d, L2 dirty evictions %0d, bus contention %0d, NoC back-pressure %0d",
             n_c2c, n_l2rd, n_wb, n_upg, n_inv_hit, n_icache_inv, mem_reads, mem_writes, n_contention, n_noc_bp);
    chk(n_c2c > 0, "cache-to-cache transfer never happened");
    chk(n_l2rd > 0, "L2 read never happened");
    chk(n_wb > 0, "L1 write-back never happened");
    chk(n_upg > 0, "upgrade never happened");
    chk(n_inv_hit > 0, "invalidating snoop never hit");
    chk(n_icache_inv > 0, "instruction cache was never invalidated");
    chk(mem_reads > 0, "L2 miss never happened");
    chk(mem_writes - mw0 > 0, "L2 dirty eviction never happened");
    chk(n_contention > 0, "bus contention never happened");
    chk(n_noc_bp > 0, "NoC back-pressure never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
