// Self-checking testbench of the CCI-like interconnect with four masters.
//
// The testbench plays the masters, their snoop answers and the L2. Each
// master holds a random "snoop view" (hit / owner) that the testbench sets
// before the transaction, so the expected outcome is known in advance:
//   * only the granted master's commands are served, and one grant at a time;
//   * a read snoops every master except the requester, with snp_inv set for
//     RD_UNIQUE and UPGRADE only;
//   * if another master owns the line, its four beats reach the requester
//     (cache-to-cache) and L2 is not touched; otherwise the beats come from L2;
//   * a write-back moves the requester's four beats into L2;
//   * done_shared reports whether any other master hit;
//   * masters requesting together are granted in round-robin order.
module tb_cci_interconnect;
  import mpsoc_pkg::*;

  localparam int NM = 4;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [NM-1:0] m_bus_req, m_bus_gnt, m_cmd_valid, m_rd_valid, m_done;
  cci_cmd_t m_cmd [NM];
  line_addr_t m_cmd_addr [NM];
  logic [BEAT_IDX_W-1:0] m_wb_beat, s_beat;
  beat_t m_wb_data [NM];
  beat_t m_rd_data;
  logic m_done_shared;
  logic [NM-1:0] s_valid, s_resp_valid, s_hit, s_owner;
  line_addr_t s_addr;
  logic s_inv;
  beat_t s_data [NM];
  logic l2_req_valid, l2_req_ready, l2_req_we, l2_wvalid, l2_wready, l2_rvalid, l2_done;
  line_addr_t l2_req_addr;
  beat_t l2_wdata, l2_rdata;

  cci_interconnect #(.NM(NM)) dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  // ---- L2 model ---------------------------------------------------------------
  beat_t l2mem [logic [LADDR_W+BEAT_IDX_W-1:0]];
  int l2_reads = 0, l2_writes = 0;
  function automatic beat_t l2_beat(line_addr_t a, int b);
    logic [LADDR_W+BEAT_IDX_W-1:0] k;
    k = {a, BEAT_IDX_W'(b)};
    return l2mem.exists(k) ? l2mem[k] : {4{a[25:0], 6'(b)}};
  endfunction
  initial begin
    l2_req_ready = 1; l2_wready = 0; l2_rvalid = 0; l2_rdata = '0; l2_done = 0;
    forever begin
      @(negedge clk);
      if (l2_req_valid) begin
        line_addr_t a;
        bit we;
        a = l2_req_addr; we = l2_req_we;
        @(negedge clk);
        l2_req_ready = 0;
        if (we) begin
          l2_writes++;
          for (int b = 0; b < BEATS; b++) begin
            l2_wready = 1;
            #1;
            if (l2_wvalid) l2mem[{a, BEAT_IDX_W'(b)}] = l2_wdata;
            else chk(0, "write beat without wvalid");
            @(negedge clk);
          end
          l2_wready = 0;
        end else begin
          l2_reads++;
          for (int b = 0; b < BEATS; b++) begin
            l2_rvalid = 1; l2_rdata = l2_beat(a, b);
            @(negedge clk);
          end
          l2_rvalid = 0;
        end
        l2_done = 1;
        @(negedge clk);
        l2_done = 0;
        l2_req_ready = 1;
      end
    end
  end

  // ---- snoop answers: registered view per master -------------------------------
  bit view_hit [NM], view_own [NM];
  beat_t own_line [NM][BEATS];
  int snooped [NM];
  bit last_inv;
  always @(posedge clk) begin
    for (int i = 0; i < NM; i++) begin
      s_resp_valid[i] <= s_valid[i];
      s_hit[i]   <= s_valid[i] && view_hit[i];
      s_owner[i] <= s_valid[i] && view_own[i];
      if (s_valid[i]) begin snooped[i]++; last_inv = s_inv; end
    end
  end
  always_comb for (int i = 0; i < NM; i++) s_data[i] = own_line[i][s_beat];

  // ---- one master transaction ------------------------------------------------------
  beat_t got [BEATS];
  task automatic transact(int m, cci_cmd_t c, line_addr_t a, output bit shared);
    int nb;
    m_cmd[m] = c; m_cmd_addr[m] = a; m_cmd_valid[m] = 1;
    nb = 0;
    while (!m_done[m]) begin
      @(posedge clk);
      #1;
      if (m_rd_valid[m] && nb < BEATS) begin got[nb] = m_rd_data; nb++; end
    end
    shared = m_done_shared;
    @(negedge clk);
    m_cmd_valid[m] = 0;
    if (c == CMD_RD_SHARED || c == CMD_RD_UNIQUE) chk(nb == BEATS, "four read beats");
    else chk(nb == 0, "no read beats for write-back or upgrade");
  endtask

  task automatic acquire(int m);
    m_bus_req[m] = 1;
    while (!m_bus_gnt[m]) @(negedge clk);
  endtask
  task automatic release_bus(int m);
    m_bus_req[m] = 0;
    @(negedge clk);
    @(negedge clk);
  endtask

  initial begin
    bit sh;
    int order [$];
    m_bus_req = '0; m_cmd_valid = '0;
    for (int i = 0; i < NM; i++) begin
      m_cmd[i] = CMD_RD_SHARED; m_cmd_addr[i] = '0; m_wb_data[i] = '0;
      view_hit[i] = 0; view_own[i] = 0; snooped[i] = 0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;

    for (int t = 0; t < 200; t++) begin
      int m, owner, r0, w0;
      cci_cmd_t c;
      line_addr_t a;
      bit any_hit;
      int sn0 [NM];
      m = $urandom % NM;
      c = cci_cmd_t'($urandom % 4);
      a = line_addr_t'($urandom % 64);
      owner = -1; any_hit = 0;
      for (int i = 0; i < NM; i++) begin
        view_hit[i] = (i != m) && ($urandom % 3 == 0);
        view_own[i] = 0;
        any_hit |= view_hit[i];
        for (int b = 0; b < BEATS; b++) own_line[i][b] = {$urandom, $urandom, $urandom, $urandom};
        m_wb_data[i] = '0;
      end
      if ($urandom % 2) begin
        for (int i = 0; i < NM; i++) if (view_hit[i] && owner < 0) begin owner = i; view_own[i] = 1; end
      end
      for (int i = 0; i < NM; i++) sn0[i] = snooped[i];
      r0 = l2_reads; w0 = l2_writes;
      acquire(m);
      chk($onehot(m_bus_gnt), "exactly one grant");
      if (c == CMD_WRITEBACK) begin
        beat_t wl [BEATS];
        for (int b = 0; b < BEATS; b++) wl[b] = {$urandom, $urandom, $urandom, $urandom};
        fork
          forever begin #1; m_wb_data[m] = wl[m_wb_beat]; @(m_wb_beat); end
          transact(m, c, a, sh);
        join_any
        disable fork;
        chk(l2_writes == w0 + 1, "write-back reaches L2");
        for (int b = 0; b < BEATS; b++) chk(l2mem[{a, BEAT_IDX_W'(b)}] == wl[b], "write-back data");
        for (int i = 0; i < NM; i++) chk(snooped[i] == sn0[i], "write-back does not snoop");
      end else begin
        transact(m, c, a, sh);
        for (int i = 0; i < NM; i++)
          chk(snooped[i] == sn0[i] + ((i != m) ? 1 : 0), "snoop goes to all others only");
        chk(last_inv == (c != CMD_RD_SHARED), "snoop invalidate flag");
        chk(sh == any_hit, "done_shared");
        if (c == CMD_UPGRADE) begin
          chk(l2_reads == r0, "upgrade does not read L2");
        end else if (owner >= 0) begin
          chk(l2_reads == r0, "cache-to-cache transfer bypasses L2");
          for (int b = 0; b < BEATS; b++) chk(got[b] == own_line[owner][b], "owner data");
        end else begin
          chk(l2_reads == r0 + 1, "L2 read on no owner");
          for (int b = 0; b < BEATS; b++) chk(got[b] == l2_beat(a, b), "L2 data");
        end
      end
      release_bus(m);
    end

    // Round-robin: all four ask at once; each gets the bus exactly once, in order
    for (int i = 0; i < NM; i++) view_hit[i] = 0;
    @(negedge clk);
    m_bus_req = '1;
    repeat (NM) begin
      int g;
      while (m_bus_gnt == '0) @(negedge clk);
      g = $clog2(m_bus_gnt);
      order.push_back(g);
      m_bus_req[g] = 0;
      @(negedge clk);
    end
    for (int k = 1; k < NM; k++) chk(order[k] == (order[k-1] + 1) % NM, "round-robin order");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
