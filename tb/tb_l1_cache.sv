// Self-checking testbench of the L1 cache at its full size (32 KB, 2 ways).
//
// The testbench plays the interconnect: it grants the bus at once, serves
// fills from a reference memory, takes write-backs into it and issues snoops
// of its own between core accesses. Every load is compared with a word-level
// reference of what memory must hold. Directed sequences check the MOESI
// behaviour that can be seen from outside:
//   * a load filled with done_shared = 0 is held E, so a following store uses
//     no bus command;
//   * a shared snoop of a modified line reports an owner and returns the
//     stored data; a store to that (now O) line sends an UPGRADE;
//   * an invalidating snoop removes the line, so the next load misses;
//   * the hit latency is two cycles.
// A random phase over six lines per set in four sets forces LRU evictions and
// dirty write-backs.
module tb_l1_cache;
  import mpsoc_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic req_valid, req_ready, req_we, resp_valid;
  logic [31:0] req_addr, req_wdata, resp_rdata;
  logic bus_req, bus_gnt, cmd_valid, rd_valid, done, done_shared;
  cci_cmd_t cmd;
  line_addr_t cmd_addr;
  logic [BEAT_IDX_W-1:0] wb_beat, snp_beat;
  beat_t wb_data, rd_data, snp_data;
  logic snp_valid, snp_inv, snp_resp_valid, snp_hit, snp_owner;
  line_addr_t snp_addr;

  l1_cache dut (.*);

  int checks = 0, failures = 0;
  int n_cmd [4];
  beat_t bmem [logic [LADDR_W+BEAT_IDX_W-1:0]];   // memory behind the bus
  logic [31:0] wref [logic [29:0]];               // what every word must read

  function automatic logic [31:0] init_word(logic [31:0] a);
    return a ^ 32'hA500_0000;
  endfunction
  function automatic beat_t mem_beat(line_addr_t la, int b);
    logic [LADDR_W+BEAT_IDX_W-1:0] k;
    beat_t v;
    k = {la, BEAT_IDX_W'(b)};
    if (bmem.exists(k)) return bmem[k];
    for (int w = 0; w < 4; w++) v[w*32 +: 32] = init_word({la, OFF_W'(b*16 + w*4)});
    return v;
  endfunction
  function automatic logic [31:0] ref_word(logic [31:0] a);
    return wref.exists(a[31:2]) ? wref[a[31:2]] : init_word({a[31:2], 2'b00});
  endfunction

  // ---------------- bus model -------------------------------------------------
  logic next_shared = 1'b0;   // done_shared answer for the next shared read
  logic bus_busy = 1'b0;

  initial begin
    bus_gnt = 0; rd_valid = 0; rd_data = '0; done = 0; done_shared = 0; wb_beat = '0;
    forever begin
      @(negedge clk);
      bus_gnt = bus_req;
      if (bus_req && cmd_valid && !bus_busy) begin
        cci_cmd_t c;
        line_addr_t a;
        bus_busy = 1;
        c = cmd; a = cmd_addr;
        n_cmd[c]++;
        if (c == CMD_WRITEBACK) begin
          for (int b = 0; b < BEATS; b++) begin
            wb_beat = BEAT_IDX_W'(b);
            #1;
            bmem[{a, BEAT_IDX_W'(b)}] = wb_data;
            @(negedge clk);
          end
        end else if (c != CMD_UPGRADE) begin
          for (int b = 0; b < BEATS; b++) begin
            rd_valid = 1; rd_data = mem_beat(a, b);
            @(negedge clk);
          end
          rd_valid = 0;
        end
        done = 1; done_shared = next_shared;
        @(negedge clk);
        done = 0;
        bus_busy = 0;
        bus_gnt = bus_req;
      end
    end
  end

  // ---------------- core side ------------------------------------------------
  int last_lat;
  task automatic access(bit we, logic [31:0] a, logic [31:0] d);
    int cyc;
    @(negedge clk);
    req_valid = 1; req_we = we; req_addr = a; req_wdata = d;
    do @(posedge clk); while (!req_ready);
    @(negedge clk);
    req_valid = 0;
    cyc = 1;
    while (!resp_valid) begin @(negedge clk); cyc++; end
    last_lat = cyc;
    if (we) wref[a[31:2]] = d;
    else begin
      checks++;
      if (resp_rdata !== ref_word(a)) begin
        failures++;
        $display("FAIL load %h: got %h want %h", a, resp_rdata, ref_word(a));
      end
    end
  endtask

  // Snoop from the testbench; returns hit/owner and, for an owner, the line.
  task automatic snoop(line_addr_t la, bit inv, output bit hit, output bit own);
    @(negedge clk);
    snp_valid = 1; snp_addr = la; snp_inv = inv;
    @(negedge clk);
    snp_valid = 0;
    hit = snp_hit; own = snp_owner;
    if (!snp_resp_valid) begin failures++; $display("FAIL no snoop answer"); end
    if (own) begin
      for (int b = 0; b < BEATS; b++) begin
        snp_beat = BEAT_IDX_W'(b);
        #1;
        checks++;
        for (int w = 0; w < 4; w++)
          if (snp_data[w*32 +: 32] !== ref_word({la, OFF_W'(b*16 + w*4)})) begin
            failures++;
            $display("FAIL snoop data line %h beat %0d word %0d", la, b, w);
          end
        bmem[{la, BEAT_IDX_W'(b)}] = snp_data;   // the snooper now holds it
      end
    end
  endtask

  task automatic expect_eq(string what, int got, int want);
    checks++;
    if (got != want) begin
      failures++;
      $display("FAIL %s: got %0d want %0d", what, got, want);
    end
  endtask

  initial begin
    bit h, o;
    int c0 [4];
    req_valid = 0; req_we = 0; req_addr = '0; req_wdata = '0;
    snp_valid = 0; snp_addr = '0; snp_inv = 0; snp_beat = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // E state: clean exclusive fill, then a silent store
    next_shared = 0;
    access(0, 32'h0000_1000, 0);
    c0 = n_cmd;
    access(1, 32'h0000_1004, 32'hDEAD_BEEF);
    expect_eq("bus commands for a store to an E line", n_cmd.sum() - c0.sum(), 0);
    access(0, 32'h0000_1004, 0);
    expect_eq("hit latency", last_lat, 2);

    // M -> O on a shared snoop: owner supplies the data
    snoop(line_addr_t'(32'h0000_1000 >> 6), 0, h, o);
    expect_eq("snoop hit on M line", h, 1);
    expect_eq("snoop owner on M line", o, 1);
    // store to the O line must upgrade
    c0 = n_cmd;
    access(1, 32'h0000_1008, 32'h1234_5678);
    expect_eq("upgrade for a store to an O line", n_cmd[CMD_UPGRADE] - c0[CMD_UPGRADE], 1);
    // invalidating snoop, owner again (now M)
    snoop(line_addr_t'(32'h0000_1000 >> 6), 1, h, o);
    expect_eq("snoop owner on M line (inv)", o, 1);
    c0 = n_cmd;
    access(0, 32'h0000_1008, 0);
    expect_eq("load after invalidation misses", n_cmd[CMD_RD_SHARED] - c0[CMD_RD_SHARED], 1);
    // that fill is E; a shared snoop moves it to S without supplying data,
    // so a store then needs an upgrade
    snoop(line_addr_t'(32'h0000_1000 >> 6), 0, h, o);
    expect_eq("snoop of an E line is no owner", o, 0);
    c0 = n_cmd;
    access(1, 32'h0000_100C, 32'hCAFE_F00D);
    expect_eq("store to S line upgrades", n_cmd[CMD_UPGRADE] - c0[CMD_UPGRADE], 1);

    // Random phase: 6 lines x 4 sets, 2 ways -> evictions and write-backs
    c0 = n_cmd;
    for (int i = 0; i < 1500; i++) begin
      logic [31:0] a;
      a = (($urandom % 6) << 14) | (($urandom % 4) << 6) | (($urandom % 16) << 2);
      next_shared = $urandom % 2;
      if ($urandom % 10 == 0) begin
        snoop(line_addr_t'(a >> 6), $urandom % 2, h, o);
      end else begin
        access($urandom % 3 == 0, a, $urandom);
      end
    end
    $display("L1 random phase: rd_shared %0d rd_unique %0d upgrade %0d writeback %0d",
             n_cmd[0]-c0[0], n_cmd[1]-c0[1], n_cmd[2]-c0[2], n_cmd[3]-c0[3]);
    checks++;
    if (n_cmd[CMD_WRITEBACK] == c0[CMD_WRITEBACK]) begin
      failures++; $display("FAIL no write-back happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
