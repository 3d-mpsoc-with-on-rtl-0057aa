// Self-checking testbench of the shared L2 cache at its full size (1 MB,
// 16 ways). A reference model (an associative array of line contents) follows
// every write; every line read back is compared with it. Three phases:
// random reads and writes spread over four sets (hits, clean misses), then
// 40 dirty lines written into one set, forcing at least 24 dirty evictions to
// memory, and all of them read back. It also checks the hit timing: the first
// read beat comes two cycles after the request is accepted.
module tb_l2_cache;
  import mpsoc_pkg::*;

  localparam int unsigned SETS = 1048576 / (64 * 16);

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic req_valid, req_ready, req_we, wvalid, wready, rvalid, done;
  line_addr_t req_addr;
  beat_t wdata, rdata;
  logic mem_req_valid, mem_req_ready, mem_req_we, mem_wvalid, mem_wready, mem_rvalid;
  line_addr_t mem_req_addr;
  beat_t mem_wdata, mem_rdata;
  int unsigned mem_reads, mem_writes;

  l2_cache dut (
    .clk, .rst_n, .req_valid, .req_ready, .req_we, .req_addr,
    .wvalid, .wready, .wdata, .rvalid, .rdata, .done,
    .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr,
    .mem_wvalid, .mem_wready, .mem_wdata, .mem_rvalid, .mem_rdata
  );

  mem_model u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req_we(mem_req_we), .req_addr(mem_req_addr), .wvalid(mem_wvalid),
    .wready(mem_wready), .wdata(mem_wdata), .rvalid(mem_rvalid), .rdata(mem_rdata),
    .reads(mem_reads), .writes(mem_writes)
  );

  int checks = 0, failures = 0;
  beat_t ref_mem [logic [LADDR_W+BEAT_IDX_W-1:0]];

  function automatic beat_t expect_beat(line_addr_t la, int b);
    logic [LADDR_W+BEAT_IDX_W-1:0] k;
    beat_t v;
    k = {la, BEAT_IDX_W'(b)};
    if (ref_mem.exists(k)) return ref_mem[k];
    for (int w = 0; w < 4; w++)
      v[w*32 +: 32] = {la, OFF_W'(b*16 + w*4)} ^ 32'hA500_0000;
    return v;
  endfunction

  int last_latency;

  task automatic do_write(line_addr_t la);
    beat_t d [BEATS];
    for (int b = 0; b < BEATS; b++) d[b] = {$urandom, $urandom, $urandom, $urandom};
    @(negedge clk);
    req_valid = 1; req_we = 1; req_addr = la;
    do @(posedge clk); while (!req_ready);
    @(negedge clk);
    req_valid = 0;
    for (int b = 0; b < BEATS; b++) begin
      wvalid = 1; wdata = d[b];
      do @(posedge clk); while (!wready);
      @(negedge clk);
    end
    wvalid = 0;
    while (!done) @(negedge clk);
    for (int b = 0; b < BEATS; b++) ref_mem[{la, BEAT_IDX_W'(b)}] = d[b];
  endtask

  task automatic do_read(line_addr_t la);
    int b, cyc;
    @(negedge clk);
    req_valid = 1; req_we = 0; req_addr = la;
    do @(posedge clk); while (!req_ready);
    @(negedge clk);
    req_valid = 0;
    b = 0; cyc = 1;
    while (b < BEATS) begin
      if (rvalid) begin
        if (b == 0) last_latency = cyc;
        checks++;
        if (rdata !== expect_beat(la, b)) begin
          failures++;
          $display("FAIL read line %h beat %0d: got %h want %h", la, b, rdata, expect_beat(la, b));
        end
        b++;
      end
      @(negedge clk);
      cyc++;
    end
    while (!done) @(negedge clk);
  endtask

  initial begin
    int unsigned wr0;
    line_addr_t la;
    req_valid = 0; req_we = 0; req_addr = '0; wvalid = 0; wdata = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // Phase 1: random traffic over a few lines of four sets
    for (int i = 0; i < 120; i++) begin
      la = line_addr_t'(($urandom % 24) * SETS + ($urandom % 4));
      if ($urandom % 3 == 0) do_write(la); else do_read(la);
    end

    // Hit timing
    do_read(line_addr_t'(5));
    do_read(line_addr_t'(5));
    checks++;
    if (last_latency != 2) begin
      failures++;
      $display("FAIL hit latency %0d, expected 2", last_latency);
    end

    // Phase 2: dirty lines into one set force write-backs
    wr0 = mem_writes;
    for (int i = 0; i < 40; i++) do_write(line_addr_t'(i * SETS + 7));
    for (int i = 0; i < 40; i++) do_read(line_addr_t'(i * SETS + 7));
    checks++;
    if (mem_writes - wr0 < 24) begin
      failures++;
      $display("FAIL only %0d dirty evictions", mem_writes - wr0);
    end
    $display("L2: memory reads %0d, writes %0d", mem_reads, mem_writes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
