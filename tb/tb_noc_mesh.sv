// Self-checking testbench of the 4x2 message mesh. Every node sends packets of
// 1 to 4 flits to random destinations (itself included) while every node's
// ejection port applies random back-pressure. The testbench checks that each
// packet leaves the network at its destination node, whole and with its
// flits contiguous, that packets between one source and one destination keep
// their order, and that all packets arrive. On the idle network it checks the
// latency of a one-flit packet from node 0 (0,0) to node 7 (3,1): five routers,
// one cycle each.
module tb_noc_mesh;
  import mpsoc_pkg::*;

  localparam int NX = 4, NY = 2, N = NX * NY;
  localparam int NPKT = 200;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  flit_t inj_flit [N];
  flit_t ej_flit [N];
  logic [N-1:0] inj_valid, inj_ready, ej_valid, ej_ready;

  noc_mesh dut (.*);

  int checks = 0, failures = 0;
  int exp_seq [N][N];
  int seq_to [N][N];
  bit in_pkt [N];
  int cur_src [N], cur_seq [N], cur_idx [N];
  int received = 0;
  bit ready_random = 0;

  always @(posedge clk) if (rst_n) begin
    for (int d = 0; d < N; d++) begin
      if (ej_valid[d] && ej_ready[d]) begin
        flit_t f;
        int src, seq, idx, dst;
        f = ej_flit[d];
        src = int'(f.data[31:29]); seq = int'(f.data[28:16]); idx = int'(f.data[15:8]);
        checks++;
        if (!in_pkt[d]) begin
          dst = int'(f.data[5:3]) * NX + int'(f.data[2:0]);
          if (dst != d) begin failures++; $display("FAIL packet for %0d left at %0d", dst, d); end
          if (seq != exp_seq[src][d]) begin
            failures++; $display("FAIL order %0d->%0d seq %0d want %0d", src, d, seq, exp_seq[src][d]);
          end
          exp_seq[src][d] = seq + 1;
          cur_src[d] = src; cur_seq[d] = seq; cur_idx[d] = 0;
          in_pkt[d] = (f.kind == FL_HEAD);
          if (f.kind == FL_SINGLE) received++;
        end else begin
          if (src != cur_src[d] || seq != cur_seq[d] || idx != cur_idx[d] + 1) begin
            failures++; $display("FAIL interleaved flit at node %0d", d);
          end
          cur_idx[d] = idx;
          if (f.kind == FL_TAIL) begin in_pkt[d] = 0; received++; end
        end
      end
    end
  end

  always @(negedge clk) ej_ready = ready_random ? N'($urandom) | N'($urandom) : '1;

  task automatic send_node(int s);
    for (int n = 0; n < NPKT; n++) begin
      int d, len, seq;
      d = $urandom % N;
      len = $urandom % 4 + 1;
      seq = seq_to[s][d]; seq_to[s][d]++;
      for (int i = 0; i < len; i++) begin
        flit_t f;
        f.kind = (len == 1) ? FL_SINGLE : (i == 0) ? FL_HEAD : (i == len-1) ? FL_TAIL : FL_BODY;
        f.data = {3'(s), 13'(seq), 8'(i), 2'(len-1), 3'(d / NX), 3'(d % NX)};
        inj_flit[s] = f; inj_valid[s] = 1;
        do @(posedge clk); while (!inj_ready[s]);
        @(negedge clk);
        inj_valid[s] = 0;
        if ($urandom % 4 == 0) @(negedge clk);
      end
    end
  endtask

  initial begin
    int lat;
    for (int i = 0; i < N; i++) begin inj_flit[i] = '0; in_pkt[i] = 0; end
    inj_valid = '0;
    ej_ready = '1;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // idle-network latency, node 0 -> node 7
    @(negedge clk);
    inj_flit[0] = '{kind: FL_SINGLE, data: {3'(0), 13'(0), 8'(0), 2'(0), 3'(1), 3'(3)}};
    seq_to[0][7] = 1;
    inj_valid[0] = 1;
    lat = 0;
    @(negedge clk);
    inj_valid[0] = 0;
    while (!ej_valid[7] && lat < 20) begin lat++; @(negedge clk); end
    checks++;
    if (lat + 1 != 5) begin failures++; $display("FAIL 0->7 latency %0d, expected 5", lat + 1); end

    ready_random = 1;
    fork
      send_node(0); send_node(1); send_node(2); send_node(3);
      send_node(4); send_node(5); send_node(6); send_node(7);
    join
    repeat (300) @(negedge clk);
    checks++;
    if (received != N * NPKT + 1) begin
      failures++; $display("FAIL received %0d of %0d packets", received, N*NPKT+1);
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
