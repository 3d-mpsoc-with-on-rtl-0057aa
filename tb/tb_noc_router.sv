// Self-checking testbench of one NoC router, placed at (1,1) so that every
// output direction is used. All five inputs inject packets of 1 to 4 flits
// with random destinations while the outputs apply random back-pressure.
// For each flit leaving an output the testbench checks that the XY route
// chose that output, that the flits of a packet leave back to back on one
// output with nothing interleaved, and that packets from one input to one
// output keep their order. It also checks that every packet arrives and that
// a flit entering an idle router leaves one cycle later.
module tb_noc_router;
  import mpsoc_pkg::*;

  localparam int MX = 1, MY = 1;
  localparam int NPKT = 300;   // packets per input

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  flit_t in_flit [NPORTS];
  flit_t out_flit [NPORTS];
  logic [NPORTS-1:0] in_valid, in_ready, out_valid, out_ready;

  noc_router #(.MY_X(MX), .MY_Y(MY)) dut (.*);

  int checks = 0, failures = 0;

  function automatic int xy_port(int dx, int dy);
    if (dx > MX) return P_EAST;
    if (dx < MX) return P_WEST;
    if (dy > MY) return P_NORTH;
    if (dy < MY) return P_SOUTH;
    return P_LOCAL;
  endfunction

  // data layout: [31:29] source input, [28:16] sequence, [15:8] flit index,
  // [7:6] length-1, [5:0] destination (head only)
  int next_seq_exp [NPORTS][NPORTS];
  int cur_src [NPORTS], cur_seq [NPORTS], cur_idx [NPORTS], cur_len [NPORTS];
  bit in_pkt [NPORTS];
  int received = 0;
  bit ready_random = 1;

  // output monitors
  always @(posedge clk) if (rst_n) begin
    for (int o = 0; o < NPORTS; o++) begin
      if (out_valid[o] && out_ready[o]) begin
        flit_t f;
        int src, seq, idx, len;
        f = out_flit[o];
        src = int'(f.data[31:29]); seq = int'(f.data[28:16]);
        idx = int'(f.data[15:8]);  len = int'(f.data[7:6]) + 1;
        checks++;
        if (!in_pkt[o]) begin
          if (!(f.kind inside {FL_HEAD, FL_SINGLE}) || idx != 0) begin
            failures++; $display("FAIL out %0d: packet starts without head", o);
          end
          if (xy_port(int'(f.data[2:0]), int'(f.data[5:3])) != o) begin
            failures++; $display("FAIL out %0d: wrong route for dest %h", o, f.data[5:0]);
          end
          if (seq != next_seq_exp[src][o]) begin
            failures++; $display("FAIL out %0d: order src %0d seq %0d want %0d", o, src, seq, next_seq_exp[src][o]);
          end
          next_seq_exp[src][o] = seq + 1;
          cur_src[o] = src; cur_seq[o] = seq; cur_idx[o] = 0; cur_len[o] = len;
          in_pkt[o] = (f.kind == FL_HEAD);
          if (f.kind == FL_SINGLE) received++;
        end else begin
          if (src != cur_src[o] || seq != cur_seq[o] || idx != cur_idx[o] + 1) begin
            failures++; $display("FAIL out %0d: interleaved flit src %0d seq %0d idx %0d", o, src, seq, idx);
          end
          cur_idx[o] = idx;
          if (f.kind == FL_TAIL) begin
            in_pkt[o] = 0; received++;
            if (idx != cur_len[o] - 1) begin failures++; $display("FAIL out %0d: early tail", o); end
          end
        end
      end
    end
  end

  always @(negedge clk) out_ready = ready_random ? NPORTS'($urandom) | NPORTS'($urandom) : '1;

  // per-input sequence numbers per destination port (for order checking)
  int seq_to [NPORTS][NPORTS];

  task automatic send_input(int p);
    for (int n = 0; n < NPKT; n++) begin
      int dx, dy, len, o, seq;
      dx = $urandom % 4; dy = $urandom % 2 + (($urandom % 2) ? 1 : 0);
      // keep packets off the port they come in on, as a mesh neighbour would
      o = xy_port(dx, dy);
      if (o == p && p != P_LOCAL) begin dx = MX; dy = MY; o = P_LOCAL; end
      len = $urandom % 4 + 1;
      seq = seq_to[p][o]; seq_to[p][o]++;
      for (int i = 0; i < len; i++) begin
        flit_t f;
        f.kind = (len == 1) ? FL_SINGLE : (i == 0) ? FL_HEAD : (i == len-1) ? FL_TAIL : FL_BODY;
        f.data = {3'(p), 13'(seq), 8'(i), 2'(len-1), 3'(dy), 3'(dx)};
        in_flit[p] = f; in_valid[p] = 1;
        do @(posedge clk); while (!in_ready[p]);
        @(negedge clk);
        in_valid[p] = 0;
        if ($urandom % 3 == 0) @(negedge clk);
      end
    end
  endtask

  initial begin
    for (int p = 0; p < NPORTS; p++) begin in_flit[p] = '0; in_pkt[p] = 0; end
    in_valid = '0;
    out_ready = '1;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // single-hop latency through an idle router
    ready_random = 0;
    @(negedge clk);
    in_flit[P_LOCAL] = '{kind: FL_SINGLE, data: {3'(P_LOCAL), 13'(0), 8'(0), 2'(0), 3'(MY), 3'(MX+1)}};
    seq_to[P_LOCAL][P_EAST] = 1;
    in_valid[P_LOCAL] = 1;
    @(negedge clk);
    in_valid[P_LOCAL] = 0;
    checks++;
    if (!(out_valid[P_EAST])) begin failures++; $display("FAIL one-cycle hop"); end
    @(negedge clk);
    ready_random = 1;

    fork
      send_input(0); send_input(1); send_input(2); send_input(3); send_input(4);
    join
    repeat (200) @(negedge clk);
    checks++;
    if (received != NPORTS * NPKT + 1) begin
      failures++; $display("FAIL received %0d packets of %0d", received, NPORTS*NPKT+1);
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
