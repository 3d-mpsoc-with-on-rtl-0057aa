// Behavioural model of main memory (not synthesizable) for the testbenches.
//
// Stands in for the off-chip DRAM behind the L2 memory port. Memory is sparse:
// a line that was never written reads as its initial pattern, in which each
// 32-bit word holds its own byte address XOR 32'hA500_0000 (see init_word).
// A request is accepted when the model is idle. A read returns the line's four
// 128-bit beats on consecutive cycles after LAT cycles; a write takes four
// beats, one per cycle. reads and writes count the transactions served.
module mem_model
  import mpsoc_pkg::*;
#(
  parameter int unsigned LAT = 6
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        req_valid,
  output logic        req_ready,
  input  logic        req_we,
  input  line_addr_t  req_addr,
  input  logic        wvalid,
  output logic        wready,
  input  beat_t       wdata,
  output logic        rvalid,
  output beat_t       rdata,
  output int unsigned reads,
  output int unsigned writes
);

  beat_t mem [logic [LADDR_W+BEAT_IDX_W-1:0]];

  function automatic logic [WORD_W-1:0] init_word(logic [ADDR_W-1:0] a);
    return a ^ 32'hA500_0000;
  endfunction

  function automatic beat_t init_beat(line_addr_t la, int b);
    beat_t v;
    for (int k = 0; k < BEAT_W / WORD_W; k++)
      v[k*WORD_W +: WORD_W] = init_word({la, OFF_W'(b * (BEAT_W/8) + k * (WORD_W/8))});
    return v;
  endfunction

  function automatic beat_t peek(line_addr_t la, int b);
    logic [LADDR_W+BEAT_IDX_W-1:0] k;
    k = {la, BEAT_IDX_W'(b)};
    return mem.exists(k) ? mem[k] : init_beat(la, b);
  endfunction

  typedef enum logic [1:0] {M_IDLE, M_WAIT, M_RD, M_WR} mstate_t;
  mstate_t    st;
  line_addr_t addr;
  int         cnt;

  assign req_ready = (st == M_IDLE);
  assign wready    = (st == M_WR);
  assign rvalid    = (st == M_RD);
  assign rdata     = (st == M_RD) ? peek(addr, cnt) : '0;

  // the sparse array takes a blocking write, so this is a plain always block
  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st     <= M_IDLE;
      cnt    <= 0;
      addr   <= '0;
      reads  <= 0;
      writes <= 0;
    end else begin
      case (st)
        M_IDLE: if (req_valid) begin
          addr <= req_addr;
          cnt  <= 0;
          if (req_we) begin
            st <= M_WR;
            writes <= writes + 1;
          end else begin
            st <= M_WAIT;
            reads <= reads + 1;
          end
        end
        M_WAIT: begin
          cnt <= cnt + 1;
          if (cnt == int'(LAT) - 1) begin
            cnt <= 0;
            st  <= M_RD;
          end
        end
        M_RD: begin
          cnt <= cnt + 1;
          if (cnt == BEATS - 1) st <= M_IDLE;
        end
        M_WR: if (wvalid) begin
          mem[{addr, BEAT_IDX_W'(cnt)}] = wdata;
          cnt <= cnt + 1;
          if (cnt == BEATS - 1) st <= M_IDLE;
        end
        default: st <= M_IDLE;
      endcase
    end
  end

endmodule
