// lut_search: the LookUp stage of the LUT-based detector. Binary search of the
// SoI-probability LUT for the sample SoI that brackets a key.
//
// The LUT holds DEPTH entries {S_k, P_k} sorted by non-decreasing S_k. The
// search returns the largest k with S_k <= key (so S_k <= key < S_{k+1}) and
// its P_k, and reports N_X, the number of LUT reads it used. It is a bitwise
// binary search: starting from k = 0 it probes index k | 2^b for
// b = log2(DEPTH)-1 down to 0 and keeps the probe when S_probe <= key. A probe
// with S_probe == key ends the search early, so N_X depends on the data and is
// at most log2(DEPTH) (9 for 512 entries, the worst case the paper assumes).
// Entry 0 is never probed; when no probe satisfies S_probe <= key the key lies
// below S_1 and one extra read fetches P_0. The bitwise form, the early exit,
// the handling of equality and of keys below the table are our choices; the
// paper only states that a binary search selects P_k.
//
// Interface: start (while !busy) latches key. One LUT read is issued per cycle
// through mem_re/mem_raddr (combinational); mem_rdata must return the word one
// cycle later (lut_sram). done pulses for one cycle with k, p and nx valid;
// they hold until the next search. A search of N_X reads takes N_X + 1 cycles
// from start to done.
module lut_search #(
  parameter int unsigned DEPTH = detectx_pkg::LUT_DEPTH,
  parameter int unsigned S_W   = detectx_pkg::S_W,
  parameter int unsigned P_W   = detectx_pkg::P_W,
  parameter int unsigned NX_W  = detectx_pkg::NX_W,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [S_W-1:0]     key,
  output logic               busy,
  output logic               done,
  output logic [AW-1:0]      k,
  output logic [P_W-1:0]     p,
  output logic [NX_W-1:0]    nx,
  output logic               mem_re,
  output logic [AW-1:0]      mem_raddr,
  input  logic [S_W+P_W-1:0] mem_rdata
);

  typedef enum logic [1:0] {S_IDLE, S_PROBE, S_ZERO} state_t;

  state_t            state;
  logic [S_W-1:0]    key_r;
  logic [AW-1:0]     k_r;       // best index so far
  logic [P_W-1:0]    p_r;       // P of k_r
  logic              have;      // some probe satisfied S <= key
  logic [AW-1:0]     probe;     // index whose word is on mem_rdata
  logic [$clog2(AW+1)-1:0] b;   // bit tested by probe

  logic [S_W-1:0]    rd_s;
  logic [P_W-1:0]    rd_p;
  logic              le, eq, last;
  logic [AW-1:0]     k_next;

  always_comb begin
    {rd_s, rd_p} = mem_rdata;
    le     = (rd_s <= key_r);
    eq     = (rd_s == key_r);
    last   = (b == 0) || eq;
    k_next = le ? probe : k_r;
  end

  // read requests
  always_comb begin
    mem_re    = 1'b0;
    mem_raddr = '0;
    unique case (state)
      S_IDLE: if (start) begin
        mem_re    = 1'b1;
        mem_raddr = AW'(1) << (AW-1);
      end
      S_PROBE: begin
        mem_re = 1'b1;
        if (!last)              mem_raddr = k_next | (AW'(1) << (b-1));
        else if (!(le || have)) mem_raddr = '0;     // fetch P_0
        else                    mem_re    = 1'b0;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
      key_r <= '0;
      k_r   <= '0;
      p_r   <= '0;
      have  <= 1'b0;
      probe <= '0;
      b     <= '0;
      k     <= '0;
      p     <= '0;
      nx    <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_PROBE;
          key_r <= key;
          k_r   <= '0;
          have  <= 1'b0;
          probe <= AW'(1) << (AW-1);
          b     <= ($clog2(AW+1))'(AW-1);
          nx    <= NX_W'(1);
        end
        S_PROBE: begin
          k_r <= k_next;
          if (le) begin
            p_r  <= rd_p;
            have <= 1'b1;
          end
          if (!last) begin
            probe <= mem_raddr;
            b     <= b - 1'b1;
            nx    <= nx + 1'b1;
          end else if (!(le || have)) begin
            state <= S_ZERO;
            nx    <= nx + 1'b1;
          end else begin
            state <= S_IDLE;
            done  <= 1'b1;
            k     <= k_next;
            p     <= le ? rd_p : p_r;
          end
        end
        S_ZERO: begin
          state <= S_IDLE;
          done  <= 1'b1;
          k     <= '0;
          p     <= rd_p;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  initial begin
    assert (DEPTH == (1 << AW)) else $error("lut_search: DEPTH must be a power of two");
  end

  a_nx_bound : assert property (@(posedge clk) disable iff (!rst_n)
    done |-> (nx <= NX_W'(AW + 1)));

endmodule
