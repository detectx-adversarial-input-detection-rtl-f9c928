// tb_lut_search: self-checking test of the binary-search LookUp stage, run
// against a real 512-entry lut_sram. Tables are sorted random sample SoIs (some
// with repeated values). For each random or directed key the test checks that
// the returned k brackets the key (S_k <= key < S_{k+1}, or S_k == key, or
// k = 0 for keys below the table), that p = P_k, that N_X matches the access
// count of the search as specified, that N_X <= 9 whenever the key is not below
// the table, and that done comes N_X + 1 cycles after start.
module tb_lut_search;
  localparam int unsigned DEPTH = 512;

  logic clk = 1'b0;
  logic rst_n;
  logic start, busy, done;
  logic [7:0] key, p;
  logic [8:0] k;
  logic [3:0] nx;
  logic mem_re;
  logic [8:0] mem_raddr;
  logic [15:0] mem_rdata;
  logic we;
  logic [8:0] waddr;
  logic [15:0] wdata;
  logic [7:0] s_tab [DEPTH];
  logic [7:0] p_tab [DEPTH];
  int checks = 0, failures = 0;
  int n_early = 0, n_full9 = 0, n_below = 0;

  always #5 clk = ~clk;

  lut_sram u_mem (.clk, .we, .waddr, .wdata, .re(mem_re), .raddr(mem_raddr), .rdata(mem_rdata));
  lut_search dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_table(input int lo, input int span);
    // sorted: S_k = lo + floor(k * span / DEPTH) + small random steps, capped
    int v = lo;
    for (int i = 0; i < DEPTH; i++) begin
      if (i > 0 && ($urandom % 512) < span) v++;
      if (v > 255) v = 255;
      s_tab[i] = 8'(v);
      p_tab[i] = 8'($urandom);
      we = 1; waddr = 9'(i); wdata = {s_tab[i], p_tab[i]};
      @(posedge clk); #1;
    end
    we = 0;
  endtask

  // access count of the specified search
  function automatic int ref_nx(input logic [7:0] kk, output int k_out);
    int kr = 0, n = 0;
    bit hv = 0;
    for (int b = 8; b >= 0; b--) begin
      int pr = kr | (1 << b);
      n++;
      if (s_tab[pr] <= kk) begin kr = pr; hv = 1; end
      if (s_tab[pr] == kk) break;
    end
    if (!hv) begin n++; kr = 0; end
    k_out = kr;
    return n;
  endfunction

  task automatic search(input logic [7:0] kk);
    int cyc = 0, exp_k, exp_nx;
    exp_nx = ref_nx(kk, exp_k);
    start = 1; key = kk;
    @(posedge clk); #1;
    start = 0; key = 8'($urandom);
    while (!done) begin
      @(posedge clk); #1;
      cyc++;
      if (cyc > 20) break;
    end
    checks += 6;
    if (int'(k) != exp_k) begin failures++; $display("key %0d: k %0d expected %0d", kk, k, exp_k); end
    if (p !== p_tab[k]) begin failures++; $display("key %0d: p %0d expected %0d", kk, p, p_tab[k]); end
    if (int'(nx) != exp_nx) begin failures++; $display("key %0d: nx %0d expected %0d", kk, nx, exp_nx); end
    if (cyc != int'(nx)) begin failures++; $display("key %0d: done after %0d cycles, nx %0d", kk, cyc + 1, nx); end
    // bracketing, independent of the search order
    if (!((s_tab[k] <= kk || k == 0) &&
          (s_tab[k] == kk || k == DEPTH - 1 || s_tab[k + 1] > kk))) begin
      failures++; $display("key %0d: k %0d does not bracket (S_k %0d)", kk, k, s_tab[k]);
    end
    if (!(nx <= 9 || (k == 0 && s_tab[1] > kk))) begin
      failures++; $display("key %0d: nx %0d above 9", kk, nx);
    end
    if (nx == 9) n_full9++;
    else if (nx == 10) n_below++;
    else n_early++;
    @(posedge clk); #1;
    checks++;
    if (busy) begin failures++; $display("busy after done"); end
  endtask

  initial begin
    rst_n = 0; start = 0; key = '0; we = 0; waddr = '0; wdata = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    load_table(20, 200);
    search(8'd0);            // below the table
    search(8'd19);
    search(s_tab[0]);
    search(s_tab[DEPTH-1]);
    search(8'd255);
    for (int i = 0; i < 400; i++) search(8'($urandom));
    for (int i = 0; i < 100; i++) search(s_tab[$urandom % DEPTH]);
    load_table(0, 511);      // nearly unique values
    for (int i = 0; i < 400; i++) search(8'($urandom));
    $display("searches: early exit %0d, nine reads %0d, below table %0d", n_early, n_full9, n_below);
    checks += 3;
    if (n_early == 0) failures++;
    if (n_full9 == 0) failures++;
    if (n_below == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
