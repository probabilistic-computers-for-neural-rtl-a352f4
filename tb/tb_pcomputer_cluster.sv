// tb_pcomputer_cluster: end-to-end test of the multi-FPGA p-computer with
// six nodes, the node count of the full machine, sampling an 18 x 18 two-layer
// lattice (three rows per node, closed into a ring), each on its own clock
// (periods 10, 13, 16, 19, 22 and 25), talking only through the boundary
// links. Every hidden spin is given one strong coupling, to a randomly chosen
// one of its 13 visible neighbours with a random sign, so its state is a
// known function of a visible spin that may sit on its own node, on the
// northern or southern neighbour, or across the periodic wrap. Visible spins
// get random strong biases. After free runs stopped by the host, every
// hidden spin must show the expected copy of its (possibly remote) visible
// neighbour. The pattern is then changed and checked again, and a clamped
// counted run on every node must keep the visible layer while hidden spins
// are resampled. Mechanisms counted: weight writes, free runs and stops,
// clamped runs, boundary frames in both directions on every node,
// couplings served from the north halo, the south halo and locally.
module tb_pcomputer_cluster;
  import pc_pkg::*;
  localparam int P = 6, L = 18, ROWS = 3, K = 2, DEG = 13, NSN = ROWS * L,
                 NWORDS = (2 * NSN + 31) / 32;
  localparam logic [9:0] BIG = 10'sd200, NBIG = -10'sd200;
  logic [P-1:0] clk = '0, rst_n = '0;
  logic [P-1:0] we = '0, re = '0, rvalid;
  logic [P-1:0][31:0] addr = '0, wdata = '0, rdata;
  int checks = 0, failures = 0;
  int n_wr = 0, n_free = 0, n_stop = 0, n_clamp = 0, n_north = 0, n_south = 0, n_local = 0;
  int dro[DEG], dco[DEG];

  pcomputer_cluster #(.NFPGA(P), .L(L), .NLAYERS(2), .K(K), .FRAC_BITS(3), .LANES(8)) dut (
    .clk, .rst_n, .host_we_i(we), .host_re_i(re), .host_addr_i(addr), .host_wdata_i(wdata),
    .host_rdata_o(rdata), .host_rvalid_o(rvalid));

  for (genvar g = 0; g < P; g++) begin : g_clk
    always #(5.0 + 1.5 * g) clk[g] = ~clk[g];
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #5000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic tick(int n);
    wait (clk[n] == 1'b1);
    wait (clk[n] == 1'b0);
  endtask
  task automatic hw(int n, logic [31:0] a, logic [31:0] d);
    tick(n); we[n] = 1; addr[n] = a; wdata[n] = d;
    tick(n); we[n] = 0;
  endtask
  task automatic hr(int n, logic [31:0] a, output logic [31:0] d);
    tick(n); re[n] = 1; addr[n] = a;
    tick(n); re[n] = 0;
    d = rdata[n];
  endtask
  task automatic wrw(int n, int layer, int site, int slot, logic [9:0] v);
    hw(n, {2'b10, 2'(layer), 20'(site), 8'(slot)}, 32'(v));
    n_wr++;
  endtask
  task automatic read_state(int n, output logic [2*NSN-1:0] s);
    logic [32*NWORDS-1:0] all;
    for (int w = 0; w < NWORDS; w++) begin
      logic [31:0] d;
      hr(n, {2'b01, 30'(w)}, d);
      all[32*w +: 32] = d;
    end
    s = all[2*NSN-1:0];
  endtask

  function automatic int md(int a); return (a % L + L) % L; endfunction

  logic [L*L-1:0] vpat;          // global visible pattern, index row * L + col
  int hslot[P][NSN];
  bit hneg[P][NSN];

  task automatic load_visible(bit reversed);
    for (int n = 0; n < P; n++)
      for (int i = 0; i < NSN; i++)
        wrw(n, 0, i, 26, (vpat[(n * ROWS) * L + i] ^ reversed) ? BIG : NBIG);
  endtask

  task automatic free_run_and_stop();
    for (int n = 0; n < P; n++) begin
      hw(n, {24'd0, REG_NSWEEP}, 32'd0);
      hw(n, {24'd0, REG_CTRL}, 32'd1);
      n_free++;
    end
    repeat (200) @(negedge clk[P-1]);
    for (int n = 0; n < P; n++) begin
      hw(n, {24'd0, REG_CTRL}, 32'd4);
      n_stop++;
    end
    repeat (3) @(negedge clk[P-1]);
  endtask

  task automatic check_lattice(string what);
    logic [2*NSN-1:0] s;
    int bad = 0;
    for (int n = 0; n < P; n++) begin
      hw(n, {24'd0, REG_CTRL}, 32'd8);   // snapshot
      read_state(n, s);
      for (int i = 0; i < NSN; i++) begin
        int gr, c, src;
        gr = n * ROWS + i / L; c = i % L;
        src = md(gr + dro[hslot[n][i]]) * L + md(c + dco[hslot[n][i]]);
        if (s[i] != vpat[gr * L + c]) bad++;
        if (s[NSN + i] != (vpat[src] ^ hneg[n][i])) bad++;
      end
    end
    check(bad == 0, $sformatf("%s: %0d spins wrong", what, bad));
  endtask

  initial begin
    int n0 = 0;
    for (int dr = -K; dr <= K; dr++)
      for (int dc = -K; dc <= K; dc++)
        if (dr * dr + dc * dc <= K * K) begin dro[n0] = dr; dco[n0] = dc; n0++; end
  end

  initial begin
    logic [31:0] d;
    logic [2*NSN-1:0] s;
    repeat (3) @(posedge clk[2]);
    rst_n = '1;
    // hidden couplings: one random neighbour each
    for (int n = 0; n < P; n++)
      for (int i = 0; i < NSN; i++) begin
        int r, rel;
        hslot[n][i] = $urandom % DEG;
        hneg[n][i] = $urandom % 2;
        r = i / L;
        rel = r + dro[hslot[n][i]];
        if (rel < 0) n_north++; else if (rel >= ROWS) n_south++; else n_local++;
        wrw(n, 1, i, hslot[n][i], hneg[n][i] ? NBIG : BIG);
      end
    for (int round = 0; round < 2; round++) begin
      for (int i = 0; i < L * L; i++) vpat[i] = 1'($urandom);
      load_visible(0);
      free_run_and_stop();
      check_lattice($sformatf("free run %0d", round));
    end
    // clamped counted run on every node with reversed visible biases
    load_visible(1);
    for (int n = 0; n < P; n++) begin
      hw(n, {24'd0, REG_NSWEEP}, 32'd4);
      hw(n, {24'd0, REG_CTRL}, 32'd3);
      n_clamp++;
    end
    repeat (20) @(negedge clk[P-1]);
    for (int n = 0; n < P; n++) begin
      hr(n, {24'd0, REG_STATUS}, d);
      check(d[1:0] == 2'b10, $sformatf("node %0d clamped run done", n));
      hr(n, {24'd0, REG_SWEEPS}, d);
      check(d == 4, $sformatf("node %0d ran 4 sweeps", n));
    end
    check_lattice("clamped run keeps the visible layer");
    // boundary traffic
    for (int n = 0; n < P; n++) begin
      logic [31:0] fn, fs;
      hr(n, {24'd0, REG_HALO_N}, fn);
      hr(n, {24'd0, REG_HALO_S}, fs);
      check(fn > 20 && fs > 20, $sformatf("node %0d boundary frames %0d / %0d", n, fn, fs));
    end
    $display("mechanisms: weight writes %0d, free runs %0d, stops %0d, clamped runs %0d, couplings via north halo %0d, south halo %0d, local %0d",
             n_wr, n_free, n_stop, n_clamp, n_north, n_south, n_local);
    check(n_wr > 0 && n_free > 0 && n_stop > 0 && n_clamp > 0 && n_north > 0 && n_south > 0 && n_local > 0,
          "every mechanism exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
