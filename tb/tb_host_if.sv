// tb_host_if: drives the host bus of host_if and checks every path: weight
// writes decoded into layer/site/slot/data, start/stop/clamp pulses and the
// sweep count register, status and counter reads, the snapshot taken at
// done and on command, and snapshot reads one clock after the strobe.
module tb_host_if;
  import pc_pkg::*;
  localparam int NSTATE = 70, SB = 6;
  logic clk = 0, rst_n = 0;
  logic we, re, rvalid;
  logic [31:0] addr, wdata, rdata;
  logic start, stop, clamp, busy, done, wr_en;
  logic [31:0] nsw, sweeps, hn, hs;
  logic [1:0] wl;
  logic [SB-1:0] ws;
  logic [7:0] wsl;
  logic [W_BITS-1:0] wd;
  logic [NSTATE-1:0] state;
  int checks = 0, failures = 0;

  host_if #(.NSTATE(NSTATE), .SITE_BITS(SB)) dut (
    .clk, .rst_n, .host_we_i(we), .host_re_i(re), .host_addr_i(addr), .host_wdata_i(wdata),
    .host_rdata_o(rdata), .host_rvalid_o(rvalid), .start_o(start), .stop_o(stop), .clamp_o(clamp),
    .n_sweeps_o(nsw), .busy_i(busy), .done_i(done), .sweeps_i(sweeps), .halo_n_frames_i(hn),
    .halo_s_frames_i(hs), .wr_en_o(wr_en), .wr_layer_o(wl), .wr_site_o(ws), .wr_slot_o(wsl),
    .wr_data_o(wd), .state_i(state));

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic wr(logic [31:0] a, logic [31:0] d);
    @(negedge clk); we = 1; addr = a; wdata = d;
    @(negedge clk); we = 0;
  endtask

  task automatic rd(logic [31:0] a, output logic [31:0] d);
    @(negedge clk); re = 1; addr = a;
    @(negedge clk); re = 0;
    check(rvalid, "read valid after one clock");
    d = rdata;
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    logic [NSTATE-1:0] s1, s2;
    we = 0; re = 0; addr = 0; wdata = 0; busy = 0; done = 0; sweeps = 0; hn = 7; hs = 9;
    state = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // weight writes
    for (int t = 0; t < 20; t++) begin
      logic [1:0] l; logic [5:0] s; logic [7:0] sl; logic [9:0] v;
      l = 2'($urandom % 3); s = 6'($urandom); sl = 8'($urandom % 27); v = 10'($urandom);
      @(negedge clk); we = 1; addr = {2'b10, l, 20'(s), sl}; wdata = 32'(v);
      @(negedge clk); we = 0;
      check(wr_en && wl == l && ws == s && wsl == sl && wd == v, "weight write decode");
      check(!start, "no start on weight write");
    end
    @(negedge clk);
    check(!wr_en, "write strobe is one clock");
    // sweep count and start/clamp
    wr({2'b00, 22'd0, REG_NSWEEP}, 32'd1234);
    check(nsw == 1234, "n_sweeps register");
    rd({2'b00, 22'd0, REG_NSWEEP}, d);
    check(d == 1234, "n_sweeps readback");
    @(negedge clk); we = 1; addr = {2'b00, 22'd0, REG_CTRL}; wdata = 32'b0011;
    @(negedge clk); we = 0;
    check(start && clamp && !stop, "start with clamp");
    @(negedge clk);
    check(!start && clamp, "start is a pulse, clamp holds");
    wr({2'b00, 22'd0, REG_CTRL}, 32'b0100);
    check(stop && !clamp, "stop pulse");
    // status and counters
    busy = 1; sweeps = 55;
    rd({2'b00, 22'd0, REG_STATUS}, d);
    check(d == 32'b01, "status busy");
    rd({2'b00, 22'd0, REG_SWEEPS}, d);
    check(d == 55, "sweeps read");
    rd({2'b00, 22'd0, REG_HALO_N}, d);
    check(d == 7, "north frames read");
    rd({2'b00, 22'd0, REG_HALO_S}, d);
    check(d == 9, "south frames read");
    // snapshot at done
    s1 = {$urandom, $urandom, $urandom};
    @(negedge clk); state = s1; done = 1; busy = 0;
    @(negedge clk); done = 0; state = ~s1;
    rd({2'b00, 22'd0, REG_STATUS}, d);
    check(d == 32'b10, "status done");
    for (int w = 0; w < 3; w++) begin
      rd({2'b01, 30'(w)}, d);
      check(d == 32'(s1 >> (32 * w)), $sformatf("snapshot word %0d", w));
    end
    // snapshot on command
    s2 = {$urandom, $urandom, $urandom};
    @(negedge clk); state = s2;
    wr({2'b00, 22'd0, REG_CTRL}, 32'b1000);
    state = '0;
    for (int w = 0; w < 3; w++) begin
      rd({2'b01, 30'(w)}, d);
      check(d == 32'(s2 >> (32 * w)), $sformatf("command snapshot word %0d", w));
    end
    rd({2'b01, 30'd3}, d);
    check(d == 0, "read past the snapshot is zero");
    // start clears done
    wr({2'b00, 22'd0, REG_CTRL}, 32'b0001);
    rd({2'b00, 22'd0, REG_STATUS}, d);
    check(d[1] == 1'b0, "start clears done");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
