// tb_weight_bank: random writes (including slots and sites that do not exist)
// into a middle-layer bank (both sides) and a bottom-layer bank (upper side
// only), each compared after every write with a model of the slot map:
// slots [0,13) lower side, [13,26) upper side, 26 bias.
module tb_weight_bank;
  import pc_pkg::*;
  localparam int NS = 20, DEG = 13;
  logic clk = 0, rst_n = 0;
  logic we;
  logic [4:0] site;
  logic [7:0] slot;
  logic [W_BITS-1:0] data;
  logic [NS-1:0][2*DEG-1:0][W_BITS-1:0] w_mid;
  logic [NS-1:0][W_BITS-1:0] b_mid, b_bot;
  logic [NS-1:0][DEG-1:0][W_BITS-1:0] w_bot;
  logic [W_BITS-1:0] m_mid [NS][2*DEG], m_bot [NS][DEG], mb_mid [NS], mb_bot [NS];
  int checks = 0, failures = 0;

  weight_bank #(.NSITES(NS), .DEG(DEG), .HAS_LO(1), .HAS_HI(1)) u_mid (
    .clk, .rst_n, .wr_en_i(we), .wr_site_i(site), .wr_slot_i(slot), .wr_data_i(data), .w_o(w_mid), .b_o(b_mid));
  weight_bank #(.NSITES(NS), .DEG(DEG), .HAS_LO(0), .HAS_HI(1)) u_bot (
    .clk, .rst_n, .wr_en_i(we), .wr_site_i(site), .wr_slot_i(slot), .wr_data_i(data), .w_o(w_bot), .b_o(b_bot));

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare();
    int bad = 0;
    for (int i = 0; i < NS; i++) begin
      if (b_mid[i] !== mb_mid[i] || b_bot[i] !== mb_bot[i]) bad++;
      for (int s = 0; s < 2 * DEG; s++) if (w_mid[i][s] !== m_mid[i][s]) bad++;
      for (int s = 0; s < DEG; s++) if (w_bot[i][s] !== m_bot[i][s]) bad++;
    end
    checks++;
    if (bad != 0) begin failures++; $display("FAIL %0d words differ", bad); end
  endtask

  initial begin
    we = 0; site = 0; slot = 0; data = 0;
    for (int i = 0; i < NS; i++) begin
      mb_mid[i] = 0; mb_bot[i] = 0;
      for (int s = 0; s < 2 * DEG; s++) m_mid[i][s] = 0;
      for (int s = 0; s < DEG; s++) m_bot[i][s] = 0;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    compare();
    for (int t = 0; t < 600; t++) begin
      we = ($urandom % 8) != 0;
      site = 5'($urandom % 24);   // sites 20..23 do not exist
      slot = 8'($urandom % 30);   // slots 27..29 do not exist
      data = W_BITS'($urandom);
      if (we && site < NS) begin
        if (slot == 2 * DEG) begin mb_mid[site] = data; mb_bot[site] = data; end
        else if (slot < 2 * DEG) begin
          m_mid[site][slot] = data;
          if (slot >= DEG) m_bot[site][slot - DEG] = data;
        end
      end
      @(negedge clk);
      compare();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
