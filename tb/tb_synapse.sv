// tb_synapse: drives random weights, states and biases into a 13-input and a
// 26-input synapse and compares the field with b + sum(+-w) computed in
// integers.
module tb_synapse;
  import pc_pkg::*;
  localparam int D1 = 13, D2 = 26;
  logic [D1-1:0][W_BITS-1:0] w1;
  logic [D2-1:0][W_BITS-1:0] w2;
  logic [D1-1:0] s1;
  logic [D2-1:0] s2;
  logic [W_BITS-1:0] b1, b2;
  logic signed [W_BITS+$clog2(D1+1)-1:0] f1;
  logic signed [W_BITS+$clog2(D2+1)-1:0] f2;
  int checks = 0, failures = 0;

  synapse #(.DEG(D1)) u1 (.w_i(w1), .s_i(s1), .bias_i(b1), .field_o(f1));
  synapse #(.DEG(D2)) u2 (.w_i(w2), .s_i(s2), .bias_i(b2), .field_o(f2));

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 500; t++) begin
      int e1, e2;
      b1 = W_BITS'($urandom); b2 = W_BITS'($urandom);
      // every few vectors use extreme weights
      for (int j = 0; j < D1; j++) w1[j] = (t % 7 == 0) ? 10'h200 : W_BITS'($urandom);
      for (int j = 0; j < D2; j++) w2[j] = (t % 5 == 0) ? 10'h1FF : W_BITS'($urandom);
      s1 = D1'($urandom); s2 = D2'({$urandom, $urandom});
      #1;
      e1 = int'($signed(b1)); e2 = int'($signed(b2));
      for (int j = 0; j < D1; j++) e1 += s1[j] ? int'($signed(w1[j])) : -int'($signed(w1[j]));
      for (int j = 0; j < D2; j++) e2 += s2[j] ? int'($signed(w2[j])) : -int'($signed(w2[j]));
      checks += 2;
      if (int'(f1) != e1) begin failures++; $display("FAIL f1 %0d != %0d", f1, e1); end
      if (int'(f2) != e2) begin failures++; $display("FAIL f2 %0d != %0d", f2, e2); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
