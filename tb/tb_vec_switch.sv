// tb_vec_switch: self-checking test of the 4x11 switch. For random slices
// and indices, in every sub-cycle each unit must see element
// slice[4*sub + idx[1:0]] and a hit exactly when idx lies in 4*sub..4*sub+3.
// Over the four sub-cycles each index must hit exactly once, on its element.
module tb_vec_switch;
  import espim_pkg::*;

  localparam int N = 11;
  logic [15:0] slice [16];
  logic [1:0]  sub;
  logic [3:0]  idx [N];
  logic [15:0] elem [N];
  logic        hit [N];
  int checks = 0, failures = 0;

  vec_switch #(.N_UNITS(N)) dut (.slice_i(slice), .sub_i(sub), .idx_i(idx), .elem_o(elem), .hit_o(hit));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 300; n++) begin
      int hits [N];
      for (int e = 0; e < 16; e++) slice[e] = 16'($urandom);
      for (int u = 0; u < N; u++) begin idx[u] = 4'($urandom); hits[u] = 0; end
      for (int s = 0; s < 4; s++) begin
        sub = 2'(s);
        #1;
        for (int u = 0; u < N; u++) begin
          logic exp_hit;
          exp_hit = (int'(idx[u]) >= 4*s) && (int'(idx[u]) < 4*s + 4);
          checks++;
          if (hit[u] != exp_hit) failures++;
          if (exp_hit) begin
            hits[u]++;
            checks++;
            if (elem[u] != slice[idx[u]]) failures++;
          end
        end
      end
      for (int u = 0; u < N; u++) begin
        checks++;
        if (hits[u] != 1) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
