// tb_mac_load_balancer: the load-balancing example (8x8 columns, 3x3 kernel
// gradients): 4 groups, 3x3x4 = 36 used columns per MAC row, and the
// position of each column inside its group.
module tb_mac_load_balancer;
  localparam int POX = 8, POY = 8, N = 64;
  logic en;
  logic [3:0] kw;
  logic [2:0] ngroups;
  logic [1:0] grp [N];
  logic [3:0] lx [N], ly [N];
  logic ok [N];
  int checks = 0, failures = 0;
  mac_load_balancer #(.POX(POX), .POY(POY), .MAXG(4)) dut (.*);
  initial begin
    for (int k = 1; k <= 8; k++) for (int e = 0; e < 2; e++) begin
      int used, eg;
      en = e[0]; kw = 4'(k); #1;
      eg = e ? (((8/k)*(8/k) > 4) ? 4 : (8/k)*(8/k)) : 1;
      checks++; if (int'(ngroups) != eg) failures++;
      used = 0;
      for (int p = 0; p < N; p++) begin
        automatic int ox = p % 8, oy = p / 8, g = (oy/k)*(8/k) + ox/k;
        automatic int eok = e ? ((ox/k) < 8/k && (oy/k) < 8/k && g < eg) : (ox < k && oy < k);
        checks++; if (ok[p] != eok[0]) failures++;
        if (ok[p]) begin
          used++;
          checks += 2;
          if (e && (int'(grp[p]) != g)) failures++;
          if (int'(lx[p]) != ox % k || int'(ly[p]) != oy % k) failures++;
        end
      end
      checks++; if (used != k*k*eg) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
