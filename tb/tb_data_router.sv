// tb_data_router: with a behavioural input buffer, checks the pixel each
// column receives for stride/pad windows (normal mode) and for the
// load-balanced WU mode (group g reads map c*ngroups+g).
module tb_data_router;
  import train_pkg::*;
  localparam int POX = 8, POY = 8, NCH = 8, TI = 10, N = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic en, wu_mode, lb_en;
  logic [15:0] c;
  logic [3:0] ky, kx, nox;
  logic [1:0] stride, pad;
  logic [4:0] nix;
  logic [7:0] nch;
  logic [2:0] ngroups;
  logic [2:0] r_ch [N];
  logic [3:0] r_y [N], r_x [N];
  data_t rdata [N], pix [N];
  logic pix_ok [N];
  int img [NCH][TI][TI];
  int checks = 0, failures = 0;
  data_router #(.POX(POX), .POY(POY), .NCH(NCH), .TI(TI), .MAXG(4)) dut (.*);
  // behavioural buffer
  always_comb for (int p = 0; p < N; p++)
    rdata[p] = (r_y[p] < TI && r_x[p] < TI) ? data_t'(img[r_ch[p]][r_y[p]][r_x[p]]) : data_t'(-1);
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < NCH; i++) for (int y = 0; y < TI; y++) for (int x = 0; x < TI; x++)
      img[i][y][x] = $urandom_range(30000) + 1;
    en = 0; wu_mode = 0; lb_en = 0; c = 0; ky = 0; kx = 0; nox = 0; stride = 1; pad = 0; nix = 0; nch = 8;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      wu_mode = t[0]; lb_en = t[1];
      stride = wu_mode ? 2'd1 : 2'($urandom_range(2) + 1);
      pad = 2'($urandom_range(1));
      nix = 5'($urandom_range(TI - 4) + 4);
      nox = wu_mode ? 4'($urandom_range(3) + 1) : 4'($urandom_range(7) + 1);
      c = wu_mode ? 16'($urandom_range(1)) : 16'($urandom_range(NCH-1));
      ky = 4'($urandom_range(2)); kx = 4'($urandom_range(2));
      nch = 8'($urandom_range(NCH - 1) + 1);
      en = 1;
      @(negedge clk); en = 0;
      for (int p = 0; p < N; p++) begin
        automatic int ox = p % POX, oy = p / POX, iy, ix, ch, g, gpr, ng, k, okv, e;
        if (wu_mode) begin
          k = int'(nox);
          gpr = POX / k;
          ng = lb_en ? ((gpr*gpr > 4) ? 4 : gpr*gpr) : 1;
          g = lb_en ? (oy/k)*gpr + ox/k : 0;
          okv = lb_en ? ((ox/k) < gpr && (oy/k) < gpr && g < ng) : (ox < k && oy < k);
          ch = int'(c)*ng + g;
          okv = okv && (ch < int'(nch));
          iy = oy % k + int'(ky) - int'(pad); ix = ox % k + int'(kx) - int'(pad);
          if (!lb_en) begin iy = oy + int'(ky) - int'(pad); ix = ox + int'(kx) - int'(pad); end
        end else begin
          ch = int'(c);
          okv = (ox < int'(nox) && oy < int'(nox));
          iy = oy*int'(stride) + int'(ky) - int'(pad); ix = ox*int'(stride) + int'(kx) - int'(pad);
        end
        checks++;
        if (pix_ok[p] != okv[0]) failures++;
        if (okv) begin
          e = (iy >= 0 && ix >= 0 && iy < int'(nix) && ix < int'(nix)) ? img[ch][iy][ix] : 0;
          checks++;
          if (int'(pix[p]) != e) begin failures++;
            if (failures < 10) $display("FAIL t%0d p%0d got %0d exp %0d", t, p, pix[p], e); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
