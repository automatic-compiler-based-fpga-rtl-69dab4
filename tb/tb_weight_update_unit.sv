// tb_weight_update_unit: accumulation and SGD-with-momentum update,
// w_new = w + beta*m - alpha*(g_old + g_cur), with Q0.16 alpha and beta.
module tb_weight_update_unit;
  import train_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic en, first_img, batch_done, vld;
  logic [15:0] alpha, beta;
  data_t w_old, m_old, g_old, g_cur, g_acc, w_new;
  int checks = 0, failures = 0;
  weight_update_unit dut (.*);
  function automatic int sat(longint v);
    return (v > 32767) ? 32767 : (v < -32768) ? -32768 : int'(v);
  endfunction
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    en = 0; first_img = 0; batch_done = 0; alpha = 0; beta = 0;
    w_old = 0; m_old = 0; g_old = 0; g_cur = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 1000; t++) begin
      int g, w;
      longint bm, ag;
      @(negedge clk);
      en = 1; first_img = ($urandom_range(3) == 0); batch_done = $urandom_range(1);
      alpha = 16'($urandom); beta = 16'($urandom);
      w_old = data_t'($urandom); m_old = data_t'($urandom); g_old = data_t'($urandom); g_cur = data_t'($urandom);
      g  = sat((first_img ? 0 : longint'(g_old)) + g_cur);
      bm = (longint'(m_old) * longint'(beta) + 32768) >>> 16;
      ag = (longint'(g) * longint'(alpha) + 32768) >>> 16;
      w  = batch_done ? sat(longint'(w_old) + bm - ag) : int'(w_old);
      @(negedge clk); en = 0;
      checks += 3;
      if (!vld) failures++;
      if (int'(g_acc) != g) failures++;
      if (int'(w_new) != w) begin failures++; if (failures < 10) $display("FAIL w %0d exp %0d", w_new, w); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
