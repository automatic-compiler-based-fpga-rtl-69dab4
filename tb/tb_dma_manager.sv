// tb_dma_manager: descriptor lists for every operation, with random ready.
module tb_dma_manager;
  import train_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, desc_valid, desc_ready, done;
  layer_cfg_t cfg;
  desc_t desc;
  int checks = 0, failures = 0;
  dma_manager dut (.*);
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    desc_t exp [4];
    int n;
    start = 0; desc_ready = 0; cfg = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      cfg = '0;
      cfg.op = op_e'($urandom_range(4)); cfg.phase = phase_e'($urandom_range(2));
      cfg.nch = 8'($urandom_range(20) + 1); cfg.nix = 5'($urandom_range(9) + 1);
      cfg.nk = 4'($urandom_range(7) + 1); cfg.nof = 8'($urandom_range(15) + 1);
      cfg.nelem = 16'($urandom_range(1) ? $urandom_range(999) + 1 : 0);
      cfg.first_img = $urandom_range(1); cfg.batch_done = $urandom_range(1);
      cfg.in_base = AW'($urandom); cfg.w_base = AW'($urandom); cfg.aux_base = AW'($urandom);
      cfg.aux2_base = AW'($urandom);
      n = 0;
      case (cfg.op)
        OP_CONV: begin
          exp[n++] = '{DST_INPUT, cfg.in_base, 16'(cfg.nch*cfg.nix*cfg.nix)};
          if (cfg.phase == PH_WU) exp[n++] = '{DST_LGRAD, cfg.w_base, 16'(cfg.nof*cfg.nk*cfg.nk)};
          else if (cfg.nelem != 0) exp[n++] = '{DST_WEIGHT, cfg.w_base, cfg.nelem};
        end
        OP_POOL, OP_UPSAMP: exp[n++] = '{DST_INPUT, cfg.in_base, 16'(cfg.nch*cfg.nix*cfg.nix)};
        OP_LOSS: begin
          exp[n++] = '{DST_INPUT, cfg.in_base, 16'(cfg.nch)};
          exp[n++] = '{DST_OLDW, cfg.aux_base, 16'(cfg.nch)};
        end
        default: begin
          exp[n++] = '{DST_CURG, cfg.aux2_base, cfg.nelem};
          if (!cfg.first_img) exp[n++] = '{DST_OLDG, cfg.in_base, cfg.nelem};
          if (cfg.batch_done) begin
            exp[n++] = '{DST_OLDW, cfg.w_base, cfg.nelem};
            exp[n++] = '{DST_MOMG, cfg.aux_base, cfg.nelem};
          end
        end
      endcase
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      for (int i = 0; i < n; i++) begin
        desc_ready = 0;
        while (!desc_ready) begin
          desc_ready = $urandom_range(1);
          #1;
          if (desc_ready) begin
            checks++;
            if (!desc_valid || desc != exp[i]) begin failures++; $display("FAIL op %0d desc %0d", cfg.op, i); end
          end
          @(negedge clk);
        end
      end
      desc_ready = 0;
      #1; checks++; if (!done || desc_valid) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
