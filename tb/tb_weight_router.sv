// tb_weight_router: phase selection and row masking.
module tb_weight_router;
  import train_pkg::*;
  localparam int POF = 6;
  phase_e phase;
  logic [7:0] nrows;
  data_t twb [POF], lgrad [POF], wt [POF];
  int checks = 0, failures = 0;
  weight_router #(.POF(POF)) dut (.*);
  initial begin
    for (int t = 0; t < 300; t++) begin
      phase = phase_e'($urandom_range(2));
      nrows = 8'($urandom_range(POF + 1));
      for (int f = 0; f < POF; f++) begin twb[f] = data_t'($urandom); lgrad[f] = data_t'($urandom); end
      #1;
      for (int f = 0; f < POF; f++) begin
        automatic data_t e = (f >= nrows) ? data_t'(0) : (phase == PH_WU) ? lgrad[f] : twb[f];
        checks++;
        if (wt[f] != e) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
