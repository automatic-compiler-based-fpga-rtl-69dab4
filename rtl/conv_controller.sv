// conv_controller: loop sequencer of the MAC array ("Conv/FC control").
//
// After `start` it walks  for c in 0..n_outer-1, for ky in 0..nk-1,
// for kx in 0..nk-1  and presents one step per cycle (step, c, ky, kx).
// `first` marks the step that starts a new sum and `last` the step that ends
// one, after which the result is taken from the array:
//   sum_all = 1 : one sum over every map and kernel position (FP/BP conv, FC);
//   sum_all = 0 : one sum per outer index (WU map groups, pooling windows,
//                 upsampling, element-wise steps).
// The WU use of one outer loop over the input maps, with the local gradients
// as a large kernel, is the paper's way of reusing the FP control. `done`
// pulses in the cycle after the final step. `hold` pauses the walk.
module conv_controller (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        hold,
  input  logic [15:0] n_outer,
  input  logic [3:0]  nk,
  input  logic        sum_all,
  output logic        busy,
  output logic        step,
  output logic [15:0] c,
  output logic [3:0]  ky, kx,
  output logic        first,
  output logic        last,
  output logic        done
);
  logic end_k, end_c;
  assign end_k = (kx == nk - 4'd1) && (ky == nk - 4'd1);
  assign end_c = (c == n_outer - 16'd1);
  assign step  = busy && !hold;
  assign first = step && (kx == 0) && (ky == 0) && (sum_all ? (c == 0) : 1'b1);
  assign last  = step && end_k && (sum_all ? end_c : 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; c <= '0; ky <= '0; kx <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= (n_outer != 0) && (nk != 0);
        done <= (n_outer == 0) || (nk == 0);
        c <= '0; ky <= '0; kx <= '0;
      end else if (step) begin
        if (kx != nk - 4'd1) kx <= kx + 4'd1;
        else begin
          kx <= '0;
          if (ky != nk - 4'd1) ky <= ky + 4'd1;
          else begin
            ky <= '0;
            if (end_c) begin busy <= 1'b0; done <= 1'b1; c <= '0; end
            else c <= c + 16'd1;
          end
        end
      end
    end
  end
endmodule
