// tb_ppac_plane_serializer: loads random complex vectors and checks that the
// planes come out MSB first, real parts in entries 0..B-1 and imaginary parts
// in B..2B-1, that the all-ones plane overrides, and that a loaded vector
// ignores later changes of the inputs.
module tb_ppac_plane_serializer;
  localparam int unsigned B = 256, L = 7;
  int checks = 0, failures = 0;
  logic clk = 0, load, shift, ones;
  logic signed [L-1:0] y_re [B], y_im [B];
  logic [L-1:0] mr [B], mi [B];
  logic [2*B-1:0] plane, expp;

  ppac_plane_serializer dut (.clk(clk), .load(load), .shift(shift), .ones(ones),
                             .y_re(y_re), .y_im(y_im), .plane(plane));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    load = 0; shift = 0; ones = 0;
    for (int v = 0; v < 20; v++) begin
      for (int i = 0; i < int'(B); i++) begin
        y_re[i] = L'($urandom); y_im[i] = L'($urandom);
        mr[i] = y_re[i]; mi[i] = y_im[i];
      end
      load = 1; shift = 0;
      @(posedge clk); #1 load = 0;
      for (int i = 0; i < int'(B); i++) begin
        y_re[i] = L'($urandom); y_im[i] = L'($urandom);   // must not matter
      end
      for (int l = L - 1; l >= 0; l--) begin
        for (int i = 0; i < int'(B); i++) begin
          expp[i] = mr[i][l]; expp[B + i] = mi[i][l];
        end
        checks++;
        if (plane !== expp) begin
          failures++;
          $display("mismatch v=%0d bit=%0d", v, l);
        end
        ones = 1; #1;
        checks++;
        if (plane !== '1) begin failures++; $display("ones plane wrong"); end
        ones = 0;
        shift = (l != 0);
        @(posedge clk); #1 shift = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
