// tb_dsd: drives numbered samples through a DSD with D = 4 for two blocks
// of 8 pairs (lane 0 carries sample t, lane 1 sample 8+t of each block) and
// checks that the outputs are the pairs (k, k+4) and (8+k, 12+k) regrouped
// as the next butterfly stage needs, D cycles after the input.
module tb_dsd;
  localparam int D = 4;
  localparam int W = 16;
  logic clk = 0, rst_n = 0, in_valid = 0, in_first = 0;
  logic [W-1:0] x0 = 0, x1 = 0, y0, y1;
  logic out_valid, out_first;
  int checks = 0, failures = 0, cyc = 0;
  dsd #(.W(W), .D(D)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin repeat (1000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  int t_in, t_out;
  initial begin
    repeat (2) @(posedge clk); rst_n = 1; @(posedge clk);
    for (int blk = 0; blk < 2; blk++)
      for (int t = 0; t < 2*D; t++) begin
        in_valid <= 1; in_first <= (t == 0);
        x0 <= W'(blk*256 + t); x1 <= W'(blk*256 + 2*D + t);
        @(posedge clk);
      end
    in_valid <= 0; in_first <= 0;
    repeat (3*D) @(posedge clk);
  end
  int u = -1, blk_o = -1;
  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_first && blk_o < 0 && u < 0) t_in = cyc;
    if (out_first) begin blk_o++; u = 0; if (blk_o == 0) begin t_out = cyc; checks++; if (t_out - t_in != D) failures++; end end
    if (u >= 0 && u < 2*D && blk_o >= 0) begin
      int e0, e1;
      // first half: (k, k+D); second half: (2D+k, 3D+k)
      if (u < D) begin e0 = u; e1 = u + D; end
      else       begin e0 = 2*D + (u - D); e1 = 3*D + (u - D); end
      checks += 2;
      if (y0 != W'(blk_o*256 + e0)) begin failures++; $display("u%0d y0=%0d exp %0d", u, y0, e0); end
      if (y1 != W'(blk_o*256 + e1)) begin failures++; $display("u%0d y1=%0d exp %0d", u, y1, e1); end
      u++;
      if (u == 2*D && blk_o == 1) begin $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
    end
  end
endmodule
