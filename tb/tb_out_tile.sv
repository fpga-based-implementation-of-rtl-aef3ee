// tb_out_tile: small output tile (7 inputs, 4 nodes). Accumulates random images, captures,
// runs the serial comparison and checks the class against a model, the cls_valid timing
// (N_OUT clocks after cmp_en rises) and the lowest-index rule on ties.
module tb_out_tile;
  import dnn_pkg::*;
  localparam int NI = 7, NO = 4;
  logic clk = 0, rst_n = 0, en = 0, rstnet = 0, cap = 0, cmp_en = 0, ld_we = 0, cls_valid;
  logic [3:0] in_idx = 0, ld_row = 0;
  logic [7:0] din = 0, cls;
  logic [6:0] ld_word = 0;
  ld_kind_e ld_kind = LD_WEIGHT;
  logic [31:0] ld_data = 0;
  int wt [NI][NO];
  int bias [NO];
  int checks = 0, failures = 0, n_tie = 0;

  out_tile #(.N_IN(NI), .N_OUT(NO), .IDX_W(4)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int img = 0; img < 40; img++) begin
      int x [NI];
      longint acc [NO];
      int best, lat;
      logic tie;
      tie = (img % 4 == 3);
      // (re)load weights and biases; every fourth image uses equal columns to force ties
      for (int k = 0; k < NI; k++) begin
        logic [31:0] row;
        for (int j = 0; j < NO; j++) begin
          wt[k][j] = tie ? ((k * 7) % 50 - 20) : int'($urandom_range(0, 255)) - 128;
          row[8*j +: 8] = 8'(wt[k][j]);
        end
        @(negedge clk); ld_we = 1; ld_kind = LD_WEIGHT; ld_row = 4'(k); ld_word = 0; ld_data = row;
      end
      for (int j = 0; j < NO; j++) begin
        bias[j] = tie ? 5 : int'($urandom_range(0, 4000)) - 2000;
        @(negedge clk); ld_we = 1; ld_kind = LD_BIAS; ld_row = 4'(j); ld_data = 32'(bias[j]);
      end
      @(negedge clk); ld_we = 0;
      for (int k = 0; k < NI; k++) x[k] = $urandom_range(0, 255);
      rstnet = 1;
      @(negedge clk); rstnet = 0;
      for (int k = 0; k <= NI; k++) begin
        en = (k < NI); in_idx = 4'(k); din = (k > 0) ? 8'(x[k-1]) : 8'h0;
        @(negedge clk);
      end
      en = 0; cap = 1;
      @(negedge clk); cap = 0;
      best = 0;
      for (int j = 0; j < NO; j++) begin
        acc[j] = bias[j];
        for (int k = 0; k < NI; k++) acc[j] += wt[k][j] * x[k];
        if (acc[j] > acc[best]) best = j;
      end
      if (tie) n_tie++;
      cmp_en = 1; lat = 0;
      while (!cls_valid && lat < 20) begin @(negedge clk); lat++; if (lat == NO) cmp_en = 0; end
      cmp_en = 0;
      checks += 2;
      if (lat != NO) begin failures++; $display("latency %0d", lat); end
      if (int'(cls) != best) begin failures++; $display("img %0d cls %0d expected %0d", img, cls, best); end
      @(negedge clk);
    end
    if (n_tie == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
