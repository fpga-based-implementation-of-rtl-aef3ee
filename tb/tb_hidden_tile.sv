// tb_hidden_tile: a small hidden tile (6 inputs, 8 nodes, 4 PUs) run through three images
// with the two-pass schedule. Checks every node output (x Delta, sigmoid) against an integer
// model, that the outputs of an image stay readable while the next image is processed, and
// that both halves of each PU (Bias0/Bias1, both weight halves) are used.
module tb_hidden_tile;
  import dnn_pkg::*;
  import dnn_ref_pkg::*;
  localparam int NI = 6, NN = 8, NP = NN / 2;

  logic clk = 0, rst_n = 0, en = 0, rstnet = 0, sel = 0, cap0 = 0, cap1 = 0, ld_we = 0;
  logic [3:0] in_idx = 0, out_idx = 0, ld_row = 0;
  logic [7:0] din = 0, dout;
  logic [6:0] ld_word = 0;
  ld_kind_e ld_kind = LD_WEIGHT;
  logic [31:0] ld_data = 0;

  int wq [NI][NN];
  int bias [NN];
  int delta;
  int x [NI];
  int expect_out [NN];
  int checks = 0, failures = 0;

  hidden_tile #(.N_IN(NI), .N_NODE(NN), .IDX_W(4)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load;
    for (int k = 0; k < NI; k++) begin
      logic [31:0] row = 0;
      for (int j = 0; j < NN; j++) begin
        wq[k][j] = $urandom_range(0, 7);
        row[3*j +: 3] = 3'(wq[k][j]);
      end
      @(negedge clk); ld_we = 1; ld_kind = LD_WEIGHT; ld_row = 4'(k); ld_word = 0; ld_data = row;
    end
    for (int j = 0; j < NN; j++) begin
      bias[j] = $urandom_range(0, 2000) - 1000;
      @(negedge clk); ld_we = 1; ld_kind = LD_BIAS; ld_row = 4'(j); ld_data = 32'(bias[j]);
    end
    delta = $urandom_range(120, 255);
    @(negedge clk); ld_we = 1; ld_kind = LD_DELTA; ld_data = 32'(delta);
    @(negedge clk); ld_we = 0;
  endtask

  // one pass: rstnet (with cap0 before pass 1), NI inputs, one drain clock
  task automatic pass(input logic s);
    @(negedge clk); rstnet = 1; sel = s; cap0 = s;
    @(negedge clk); rstnet = 0; cap0 = 0;
    for (int k = 0; k <= NI; k++) begin
      en = (k < NI); in_idx = 4'(k);
      din = (k > 0) ? 8'(x[k-1]) : 8'h00;
      @(negedge clk);
    end
    en = 0; din = 8'($urandom);
  endtask

  task automatic check_outputs(input string tag);
    for (int j = 0; j < NN; j++) begin
      out_idx = 4'(j);
      #1;
      checks++;
      if (int'(dout) != expect_out[j]) begin
        failures++;
        $display("%s node %0d dout %0d expected %0d", tag, j, dout, expect_out[j]);
      end
    end
  endtask

  initial begin
    int prev [NN];
    repeat (3) @(negedge clk);
    rst_n = 1;
    load();
    for (int img = 0; img < 3; img++) begin
      for (int k = 0; k < NI; k++) x[k] = $urandom_range(0, 255);
      pass(0);
      if (img > 0) check_outputs("during pass0");
      pass(1);
      if (img > 0) check_outputs("during pass1");
      @(negedge clk); cap1 = 1;
      @(negedge clk); cap1 = 0;
      for (int j = 0; j < NN; j++) begin
        longint acc;
        acc = bias[j];
        for (int k = 0; k < NI; k++) acc += wq_val(wq[k][j]) * x[k];
        expect_out[j] = hid_out(acc, delta);
      end
      check_outputs("after cap1");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
