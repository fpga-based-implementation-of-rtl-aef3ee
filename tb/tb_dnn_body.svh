// Shared body of the end-to-end testbenches of dnn_top. The including module defines the
// localparams N_IMG, N_IN, N_HID, N_LAYERS, N_OUT, IDX_W, AW and N_BATCH and instantiates
// dnn_top as "dut" on the signals declared here; it also holds a watchdog
// of WATCHDOG clocks.
//
// The testbench writes random weights, biases and Delta values through the load port, writes
// a batch of random images into BRAM0 through the processing-system port, starts the batch,
// fills BRAM1 with the next batch while the first one runs, starts that one on BRAM1, and so
// on. Every recognised class read back from the BRAMs is compared with an integer model of the
// network. It also checks the batch length in clocks and counts the mechanisms of the design.

  import dnn_pkg::*;
  import dnn_ref_pkg::*;

  localparam int PLEN     = ((N_IN > N_HID) ? N_IN : N_HID) + 2;
  localparam int SLOT     = 2 * PLEN + 3;
  localparam int N_SLOT   = N_IMG + N_LAYERS + 1;
  localparam int NW_H     = (3 * N_HID + 31) / 32;
  localparam int NW_O     = (8 * N_OUT + 31) / 32;
  localparam int RES_BASE = N_IMG * N_IN;

  logic            clk = 0, rst_n = 0;
  logic            ps0_en = 0, ps1_en = 0;
  logic [3:0]      ps0_we = 0, ps1_we = 0;
  logic [AW-1:0]   ps0_addr = 0, ps1_addr = 0;
  logic [31:0]     ps0_wdata = 0, ps1_wdata = 0, ps0_rdata, ps1_rdata;
  logic [1:0]      gpio0 = 0;
  logic [0:0]      gpio1;
  logic            ld_we = 0;
  logic [2:0]      ld_layer = 0;
  logic [1:0]      ld_kind = 0;
  logic [IDX_W-1:0] ld_row = 0;
  logic [6:0]      ld_word = 0;
  logic [31:0]     ld_data = 0;

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint unsigned cyc = 0;
  always @(posedge clk) cyc++;

  // network parameters and data of the model
  byte unsigned wh [];     // hidden weight codes, [(l*N_HID + k)*N_HID + j]
  int           bh [];     // hidden biases, [l*N_HID + j]
  int           dl [N_LAYERS];
  byte          wo [];     // output weights, [k*N_OUT + j]
  int           bo [N_OUT];
  byte unsigned img [];    // current batch, [n*N_IN + p]
  int           expect_cls [];
  int           n_sat16 = 0, n_sig_lo = 0, n_sig_hi = 0;

  // mechanism counters, sampled from the design
  int n_pass1 = 0, n_cap1 = 0, n_overlap = 0, n_cmp = 0, n_we = 0, n_fin = 0, n_bank1 = 0;
  logic fin_q = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_ctrl.state == S_RST1) n_pass1++;
    if (dut.cap1) n_cap1++;
    if ((&dut.en_tile) && dut.en_out) n_overlap++;
    if (dut.cls_valid) n_cmp++;
    if (dut.we_res) n_we++;
    if (dut.bank_q && dut.u_ctrl.state == S_RST0) n_bank1++;
    fin_q <= gpio1[0];
    if (gpio1[0] && !fin_q) n_fin++;
  end

  task automatic chk(input logic c, input string msg);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", msg);
    end
  endtask

  task automatic load_word(input int layer, input int kind, input int row, input int word,
                           input logic [31:0] data);
    @(negedge clk);
    ld_we = 1; ld_layer = 3'(layer); ld_kind = 2'(kind); ld_row = IDX_W'(row);
    ld_word = 7'(word); ld_data = data;
  endtask

  task automatic load_network();
    real sd;
    for (int l = 0; l < N_LAYERS; l++) begin
      int rows;
      rows = (l == 0) ? N_IN : N_HID;
      sd = $sqrt(real'(rows)) * 166.0;
      dl[l] = int'(30.0 * 4096.0 / sd);
      if (dl[l] > 255) dl[l] = 255;
      if (dl[l] < 1) dl[l] = 1;
      for (int k = 0; k < rows; k++) begin
        logic [NW_H*32-1:0] bits;
        bits = '0;
        for (int j = 0; j < N_HID; j++) begin
          wh[(l * N_HID + k) * N_HID + j] = 8'($urandom_range(0, 7));
          bits[3*j +: 3] = 3'(wh[(l * N_HID + k) * N_HID + j]);
        end
        for (int c = 0; c < NW_H; c++) load_word(l, LD_WEIGHT, k, c, bits[32*c +: 32]);
      end
      for (int j = 0; j < N_HID; j++) begin
        bh[l * N_HID + j] = int'($urandom_range(0, 2 * int'(sd))) - int'(sd);
        if (j == 0) bh[l * N_HID + j] = 32767;    // one node driven into 16-bit saturation
        load_word(l, LD_BIAS, j, 0, 32'(bh[l * N_HID + j]));
      end
      load_word(l, LD_DELTA, 0, 0, 32'(dl[l]));
    end
    for (int k = 0; k < N_HID; k++) begin
      logic [NW_O*32-1:0] bits;
      bits = '0;
      for (int j = 0; j < N_OUT; j++) begin
        wo[k * N_OUT + j] = 8'($urandom);
        bits[8*j +: 8] = 8'(wo[k * N_OUT + j]);
      end
      for (int c = 0; c < NW_O; c++) load_word(N_LAYERS, LD_WEIGHT, k, c, bits[32*c +: 32]);
    end
    for (int j = 0; j < N_OUT; j++) begin
      bo[j] = int'($urandom_range(0, 4000)) - 2000;
      load_word(N_LAYERS, LD_BIAS, j, 0, 32'(bo[j]));
    end
    @(negedge clk); ld_we = 0;
  endtask

  // integer model of the whole network for the current batch
  task automatic model_batch();
    int x [];
    int y [];
    for (int n = 0; n < N_IMG; n++) begin
      longint acc;
      longint best_v;
      int best;
      x = new[N_IN];
      for (int p = 0; p < N_IN; p++) x[p] = img[n * N_IN + p];
      for (int l = 0; l < N_LAYERS; l++) begin
        y = new[N_HID];
        for (int j = 0; j < N_HID; j++) begin
          acc = bh[l * N_HID + j];
          for (int k = 0; k < x.size(); k++)
            acc += wq_val(int'(wh[(l * N_HID + k) * N_HID + j])) * x[k];
          if (acc > 32767 || acc < -32768) n_sat16++;
          y[j] = hid_out(acc, dl[l]);
          if (y[j] == 0) n_sig_lo++;
          if (y[j] == 255) n_sig_hi++;
        end
        x = y;
      end
      best = 0; best_v = 0;
      for (int j = 0; j < N_OUT; j++) begin
        acc = bo[j];
        for (int k = 0; k < N_HID; k++) acc += longint'(wo[k * N_OUT + j]) * x[k];
        if (j == 0 || acc > best_v) begin best_v = acc; best = j; end
      end
      expect_cls[n] = best;
    end
  endtask

  // processing-system side of one BRAM
  task automatic ps_write(input int bank, input int addr, input logic [31:0] data);
    @(negedge clk);
    if (bank == 0) begin ps0_en = 1; ps0_we = 4'hf; ps0_addr = AW'(addr); ps0_wdata = data; end
    else           begin ps1_en = 1; ps1_we = 4'hf; ps1_addr = AW'(addr); ps1_wdata = data; end
    @(negedge clk);
    ps0_en = 0; ps0_we = 0; ps1_en = 0; ps1_we = 0;
  endtask

  task automatic ps_read(input int bank, input int addr, output logic [31:0] data);
    @(negedge clk);
    if (bank == 0) begin ps0_en = 1; ps0_addr = AW'(addr); end
    else           begin ps1_en = 1; ps1_addr = AW'(addr); end
    @(negedge clk);
    ps0_en = 0; ps1_en = 0;
    data = (bank == 0) ? ps0_rdata : ps1_rdata;
  endtask

  task automatic write_batch(input int bank);
    for (int i = 0; i < N_IMG * N_IN; i++) img[i] = 8'($urandom);
    for (int a = 0; a < (N_IMG * N_IN + 3) / 4; a++) begin
      logic [31:0] w;
      for (int b = 0; b < 4; b++) w[8*b +: 8] = (4 * a + b < N_IMG * N_IN) ? img[4 * a + b] : 8'h00;
      ps_write(bank, a, w);
    end
  endtask

  task automatic check_results(input int bank, input int batch);
    for (int n = 0; n < N_IMG; n++) begin
      logic [31:0] w;
      int got;
      ps_read(bank, (RES_BASE + n) / 4, w);
      got = int'(w[8 * ((RES_BASE + n) % 4) +: 8]);
      chk(got == expect_cls[n], $sformatf("batch %0d image %0d class %0d expected %0d",
                                          batch, n, got, expect_cls[n]));
    end
  endtask

  initial begin
    int ncls [];
    wh = new[N_LAYERS * N_HID * N_HID];
    bh = new[N_LAYERS * N_HID];
    wo = new[N_HID * N_OUT];
    img = new[N_IMG * N_IN];
    expect_cls = new[N_IMG];
    ncls = new[N_OUT];
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_network();
    write_batch(0);
    for (int batch = 0; batch < N_BATCH; batch++) begin
      int bank;
      longint unsigned t0;
      bank = batch % 2;
      model_batch();
      @(negedge clk); gpio0 = {1'(bank), 1'b1};
      t0 = cyc;
      @(negedge clk); gpio0[0] = 1'b0;
      chk(gpio1[0] == 1'b0, "done cleared at start");
      // the processing system fills the other BRAM while this batch runs
      if (batch + 1 < N_BATCH) begin
        write_batch(1 - bank);
      end
      while (!gpio1[0]) @(negedge clk);
      $display("batch %0d: %0d clocks for %0d images (%0d per slot)", batch, cyc - t0, N_IMG, SLOT);
      chk(cyc - t0 == longint'(N_SLOT * SLOT) + 1, $sformatf("batch length %0d", cyc - t0));
      // the original design needs 2 x 1022 clocks plus an overhead, 2063 in all, per image
      if (N_HID == 1022) chk(SLOT >= 2 * N_HID && SLOT <= 2063, $sformatf("slot of %0d clocks", SLOT));
      check_results(bank, batch);
      for (int n = 0; n < N_IMG; n++) ncls[expect_cls[n]]++;
    end
    $display("mechanisms: pass1=%0d cap1=%0d overlap=%0d compare=%0d weBRAM=%0d fin=%0d bank1=%0d",
             n_pass1, n_cap1, n_overlap, n_cmp, n_we, n_fin, n_bank1);
    $display("model: 16-bit saturations=%0d sigmoid 0=%0d sigmoid 255=%0d", n_sat16, n_sig_lo, n_sig_hi);
    chk(n_pass1 > 0,  "second pass (selnet = 1, Bias1) never ran");
    chk(n_cap1 > 0,   "output registers never captured");
    chk(n_overlap > 0, "tiles never worked on different images at once");
    chk(n_cmp == N_BATCH * N_IMG, "comparisons");
    chk(n_we == N_BATCH * N_IMG, "result writes");
    chk(n_fin == N_BATCH, "done pulses");
    chk(N_BATCH < 2 || n_bank1 > 0, "BRAM1 never used");
    chk(n_sat16 > 0,  "16-bit PU saturation never happened");
    chk(n_sig_lo + n_sig_hi > 0, "sigmoid saturation never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
