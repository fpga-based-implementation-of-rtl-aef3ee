// tb_controller: runs two small batches (3 images, 6 inputs, 8 hidden nodes, 3 layers,
// 2 outputs) and checks the slot length, the number of slots, the per-pass enable lengths
// of every tile, the pipeline offsets (tile t active from slot t), rstnet/selnet/capture
// placement, the result writes (address, cycle) and fin.
module tb_controller;
  import dnn_pkg::*;
  localparam int NIMG = 3, NI = 6, NH = 8, NL = 3, NO = 2;
  localparam int PLEN = NH + 2, SLOT = 2 * PLEN + 3, NSLOT = NIMG + NL + 1;

  logic clk = 0, rst_n = 0, start = 0, bank = 0;
  ctrl_state_e state;
  logic idle, rstnet, selnet, en_out, cap0, cap1, cmp_en, rd_en, we_res, bank_q, fin;
  logic [3:0] cnt;
  logic [NL-1:0] en_tile;
  logic [8:0] rd_baddr, wr_baddr;
  logic [7:0] cnt_digit;

  controller #(.N_IMG(NIMG), .N_IN(NI), .N_HID(NH), .N_LAYERS(NL), .N_OUT(NO),
               .IDX_W(4), .BA_W(9)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int en_cnt [NL][NSLOT][2];
  int out_cnt [NSLOT], cmp_cnt [NSLOT], we_cnt, rst_cnt, cycles;
  int we_addr [$];
  int rd_last;

  task automatic chk(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int batch = 0; batch < 2; batch++) begin
      foreach (en_cnt[a, b, c]) en_cnt[a][b][c] = 0;
      foreach (out_cnt[a]) begin out_cnt[a] = 0; cmp_cnt[a] = 0; end
      we_cnt = 0; rst_cnt = 0; cycles = 0; we_addr.delete();
      bank = batch[0];
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      chk(state == S_RST0 && bank_q == bank, "start");
      while (!fin && cycles < 5000) begin
        int s;
        s = int'(cnt_digit);
        for (int t = 0; t < NL; t++) if (en_tile[t]) en_cnt[t][s][int'(selnet)]++;
        if (en_out) begin out_cnt[s]++; chk(selnet, "en_out outside pass 1"); end
        if (cmp_en) begin cmp_cnt[s]++; chk(!selnet, "cmp outside pass 0"); end
        if (rstnet) begin rst_cnt++; chk(state == S_RST0 || state == S_RST1, "rstnet state"); end
        if (cap0) chk(state == S_RST1, "cap0 state");
        if (cap1) chk(state == S_NEXT, "cap1 state");
        if (we_res) begin we_cnt++; we_addr.push_back(int'(wr_baddr)); chk(int'(cnt) == NI, "we cycle"); end
        if (rd_en) chk(int'(rd_baddr) == s * NI + int'(cnt), "rd address");
        if (state == S_RUN0 || state == S_RUN1) chk(selnet == (state == S_RUN1), "selnet");
        @(negedge clk); cycles++;
      end
      chk(cycles == NSLOT * SLOT, $sformatf("batch cycles %0d expected %0d", cycles, NSLOT * SLOT));
      chk(rst_cnt == 2 * NSLOT, "rstnet count");
      for (int s = 0; s < NSLOT; s++) begin
        for (int t = 0; t < NL; t++)
          for (int p = 0; p < 2; p++) begin
            int exp_n;
            exp_n = (s >= t && s - t < NIMG) ? ((t == 0) ? NI : NH) : 0;
            chk(en_cnt[t][s][p] == exp_n, $sformatf("tile %0d slot %0d pass %0d: %0d", t, s, p, en_cnt[t][s][p]));
          end
        chk(out_cnt[s] == ((s >= NL && s - NL < NIMG) ? NH : 0), "output tile enable");
        chk(cmp_cnt[s] == ((s >= NL + 1) ? NO : 0), "compare enable");
      end
      chk(we_cnt == NIMG, "result writes");
      for (int i = 0; i < we_addr.size(); i++) chk(we_addr[i] == NIMG * NI + i, "result address");
      chk(idle && fin, "idle and fin at end");
      repeat (5) @(negedge clk);
      chk(fin && idle, "fin held");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
