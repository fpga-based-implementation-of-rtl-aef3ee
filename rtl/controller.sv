// controller: sequencer of the layer pipeline.
//
// One image slot is RST0 (rstnet, Bias0), RUN0 (pass 0, selnet = 0), RST1 (rstnet, Bias1,
// tiles capture the pass-0 results), RUN1 (pass 1, selnet = 1) and NEXT (tiles capture the
// pass-1 results); then cnt_digit advances and the next slot begins. In each RUN state the
// index counter cnt runs 0..PLEN-1 and every tile whose layer has M inputs is enabled for
// cnt < M. The tiles form a pipeline: in slot s hidden tile t works on image s - t and the
// output tile (pass 1 only) on image s - N_LAYERS; the comparison of image s - N_LAYERS - 1
// runs in the first N_OUT clocks of pass 0 and its class is written back (we_res) in pass 1
// at cnt = N_IN, when tile 1 no longer reads the image memory. A batch therefore takes
// N_IMG + N_LAYERS + 1 slots; then fin is raised and the controller waits in IDLE.
//
// Interface: start (level, a rising edge starts a batch) and bank (which BRAM holds the
// batch, sampled at the start) come from GPIO0; fin goes to GPIO1 and stays high until the
// next start. rd_baddr/wr_baddr are byte addresses in the selected BRAM.
// From the paper: the state names, rstnet, selnet, the per-tile enables (784/1022/1022 and 10
// clocks long in the timing diagram), weBRAM in pass 1 after tile 1's inputs end, cntDigit and
// fin after a batch of 100 images. Own choices: the pass length max(N_IN, N_HID) + 2, the
// extra slots that drain the pipeline, the result address map.
module controller
  import dnn_pkg::*;
#(
  parameter int unsigned N_IMG    = 100,
  parameter int unsigned N_IN     = 784,
  parameter int unsigned N_HID    = 1022,
  parameter int unsigned N_LAYERS = 3,
  parameter int unsigned N_OUT    = 10,
  parameter int unsigned IDX_W    = 10,
  parameter int unsigned BA_W     = 17
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic                bank,
  output ctrl_state_e         state,
  output logic                idle,
  output logic                rstnet,
  output logic                selnet,
  output logic [IDX_W-1:0]    cnt,
  output logic [N_LAYERS-1:0] en_tile,
  output logic                en_out,
  output logic                cap0,
  output logic                cap1,
  output logic                cmp_en,
  output logic                rd_en,
  output logic [BA_W-1:0]     rd_baddr,
  output logic                we_res,
  output logic [BA_W-1:0]     wr_baddr,
  output logic                bank_q,
  output logic [7:0]          cnt_digit,
  output logic                fin
);

  localparam int unsigned PLEN     = ((N_IN > N_HID) ? N_IN : N_HID) + 2;
  localparam int unsigned N_SLOT   = N_IMG + N_LAYERS + 1;
  localparam int unsigned RES_BASE = N_IMG * N_IN;

  initial assert (PLEN <= (1 << IDX_W)) else $error("controller: IDX_W too small");
  initial assert (N_OUT < N_IN)         else $error("controller: N_OUT must be below N_IN");

  logic            start_q;
  logic [BA_W-1:0] img_base;
  logic            running;
  int unsigned     slot;

  assign slot    = 32'(cnt_digit);
  assign running = (state == S_RUN0) || (state == S_RUN1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      start_q   <= 1'b0;
      cnt       <= '0;
      cnt_digit <= '0;
      img_base  <= '0;
      bank_q    <= 1'b0;
      fin       <= 1'b0;
    end else begin
      start_q <= start;
      unique case (state)
        S_IDLE: if (start && !start_q) begin
          bank_q    <= bank;
          fin       <= 1'b0;
          cnt_digit <= '0;
          img_base  <= '0;
          state     <= S_RST0;
        end
        S_RST0: begin cnt <= '0; state <= S_RUN0; end
        S_RUN0: begin
          if (32'(cnt) == PLEN - 1) state <= S_RST1;
          else                      cnt   <= cnt + 1'b1;
        end
        S_RST1: begin cnt <= '0; state <= S_RUN1; end
        S_RUN1: begin
          if (32'(cnt) == PLEN - 1) state <= S_NEXT;
          else                      cnt   <= cnt + 1'b1;
        end
        S_NEXT: begin
          if (slot == N_SLOT - 1) begin
            fin   <= 1'b1;
            state <= S_IDLE;
          end else begin
            cnt_digit <= cnt_digit + 8'd1;
            img_base  <= img_base + BA_W'(N_IN);
            state     <= S_RST0;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    idle   = (state == S_IDLE);
    rstnet = (state == S_RST0) || (state == S_RST1);
    selnet = (state == S_RST1) || (state == S_RUN1) || (state == S_NEXT);
    cap0   = (state == S_RST1);
    cap1   = (state == S_NEXT);
    for (int t = 0; t < N_LAYERS; t++)
      en_tile[t] = running && (32'(cnt) < ((t == 0) ? N_IN : N_HID))
                   && (slot >= 32'(t)) && (slot - 32'(t) < N_IMG);
    en_out   = (state == S_RUN1) && (32'(cnt) < N_HID)
               && (slot >= N_LAYERS) && (slot - N_LAYERS < N_IMG);
    cmp_en   = (state == S_RUN0) && (32'(cnt) < N_OUT) && (slot >= N_LAYERS + 1);
    rd_en    = en_tile[0];
    rd_baddr = img_base + BA_W'(cnt);
    we_res   = (state == S_RUN1) && (32'(cnt) == N_IN) && (slot >= N_LAYERS + 1);
    wr_baddr = BA_W'(RES_BASE + slot - (N_LAYERS + 1));
  end

  // the PUs are never loaded and enabled in the same clock
  a_rst_excl: assert property (@(posedge clk) disable iff (!rst_n) !(rstnet && (|en_tile || en_out)));
  // image-memory port is never read and written in the same clock
  a_port_excl: assert property (@(posedge clk) disable iff (!rst_n) !(rd_en && we_res));

endmodule
