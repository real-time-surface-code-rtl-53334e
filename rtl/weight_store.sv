// weight_store: on-chip store of the quantized weights of one NN decoder.
//
// Holds the LSTM kernel W_x (4 x 128), recurrent kernel W_h (32 x 128) and
// bias b (128) -- the 4,736 LSTM parameters of the paper -- plus the dense
// kernel W_d (32) and bias b_d (1), all as 6-bit signed words. Every word is
// presented in parallel on the outputs, because the decoder multiplies all
// of them at once. The paper says the trained weights are hot-updated into
// on-chip RAM; the write port below (one word per cycle, address map in
// qec_pkg: W_x, then W_h, b, W_d, b_d, each row-major with the gate column
// innermost) is this design's choice, as is the read-back port. A write takes
// effect on the next clock edge, also while the decoder runs. Reset clears
// every word to zero.
module weight_store
  import qec_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  // host write / read-back port
  input  logic               we,
  input  logic [WADDR_W-1:0] waddr,
  input  w_t                 wdata,
  input  logic [WADDR_W-1:0] raddr,
  output w_t                 rdata,
  // parallel weight outputs
  output w_t                 wx [NX][NG],
  output w_t                 wh [NH][NG],
  output w_t                 b  [NG],
  output w_t                 wd [NH],
  output w_t                 bd
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < NX; k++)
        for (int g = 0; g < NG; g++) wx[k][g] <= '0;
      for (int k = 0; k < NH; k++)
        for (int g = 0; g < NG; g++) wh[k][g] <= '0;
      for (int g = 0; g < NG; g++) b[g] <= '0;
      for (int k = 0; k < NH; k++) wd[k] <= '0;
      bd <= '0;
    end else if (we) begin
      if (waddr < WADDR_W'(ADDR_WH)) begin
        wx[(waddr - ADDR_WX) / NG][(waddr - ADDR_WX) % NG] <= wdata;
      end else if (waddr < WADDR_W'(ADDR_B)) begin
        wh[(waddr - ADDR_WH) / NG][(waddr - ADDR_WH) % NG] <= wdata;
      end else if (waddr < WADDR_W'(ADDR_WD)) begin
        b[waddr - ADDR_B] <= wdata;
      end else if (waddr < WADDR_W'(ADDR_BD)) begin
        wd[waddr - ADDR_WD] <= wdata;
      end else if (waddr == WADDR_W'(ADDR_BD)) begin
        bd <= wdata;
      end
    end
  end

  // combinational read-back
  always_comb begin
    rdata = '0;
    if (raddr < WADDR_W'(ADDR_WH))      rdata = wx[(raddr - ADDR_WX) / NG][(raddr - ADDR_WX) % NG];
    else if (raddr < WADDR_W'(ADDR_B))  rdata = wh[(raddr - ADDR_WH) / NG][(raddr - ADDR_WH) % NG];
    else if (raddr < WADDR_W'(ADDR_WD)) rdata = b[raddr - ADDR_B];
    else if (raddr < WADDR_W'(ADDR_BD)) rdata = wd[raddr - ADDR_WD];
    else if (raddr == WADDR_W'(ADDR_BD)) rdata = bd;
  end

endmodule
