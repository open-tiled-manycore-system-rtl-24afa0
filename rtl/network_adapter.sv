// Network adapter: connects a tile bus to its LISNoC router and provides the
// paper's two services, message passing between tiles and memory transfers
// (DMA) between tile memories.
//
// Message passing (virtual channel 0). Software writes the words of a packet
// to MP_TX, the last one to MP_TX_LAST; the first word is the packet header
// (destination tile in [31:27]). Words go through a TX_DEPTH FIFO to the
// NoC; a write to a full FIFO is not acked until there is room (the core
// stalls). Received packets, header included, are stored in an RX_DEPTH FIFO
// and read one word per MP_RX_DATA read; MP_RX_CNT gives the fill level,
// MP_STATUS[1] tells whether the last word read ended a packet, and irq is
// high while words are waiting. When the RX FIFO is full the NoC is
// back-pressured.
//
// Memory transfer (virtual channel 1). Software sets DMA_LADDR, DMA_RTILE,
// DMA_RADDR, DMA_LEN and writes DMA_CTRL. The initiator reads LEN words from
// local memory through its own bus master port and sends them as one packet:
// header, remote address, data words. The target side of the adapter in the
// destination tile writes each data word through a second bus master port to
// consecutive addresses starting at the remote address, and counts them in
// DMA_RXCNT. Its bus writes are seen by the caches' snoop logic.
//
// The paper gives the two services only; the register map, packet layout and
// push-only DMA are this design's choices.
module network_adapter
  import lisnoc_pkg::*;
  import tile_pkg::*;
#(
  parameter int unsigned TILE_ID   = 0,
  parameter int unsigned VCHANNELS = 2,
  parameter int unsigned TX_DEPTH  = 16,
  parameter int unsigned RX_DEPTH  = 16
) (
  input  logic                 clk,
  input  logic                 rst,
  // register slave
  input  bus_req_t             s_req,
  output bus_rsp_t             s_rsp,
  // DMA initiator read master and DMA target write master
  output bus_req_t             dma_rd_req,
  input  bus_rsp_t             dma_rd_rsp,
  output bus_req_t             dma_wr_req,
  input  bus_rsp_t             dma_wr_rsp,
  // NoC local port
  output flit_t                noc_out_flit,
  output logic [VCHANNELS-1:0] noc_out_valid,
  input  logic [VCHANNELS-1:0] noc_out_ready,
  input  flit_t                noc_in_flit,
  input  logic [VCHANNELS-1:0] noc_in_valid,
  output logic [VCHANNELS-1:0] noc_in_ready,
  output logic                 irq
);

  wire [7:0] reg_off = s_req.addr[7:0];

  // ---------------- message passing TX ----------------
  logic   tx_first_q;
  flit_t  tx_in_flit, tx_head;
  logic   tx_in_valid, tx_in_ready, tx_head_vld, tx_pop;
  logic [$clog2(TX_DEPTH+1)-1:0] tx_cnt;
  wire    tx_wr  = s_req.req && s_req.we && (reg_off == NA_MP_TX || reg_off == NA_MP_TX_LAST);
  wire    tx_end = (reg_off == NA_MP_TX_LAST);
  logic   s_ack_q;

  always_comb begin
    tx_in_flit.data = s_req.wdata;
    unique case ({tx_first_q, tx_end})
      2'b11:   tx_in_flit.ftype = FLIT_SINGLE;
      2'b10:   tx_in_flit.ftype = FLIT_HEADER;
      2'b01:   tx_in_flit.ftype = FLIT_LAST;
      default: tx_in_flit.ftype = FLIT_PAYLOAD;
    endcase
    tx_in_valid = tx_wr && !s_ack_q;
  end

  sync_fifo #(.WIDTH($bits(flit_t)), .DEPTH(TX_DEPTH)) u_tx (
    .clk, .rst,
    .in_data(tx_in_flit), .in_valid(tx_in_valid), .in_ready(tx_in_ready),
    .out_data(tx_head), .out_valid(tx_head_vld), .out_ready(tx_pop), .count(tx_cnt)
  );

  // ---------------- message passing RX ----------------
  logic [32:0] rx_head;
  logic        rx_head_vld, rx_in_ready, rx_pop;
  logic [$clog2(RX_DEPTH+1)-1:0] rx_cnt;
  logic        rx_last_q;

  sync_fifo #(.WIDTH(33), .DEPTH(RX_DEPTH)) u_rx (
    .clk, .rst,
    .in_data({is_tail(noc_in_flit.ftype), noc_in_flit.data}),
    .in_valid(noc_in_valid[VC_MP]), .in_ready(rx_in_ready),
    .out_data(rx_head), .out_valid(rx_head_vld), .out_ready(rx_pop), .count(rx_cnt)
  );

  assign irq = rx_head_vld;

  // ---------------- DMA registers and initiator ----------------
  logic [31:0] dma_laddr_q, dma_raddr_q, dma_len_q;
  logic [DEST_WIDTH-1:0] dma_rtile_q;
  logic [31:0] dma_rxcnt_q;

  typedef enum logic [2:0] {D_IDLE, D_HDR, D_ADDR, D_READ, D_SEND} dma_state_e;
  dma_state_e  dst_q;
  logic [31:0] d_ptr_q, d_left_q, d_data_q;
  flit_t       dma_flit;
  logic        dma_flit_vld;

  always_comb begin
    dma_flit     = '0;
    dma_flit_vld = 1'b0;
    unique case (dst_q)
      D_HDR:  begin dma_flit.ftype = FLIT_HEADER;  dma_flit.data = make_hdr(dma_rtile_q, CLASS_DMA, DEST_WIDTH'(TILE_ID)); dma_flit_vld = 1'b1; end
      D_ADDR: begin dma_flit.ftype = FLIT_PAYLOAD; dma_flit.data = dma_raddr_q; dma_flit_vld = 1'b1; end
      D_SEND: begin dma_flit.ftype = (d_left_q == 32'd1) ? FLIT_LAST : FLIT_PAYLOAD; dma_flit.data = d_data_q; dma_flit_vld = 1'b1; end
      default: ;
    endcase
  end

  // ---------------- NoC output: one VC per cycle ----------------
  logic prio_q;  // alternates preference between the two channels
  logic send_mp, send_dma;
  always_comb begin
    send_mp  = tx_head_vld  && noc_out_ready[VC_MP];
    send_dma = dma_flit_vld && noc_out_ready[VC_DMA];
    if (send_mp && send_dma) begin
      if (prio_q) send_mp = 1'b0; else send_dma = 1'b0;
    end
    noc_out_valid = '0;
    noc_out_valid[VC_MP]  = send_mp;
    noc_out_valid[VC_DMA] = send_dma;
    noc_out_flit = send_dma ? dma_flit : tx_head;
    tx_pop = send_mp;
  end

  assign dma_rd_req.req   = (dst_q == D_READ);
  assign dma_rd_req.we    = 1'b0;
  assign dma_rd_req.addr  = d_ptr_q;
  assign dma_rd_req.wdata = '0;

  // ---------------- DMA target ----------------
  typedef enum logic [1:0] {T_HDR, T_ADDR, T_DATA, T_WRITE} tgt_state_e;
  tgt_state_e  tst_q;
  logic [31:0] t_addr_q, t_data_q;
  logic        t_last_q;

  always_comb begin
    noc_in_ready = '0;
    noc_in_ready[VC_MP]  = rx_in_ready;
    noc_in_ready[VC_DMA] = (tst_q != T_WRITE);
  end

  assign dma_wr_req.req   = (tst_q == T_WRITE);
  assign dma_wr_req.we    = 1'b1;
  assign dma_wr_req.addr  = t_addr_q;
  assign dma_wr_req.wdata = t_data_q;

  // ---------------- register slave ----------------
  logic [31:0] s_rdata_q;
  wire s_new = s_req.req && !s_ack_q;
  // a TX write is acked only once the FIFO took the word
  wire s_can = !(tx_wr && !tx_in_ready);
  assign rx_pop = s_new && !s_req.we && reg_off == NA_MP_RX_DATA && rx_head_vld;
  assign s_rsp.ack   = s_ack_q;
  assign s_rsp.rdata = s_rdata_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      s_ack_q     <= 1'b0;
      s_rdata_q   <= '0;
      tx_first_q  <= 1'b1;
      rx_last_q   <= 1'b0;
      dma_laddr_q <= '0;
      dma_raddr_q <= '0;
      dma_len_q   <= '0;
      dma_rtile_q <= '0;
      dma_rxcnt_q <= '0;
      dst_q       <= D_IDLE;
      d_ptr_q     <= '0;
      d_left_q    <= '0;
      d_data_q    <= '0;
      prio_q      <= 1'b0;
      tst_q       <= T_HDR;
      t_addr_q    <= '0;
      t_data_q    <= '0;
      t_last_q    <= 1'b0;
    end else begin
      // register accesses
      s_ack_q <= 1'b0;
      if (s_new && s_can) begin
        s_ack_q   <= 1'b1;
        s_rdata_q <= '0;
        if (s_req.we) begin
          unique case (reg_off)
            NA_MP_TX:      tx_first_q <= 1'b0;
            NA_MP_TX_LAST: tx_first_q <= 1'b1;
            NA_DMA_LADDR:  dma_laddr_q <= s_req.wdata;
            NA_DMA_RTILE:  dma_rtile_q <= s_req.wdata[DEST_WIDTH-1:0];
            NA_DMA_RADDR:  dma_raddr_q <= s_req.wdata;
            NA_DMA_LEN:    dma_len_q   <= s_req.wdata;
            NA_DMA_CTRL:   if (dst_q == D_IDLE && dma_len_q != 0) begin
                             dst_q    <= D_HDR;
                             d_ptr_q  <= dma_laddr_q;
                             d_left_q <= dma_len_q;
                           end
            default: ;
          endcase
        end else begin
          unique case (reg_off)
            NA_MP_RX_CNT:  s_rdata_q <= 32'(rx_cnt);
            NA_MP_RX_DATA: begin
                             s_rdata_q <= rx_head_vld ? rx_head[31:0] : 32'd0;
                             rx_last_q <= rx_head_vld && rx_head[32];
                           end
            NA_MP_STATUS:  s_rdata_q <= {30'd0, rx_last_q, rx_head_vld};
            NA_DMA_LADDR:  s_rdata_q <= dma_laddr_q;
            NA_DMA_RTILE:  s_rdata_q <= 32'(dma_rtile_q);
            NA_DMA_RADDR:  s_rdata_q <= dma_raddr_q;
            NA_DMA_LEN:    s_rdata_q <= dma_len_q;
            NA_DMA_CTRL:   s_rdata_q <= {31'd0, dst_q != D_IDLE};
            NA_DMA_RXCNT:  s_rdata_q <= dma_rxcnt_q;
            default: ;
          endcase
        end
      end

      // output channel preference
      if (send_mp || send_dma) prio_q <= send_mp;

      // DMA initiator
      unique case (dst_q)
        D_HDR:  if (send_dma) dst_q <= D_ADDR;
        D_ADDR: if (send_dma) dst_q <= D_READ;
        D_READ: if (dma_rd_rsp.ack) begin
                  d_data_q <= dma_rd_rsp.rdata;
                  d_ptr_q  <= d_ptr_q + 32'd4;
                  dst_q    <= D_SEND;
                end
        D_SEND: if (send_dma) begin
                  d_left_q <= d_left_q - 32'd1;
                  dst_q    <= (d_left_q == 32'd1) ? D_IDLE : D_READ;
                end
        default: ;
      endcase

      // DMA target
      unique case (tst_q)
        T_HDR:   if (noc_in_valid[VC_DMA]) tst_q <= is_tail(noc_in_flit.ftype) ? T_HDR : T_ADDR;
        T_ADDR:  if (noc_in_valid[VC_DMA]) begin
                   t_addr_q <= noc_in_flit.data;
                   tst_q    <= is_tail(noc_in_flit.ftype) ? T_HDR : T_DATA;
                 end
        T_DATA:  if (noc_in_valid[VC_DMA]) begin
                   t_data_q <= noc_in_flit.data;
                   t_last_q <= is_tail(noc_in_flit.ftype);
                   tst_q    <= T_WRITE;
                 end
        T_WRITE: if (dma_wr_rsp.ack) begin
                   t_addr_q    <= t_addr_q + 32'd4;
                   dma_rxcnt_q <= dma_rxcnt_q + 32'd1;
                   tst_q       <= t_last_q ? T_HDR : T_DATA;
                 end
        default: tst_q <= T_HDR;
      endcase
    end
  end

endmodule
