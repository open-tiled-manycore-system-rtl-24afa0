// Off-chip interface of the debug NoC (node 0): bridges debug packets to a
// 16-bit word FIFO interface such as the slave FIFO of the USB 2.0 chip on
// the ZTEX board.
//
// The word stream has no packet marker, so each packet is framed by a length
// word. Chip to host: a packet from the ring is buffered (up to MAXLEN
// words; longer ones are cut) and then sent as its length followed by its
// words. Host to chip: a length word (0 is ignored) followed by that many
// words, which enter the ring with the last one marked. Both directions use
// valid/ready. The paper names USB 2.0 and the host link; the framing is this
// design's choice.
module dbg_usb_if
  import dbg_pkg::*;
#(
  parameter int unsigned MAXLEN = 16
) (
  input  logic        clk,
  input  logic        rst,
  // off-chip word FIFO
  output logic [15:0] usb_out_data,
  output logic        usb_out_valid,
  input  logic        usb_out_ready,
  input  logic [15:0] usb_in_data,
  input  logic        usb_in_valid,
  output logic        usb_in_ready,
  // ring node local ports
  output dflit_t      dbg_out,
  output logic        dbg_out_valid,
  input  logic        dbg_out_ready,
  input  dflit_t      dbg_in,
  input  logic        dbg_in_valid,
  output logic        dbg_in_ready
);

  localparam int unsigned LW = $clog2(MAXLEN + 1);

  // ---- ring -> host ----
  typedef enum logic [1:0] {C_COLLECT, C_LEN, C_DATA} cstate_e;
  cstate_e     cst_q;
  logic [15:0] buf_q [MAXLEN];
  logic [LW-1:0] n_q, pos_q;

  assign dbg_in_ready  = (cst_q == C_COLLECT);
  assign usb_out_valid = (cst_q != C_COLLECT);
  assign usb_out_data  = (cst_q == C_LEN) ? 16'(n_q) : buf_q[pos_q[$clog2(MAXLEN)-1:0]];

  always_ff @(posedge clk) begin
    if (rst) begin
      cst_q <= C_COLLECT;
      n_q   <= '0;
      pos_q <= '0;
    end else begin
      unique case (cst_q)
        C_COLLECT: if (dbg_in_valid) begin
                     if (n_q != LW'(MAXLEN)) begin
                       buf_q[n_q[$clog2(MAXLEN)-1:0]] <= dbg_in.data;
                       n_q <= n_q + 1'b1;
                     end
                     if (dbg_in.last) cst_q <= C_LEN;
                   end
        C_LEN:     if (usb_out_ready) begin
                     cst_q <= C_DATA;
                     pos_q <= '0;
                   end
        C_DATA:    if (usb_out_ready) begin
                     if (pos_q == n_q - 1'b1) begin
                       cst_q <= C_COLLECT;
                       n_q   <= '0;
                     end
                     pos_q <= pos_q + 1'b1;
                   end
        default:   cst_q <= C_COLLECT;
      endcase
    end
  end

  // ---- host -> ring ----
  logic        in_body_q;
  logic [15:0] in_left_q;

  assign dbg_out.data  = usb_in_data;
  assign dbg_out.last  = (in_left_q == 16'd1);
  assign dbg_out_valid = in_body_q && usb_in_valid;
  assign usb_in_ready  = in_body_q ? dbg_out_ready : 1'b1;

  always_ff @(posedge clk) begin
    if (rst) begin
      in_body_q <= 1'b0;
      in_left_q <= '0;
    end else if (!in_body_q) begin
      if (usb_in_valid && usb_in_data != 0) begin
        in_body_q <= 1'b1;
        in_left_q <= usb_in_data;
      end
    end else if (usb_in_valid && dbg_out_ready) begin
      in_left_q <= in_left_q - 16'd1;
      if (in_left_q == 16'd1) in_body_q <= 1'b0;
    end
  end

endmodule
