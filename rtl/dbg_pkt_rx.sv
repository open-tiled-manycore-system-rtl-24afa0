// Debug packet receiver: takes packets from a debug ring router's local
// output (always ready) and reports each one when its last flit arrives:
// source node, type and argument from the second word, and the third word
// as value (zero if the packet is shorter). Further words are dropped; the
// modules that use this only receive CONFIG, TRIGGER and EVENT packets.
module dbg_pkt_rx
  import dbg_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  dflit_t      in,
  input  logic        in_valid,
  output logic        in_ready,
  output logic        pkt_valid,
  output logic [7:0]  pkt_src,
  output logic [3:0]  pkt_type,
  output logic [11:0] pkt_arg,
  output logic [15:0] pkt_value
);

  logic [1:0]  pos_q;
  logic [15:0] w0_q, w1_q, w2_q;

  assign in_ready = 1'b1;

  always_ff @(posedge clk) begin
    if (rst) begin
      pos_q     <= '0;
      pkt_valid <= 1'b0;
      w0_q <= '0; w1_q <= '0; w2_q <= '0;
    end else begin
      pkt_valid <= 1'b0;
      if (in_valid) begin
        unique case (pos_q)
          2'd0: begin w0_q <= in.data; w1_q <= '0; w2_q <= '0; end
          2'd1: w1_q <= in.data;
          2'd2: w2_q <= in.data;
          default: ;
        endcase
        if (pos_q != 2'd3) pos_q <= pos_q + 1'b1;
        if (in.last) begin
          pos_q     <= '0;
          pkt_valid <= 1'b1;
        end
      end
    end
  end

  // the word arriving with "last" is already in the registers one cycle later
  assign pkt_src   = w0_q[7:0];
  assign pkt_type  = w1_q[15:12];
  assign pkt_arg   = w1_q[11:0];
  assign pkt_value = w2_q;

endmodule
