// Tile interconnect: shared bus from NM masters to the local memory and the
// network adapter registers.
//
// One transfer at a time. When idle, a round-robin arbiter grants one
// requesting master (registered, one cycle); the granted request goes to the
// slave selected by address bits [31:28] until that slave acks, and the ack
// and read data return to the granted master. An access outside both regions
// is acked with zero data. Every acked write is broadcast on the snoop port
// (address and master index) so that the write-through caches can invalidate
// their copies: this is how the paper's write-through snooping coherence
// sees the writes. Latency: grant cycle + slave latency (memory: 1 cycle).
module tile_bus
  import tile_pkg::*;
#(
  parameter int unsigned NM = 4,
  localparam int unsigned MW = (NM > 1) ? $clog2(NM) : 1
) (
  input  logic        clk,
  input  logic        rst,
  input  bus_req_t    m_req [NM],
  output bus_rsp_t    m_rsp [NM],
  output bus_req_t    mem_req,
  input  bus_rsp_t    mem_rsp,
  output bus_req_t    na_req,
  input  bus_rsp_t    na_rsp,
  output logic        snoop_valid,
  output logic [31:0] snoop_addr,
  output logic [MW-1:0] snoop_master
);

  logic          busy_q;
  logic [MW-1:0] grant_q;
  bus_req_t      cur;
  logic          cur_ack;
  logic [31:0]   cur_rdata;
  logic          err_ack_q;

  always_comb begin
    cur     = m_req[grant_q];
    mem_req = '0;
    na_req  = '0;
    if (busy_q && is_mem(cur.addr)) mem_req = cur;
    if (busy_q && is_na(cur.addr))  na_req  = cur;
    cur_ack   = 1'b0;
    cur_rdata = '0;
    if (busy_q) begin
      if (is_mem(cur.addr))     begin cur_ack = mem_rsp.ack; cur_rdata = mem_rsp.rdata; end
      else if (is_na(cur.addr)) begin cur_ack = na_rsp.ack;  cur_rdata = na_rsp.rdata;  end
      else                           cur_ack = err_ack_q;
    end
    for (int m = 0; m < NM; m++) begin
      m_rsp[m].ack   = cur_ack && (grant_q == MW'(m));
      m_rsp[m].rdata = cur_rdata;
    end
    snoop_valid  = cur_ack && cur.we;
    snoop_addr   = cur.addr;
    snoop_master = grant_q;
  end

  // round-robin choice among the requesting masters, starting after the last grant
  logic          req_any;
  logic [MW-1:0] req_sel;
  always_comb begin
    int m;
    req_any = 1'b0;
    req_sel = grant_q;
    for (int k = 1; k <= NM; k++) begin
      m = (int'(grant_q) + k) % NM;
      if (!req_any && m_req[m].req) begin
        req_any = 1'b1;
        req_sel = MW'(m);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      busy_q    <= 1'b0;
      grant_q   <= '0;
      err_ack_q <= 1'b0;
    end else begin
      err_ack_q <= busy_q && !is_mem(cur.addr) && !is_na(cur.addr) && !err_ack_q;
      if (busy_q) begin
        if (cur_ack) busy_q <= 1'b0;
      end else begin
        if (req_any) begin
          busy_q  <= 1'b1;
          grant_q <= req_sel;
        end
      end
    end
  end

  // The granted master must hold its request until the ack.
  always_ff @(posedge clk) begin
    if (!rst && busy_q && !cur_ack)
      assert (cur.req) else $error("tile_bus: master %0d dropped req before ack", grant_q);
  end

endmodule
