// Write-through L1 cache with snoop invalidation (used as I$ and D$).
//
// Direct mapped, LINES lines of one 32-bit word each, no write allocate.
// Core side and bus side use the tile bus protocol. A read hit is acked in
// the cycle after the request. A read miss fetches the word over the bus and
// fills the line; a write always goes to the bus (write-through) and updates
// the line if it hits. Only the local memory region is cached; accesses to
// other regions (network adapter registers) bypass the cache. The snoop port
// watches every write the tile bus completes: a write by another master to a
// cached address invalidates the line. This is the paper's write-through
// snooping coherence; line size, associativity and size are own choices.
module wt_cache
  import tile_pkg::*;
#(
  parameter int unsigned LINES     = 64,
  parameter int unsigned MASTER_ID = 0,
  parameter int unsigned MW        = 2
) (
  input  logic          clk,
  input  logic          rst,
  input  bus_req_t      core_req,
  output bus_rsp_t      core_rsp,
  output bus_req_t      bus_req,
  input  bus_rsp_t      bus_rsp,
  input  logic          snoop_valid,
  input  logic [31:0]   snoop_addr,
  input  logic [MW-1:0] snoop_master,
  output logic          hit_o,        // pulse: read served from the cache
  output logic          inval_o       // pulse: line invalidated by a snooped write
);

  localparam int unsigned IW = $clog2(LINES);
  localparam int unsigned TW = 30 - IW;

  logic [31:0]   data_q [LINES];
  logic [TW-1:0] tag_q  [LINES];
  logic [LINES-1:0] valid_q;

  typedef enum logic {S_IDLE, S_BUS} state_e;
  state_e state_q;

  logic        ack_q;
  logic [31:0] rdata_q;
  bus_req_t    breq_q;

  wire [IW-1:0] idx  = core_req.addr[IW+1:2];
  wire [TW-1:0] tag  = core_req.addr[31:IW+2];
  wire          hit  = valid_q[idx] && tag_q[idx] == tag && is_mem(core_req.addr);
  wire [IW-1:0] sidx = snoop_addr[IW+1:2];
  wire          shit = snoop_valid && snoop_master != MW'(MASTER_ID) &&
                       valid_q[sidx] && tag_q[sidx] == snoop_addr[31:IW+2];

  assign core_rsp.ack   = ack_q;
  assign core_rsp.rdata = rdata_q;
  assign bus_req        = breq_q;
  assign inval_o        = shit;

  always_ff @(posedge clk) begin
    if (rst) begin
      state_q <= S_IDLE;
      ack_q   <= 1'b0;
      valid_q <= '0;
      breq_q  <= '0;
      hit_o   <= 1'b0;
    end else begin
      ack_q <= 1'b0;
      hit_o <= 1'b0;
      if (shit) valid_q[sidx] <= 1'b0;
      case (state_q)
        S_IDLE: begin
          if (core_req.req && !ack_q) begin
            if (!core_req.we && hit) begin
              ack_q <= 1'b1;
              hit_o <= 1'b1;
            end else begin
              breq_q  <= core_req;
              state_q <= S_BUS;
            end
          end
        end
        S_BUS: begin
          if (bus_rsp.ack) begin
            breq_q  <= '0;
            state_q <= S_IDLE;
            ack_q   <= 1'b1;
            if (!breq_q.we && is_mem(breq_q.addr)) valid_q[breq_q.addr[IW+1:2]] <= 1'b1;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (state_q == S_IDLE && core_req.req && !ack_q && !core_req.we && hit)
      rdata_q <= data_q[idx];
    if (state_q == S_BUS && bus_rsp.ack) begin
      rdata_q <= bus_rsp.rdata;
      if (is_mem(breq_q.addr)) begin
        if (!breq_q.we) begin
          data_q[breq_q.addr[IW+1:2]] <= bus_rsp.rdata;
          tag_q[breq_q.addr[IW+1:2]]  <= breq_q.addr[31:IW+2];
        end else if (valid_q[breq_q.addr[IW+1:2]] &&
                     tag_q[breq_q.addr[IW+1:2]] == breq_q.addr[31:IW+2]) begin
          data_q[breq_q.addr[IW+1:2]] <= breq_q.wdata;
        end
      end
    end
  end

endmodule
