// accel_cache: a cache between one accelerator memory port and the
// interconnect, kept coherent by watching the coherence bus.
//
// Direct-mapped, LINES lines of one word each, write-through with write
// allocate. Upstream it looks like the interconnect (req/gnt, rvalid one
// cycle after the grant):
//   * read hit: granted at once, data from the line one cycle later;
//   * read miss: the request goes downstream; gnt stays low until the word
//     returns and fills the line, after which the still-pending request hits
//     (with the interconnect free, a miss costs two cycles more than a hit);
//   * write: passed downstream and granted when the interconnect grants it;
//     the line is written as well.
// A write broadcast on the coherence bus by any other master (src != ID)
// invalidates a matching line, and a request to that word in the same cycle
// is treated as a miss; a fill hit by such a broadcast in the same cycle is
// not validated, so the pending read is retried.
//
// The paper shows the accelerator caches and the coherence bus only as
// blocks; organisation, size, write policy and invalidation are this
// design's choices.
module accel_cache
  import nn_pkg::*;
#(
  parameter int LINES = 2048,
  parameter int ID    = 1
) (
  input  logic     clk,
  input  logic     rst_n,
  input  mem_req_t up_req,
  output mem_rsp_t up_rsp,
  output mem_req_t dn_req,
  input  mem_rsp_t dn_rsp,
  input  snoop_t   snoop,
  output logic [31:0] hits,
  output logic [31:0] misses
);
  localparam int IW = $clog2(LINES);
  localparam int TW = ADDR_W - IW;

  typedef enum logic [1:0] {S_IDLE, S_WAIT} state_e;
  state_e state;

  logic [TW-1:0] tag_a   [LINES];
  fxp_t          data_a  [LINES];
  logic [LINES-1:0] valid_a;

  logic [IW-1:0] idx, snp_idx;
  logic [TW-1:0] tag;
  logic          hit, rd_hit, snp_match;
  fxp_t          rdata_q;
  logic          rvalid_q;

  assign idx     = up_req.addr[IW-1:0];
  assign tag     = up_req.addr[ADDR_W-1:IW];
  assign snp_idx = snoop.addr[IW-1:0];
  // a foreign write broadcast this cycle to the requested word makes it a miss
  assign hit     = valid_a[idx] && tag_a[idx] == tag
                 && !(snoop.valid && int'(snoop.src) != ID && snoop.addr == up_req.addr);
  assign rd_hit  = up_req.req && !up_req.we && hit && state == S_IDLE;
  assign snp_match = snoop.valid && int'(snoop.src) != ID
                   && valid_a[snp_idx] && tag_a[snp_idx] == snoop.addr[ADDR_W-1:IW];

  always_comb begin
    dn_req        = '0;
    up_rsp.gnt    = 1'b0;
    up_rsp.rvalid = rvalid_q;
    up_rsp.rdata  = rdata_q;
    if (state == S_IDLE && up_req.req) begin
      if (up_req.we) begin
        dn_req     = up_req;
        up_rsp.gnt = dn_rsp.gnt;
      end else if (hit) begin
        up_rsp.gnt = 1'b1;
      end else begin
        dn_req     = up_req;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rd_hit) rdata_q <= data_a[idx];
    if (state == S_IDLE && up_req.req && up_req.we && dn_rsp.gnt) begin
      tag_a[idx]  <= tag;
      data_a[idx] <= up_req.wdata;
    end else if (state == S_WAIT && dn_rsp.rvalid) begin
      tag_a[idx]  <= tag;
      data_a[idx] <= dn_rsp.rdata;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      valid_a  <= '0;
      rvalid_q <= 1'b0;
      hits     <= '0;
      misses   <= '0;
    end else begin
      rvalid_q <= rd_hit;
      if (rd_hit) hits <= hits + 32'd1;
      if (snp_match) valid_a[snp_idx] <= 1'b0;
      case (state)
        S_IDLE: begin
          if (up_req.req && up_req.we && dn_rsp.gnt) begin
            valid_a[idx] <= 1'b1;
          end else if (up_req.req && !up_req.we && !hit && dn_rsp.gnt) begin
            state  <= S_WAIT;
            misses <= misses + 32'd1;
          end
        end
        default: begin
          if (dn_rsp.rvalid) begin
            state <= S_IDLE;
            // do not validate a fill that a concurrent foreign write overtook
            if (!(snoop.valid && int'(snoop.src) != ID && snoop.addr == up_req.addr))
              valid_a[idx] <= 1'b1;
          end
        end
      endcase
    end
  end

  // the upstream master holds its request while waiting for a fill
  a_hold_req: assert property (@(posedge clk) disable iff (!rst_n)
      state == S_WAIT |-> up_req.req && !up_req.we);
endmodule
