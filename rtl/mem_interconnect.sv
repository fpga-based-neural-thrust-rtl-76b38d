// mem_interconnect: connects NM bus masters (the processor side and the
// accelerator caches) to the single port of main memory, and drives the
// coherence bus.
//
// Arbitration is round-robin: each cycle one requesting master is granted,
// searching from the master after the one granted last. A granted read
// returns its word to that master with rvalid one cycle after the grant; a
// granted write is done at that edge. Every granted write is broadcast on the
// coherence bus one cycle later (valid, writing master, address), so that
// caches can drop stale copies of the word.
//
// The paper's block diagram shows an interconnect and a coherence bus
// joining the core cache and three accelerator caches to main memory, but
// gives no protocol; round-robin arbitration and write-invalidate broadcast
// are this design's choices.
module mem_interconnect
  import nn_pkg::*;
#(
  parameter int NM = 4
) (
  input  logic     clk,
  input  logic     rst_n,
  input  mem_req_t m_req [NM],
  output mem_rsp_t m_rsp [NM],
  // main memory side
  output mem_req_t s_req,
  input  logic     s_rvalid,
  input  fxp_t     s_rdata,
  // coherence bus
  output snoop_t   snoop
);
  localparam int IW = (NM > 1) ? $clog2(NM) : 1;

  logic [IW-1:0] last_q, sel, rd_owner_q;
  logic          any;

  always_comb begin
    any = 1'b0;
    sel = last_q;
    for (int k = 1; k <= NM; k++) begin
      if (!any && m_req[(int'(last_q) + k) % NM].req) begin
        any = 1'b1;
        sel = IW'((int'(last_q) + k) % NM);
      end
    end
  end

  always_comb begin
    s_req = any ? m_req[sel] : '0;
    for (int m = 0; m < NM; m++) begin
      m_rsp[m].gnt    = any && (sel == IW'(m));
      m_rsp[m].rvalid = s_rvalid && (rd_owner_q == IW'(m));
      m_rsp[m].rdata  = s_rdata;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last_q     <= IW'(NM - 1);
      rd_owner_q <= '0;
      snoop      <= '0;
    end else begin
      if (any) begin
        last_q     <= sel;
        rd_owner_q <= sel;
      end
      snoop.valid <= any && m_req[sel].we;
      snoop.src   <= 2'(sel);
      snoop.addr  <= m_req[sel].addr;
    end
  end

  logic [NM-1:0] gnt_vec;
  always_comb for (int m = 0; m < NM; m++) gnt_vec[m] = m_rsp[m].gnt;

  // at most one master granted, and only one that asked
  a_one_grant: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(gnt_vec));
  a_gnt_req:   assert property (@(posedge clk) disable iff (!rst_n)
      any |-> m_req[sel].req);
endmodule
