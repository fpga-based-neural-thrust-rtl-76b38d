// layer_engine: one fully connected layer, y = act(W x + b), in fixed point.
// This is the vector-matrix multiplication of the feed-forward pass.
//
// On start it reads the layer's words from memory through a read-only
// master port: for each output neuron j, W[j][0..IN-1] and then b[j]
// (weights row-major at wbase + w_off, biases right after the matrix).
// Reads are pipelined: a request is issued every cycle it is granted, and
// the word returns one cycle after its grant, together with a registered tag
// (input index i, neuron j, weight-or-bias). A returned weight is multiplied
// by x[i] from the scratchpad and added to a 64-bit accumulator; a returned
// bias completes the neuron:
//     y[j] = relu( (acc >>> FRAC_BITS) + b[j] )
// The shift drops the n extra fractional bits of the products, rounding
// down; ReLU is skipped for a layer whose relu bit is clear. y[j] is written
// to the scratchpad at out_off + j and also shown on out_valid/out_idx/
// out_val for the mean operator.
//
// Timing: with a grant every cycle a layer takes OUT*(IN+1) + 2 cycles from
// start to the done pulse; a withheld grant stalls the issue and adds one
// cycle each. One multiply-accumulate per cycle is this design's choice; the
// paper generates its accelerator with an HLS tool and does not describe its
// schedule. The fixed-point scheme (weights scaled by 2^n, rounded down)
// follows the paper; the order of shift and bias add is this design's.
module layer_engine
  import nn_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  layer_t     layer,
  input  addr_t      wbase,
  output logic       busy,
  output logic       done,
  // memory master, reads only
  output mem_req_t   mem_req,
  input  mem_rsp_t   mem_rsp,
  // scratchpad read (combinational) and write
  output logic [SP_AW-1:0] sp_raddr,
  input  fxp_t             sp_rdata,
  output logic             sp_we,
  output logic [SP_AW-1:0] sp_waddr,
  output fxp_t             sp_wdata,
  // produced neuron values
  output logic       out_valid,
  output logic [7:0] out_idx,
  output fxp_t       out_val
);
  typedef struct packed {
    logic [7:0] i;
    logic [7:0] j;
    logic       bias;
  } tag_t;

  layer_t lay_q;
  logic   issuing;
  logic [7:0] iss_i, iss_j;
  addr_t  w_addr, b_addr;
  tag_t   tag_q;
  acc_t   acc;
  fxp_t   pre_act, post_act;
  logic   last_bias_issued;

  // ---------------- issue side ----------------
  always_comb begin
    mem_req.req   = issuing;
    mem_req.we    = 1'b0;
    mem_req.wdata = '0;
    mem_req.addr  = (iss_i == lay_q.in_len) ? b_addr : w_addr;
  end

  assign last_bias_issued = (iss_i == lay_q.in_len) && (iss_j == lay_q.out_len - 8'd1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lay_q   <= '0;
      issuing <= 1'b0;
      iss_i   <= '0;
      iss_j   <= '0;
      w_addr  <= '0;
      b_addr  <= '0;
      busy    <= 1'b0;
    end else begin
      if (start && !busy) begin
        lay_q   <= layer;
        issuing <= 1'b1;
        busy    <= 1'b1;
        iss_i   <= '0;
        iss_j   <= '0;
        w_addr  <= wbase + layer.w_off;
        b_addr  <= wbase + layer.w_off + addr_t'(layer.in_len * layer.out_len);
      end else if (issuing && mem_rsp.gnt) begin
        if (iss_i == lay_q.in_len) begin
          b_addr <= b_addr + addr_t'(1);
          iss_i  <= '0;
          iss_j  <= iss_j + 8'd1;
          if (last_bias_issued) issuing <= 1'b0;
        end else begin
          w_addr <= w_addr + addr_t'(1);
          iss_i  <= iss_i + 8'd1;
        end
      end
      if (done) busy <= 1'b0;
    end
  end

  // tag of the word that returns next cycle
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) tag_q <= '0;
    else if (issuing && mem_rsp.gnt) begin
      tag_q.i    <= iss_i;
      tag_q.j    <= iss_j;
      tag_q.bias <= (iss_i == lay_q.in_len);
    end
  end

  // ---------------- consume side ----------------
  assign sp_raddr = SP_AW'(lay_q.in_off + tag_q.i);
  assign pre_act  = fxp_t'(acc >>> FRAC_BITS) + mem_rsp.rdata;

  relu_act u_relu (
    .enable (lay_q.relu),
    .x      (pre_act),
    .y      (post_act)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) acc <= '0;
    else if (start && !busy) acc <= '0;
    else if (mem_rsp.rvalid) begin
      if (tag_q.bias) acc <= '0;
      else            acc <= acc + acc_t'(mem_rsp.rdata) * acc_t'(sp_rdata);
    end
  end

  always_comb begin
    sp_we     = mem_rsp.rvalid && tag_q.bias;
    sp_waddr  = SP_AW'(lay_q.out_off + tag_q.j);
    sp_wdata  = post_act;
    out_valid = sp_we;
    out_idx   = tag_q.j;
    out_val   = post_act;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) done <= 1'b0;
    else        done <= mem_rsp.rvalid && tag_q.bias && (tag_q.j == lay_q.out_len - 8'd1);
  end

  // a read returns only for a request this engine issued
  a_rvalid_after_gnt: assert property (@(posedge clk) disable iff (!rst_n)
      mem_rsp.rvalid |-> $past(issuing && mem_rsp.gnt));
endmodule
