// nn_accelerator: the hardware accelerator that evaluates the deepsets
// thrust policy, a = H([E^q(o^q), mean_l B(o^l)]), and the thrust
// f = (clip(a,-1,1)+1)/2, for one control step.
//
// The processor prepares, in main memory, the weight image (layout in
// nn_pkg) at WBASE and the observations at IN_BASE: o^q (18 words) followed
// by the K neighbour observations o^1..o^K (6 words each). It then writes 1
// to CTRL over the peripheral bus. The sequencer
//   1. loads o^q into the scratchpad,
//   2. runs E^q: two layers 18->16->16 with ReLU, leaving e^q in the first
//      16 words of the concatenation buffer e,
//   3. for each neighbour l: loads o^l, runs B (6->8->8, ReLU) and adds the
//      result into the mean operator,
//   4. copies e^k = sum/K into the last 8 words of e, which makes e the
//      concatenation [e^q, e^k] without moving data,
//   5. runs H: 24->32 with ReLU, then 32->4 without activation, giving a,
//   6. writes a[0..3] and then f[0..3] to OUT_BASE..OUT_BASE+7,
// then sets STATUS.done and pulses irq. All layers share one layer_engine.
//
// Memory ports, each meant to sit behind its own accelerator cache:
//   port 0  weight reads (layer engine), port 1  observation reads,
//   port 2  result writes.
// Peripheral bus registers (word index on pb_addr, read combinationally):
//   0 CTRL (write bit 0 = start)   1 STATUS (bit 0 busy, bit 1 done)
//   2 WBASE   3 IN_BASE   4 OUT_BASE   5 CYCLES (length of the last run)
// Timing: with K = 6 and memory granting every cycle, a step takes 2409
// cycles from the start write to the last result write: 20 for loading o^q,
// OUT*(IN+1) + 3 per layer, NB_OBS + 2 per neighbour load, 8 for the mean
// copy and 9 for the stores. Each withheld grant adds one cycle. irq and
// STATUS.done follow one cycle after the last store.
//
// The network structure, the fixed-point arithmetic, the mean and the
// thrust mapping follow the paper. The paper generates its accelerator with
// an HLS tool and does not describe it, so the register map, the memory
// layout, the three-port split and the serial schedule are this design's.
module nn_accelerator
  import nn_pkg::*;
#(
  parameter int K = K_NEIGH
) (
  input  logic     clk,
  input  logic     rst_n,
  // peripheral bus
  input  logic       pb_sel,
  input  logic       pb_we,
  input  logic [2:0] pb_addr,
  input  fxp_t       pb_wdata,
  output fxp_t       pb_rdata,
  output logic       irq,
  // memory ports
  output mem_req_t m_req [3],
  input  mem_rsp_t m_rsp [3],
  // latest results
  output fxp_t     a_out [N_ACT],
  output fxp_t     f_out [N_ACT],
  // event counters for observation
  output logic [31:0] mean_adds
);
  typedef enum logic [3:0] {
    S_IDLE, S_LOAD_Q, S_EQ1, S_EQ2, S_LOAD_N, S_B1, S_B2, S_MEAN,
    S_H1, S_H2, S_STORE
  } state_e;

  state_e state;

  // registers
  addr_t wbase, in_base, out_base;
  logic  done_flag;
  logic [31:0] cycles, cyc_cnt;
  logic  start;

  // scratchpad
  fxp_t sp [SP_WORDS];

  // layer engine
  logic       eng_start, eng_busy, eng_done, launched;
  layer_t     eng_layer;
  logic [SP_AW-1:0] eng_raddr, eng_waddr;
  fxp_t       eng_rdata, eng_wdata;
  logic       eng_we, eng_ovalid;
  logic [7:0] eng_oidx;
  fxp_t       eng_oval;

  // loads and stores
  logic [7:0] rd_len, rd_iss, rd_ret, st_cnt;
  addr_t      rd_addr;
  logic [SP_AW-1:0] rd_spoff;
  logic [7:0] nb;
  logic [3:0] mcnt;

  // mean
  logic        mean_clear, mean_add;
  fxp_t        mean_val;
  logic [7:0]  mean_count;

  // ---------------- peripheral bus ----------------
  assign start = pb_sel && pb_we && pb_addr == 3'd0 && pb_wdata[0] && state == S_IDLE;

  always_comb begin
    case (pb_addr)
      3'd0:    pb_rdata = '0;
      3'd1:    pb_rdata = fxp_t'({done_flag, state != S_IDLE});
      3'd2:    pb_rdata = fxp_t'(wbase);
      3'd3:    pb_rdata = fxp_t'(in_base);
      3'd4:    pb_rdata = fxp_t'(out_base);
      3'd5:    pb_rdata = fxp_t'(cycles);
      default: pb_rdata = '0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wbase    <= '0;
      in_base  <= '0;
      out_base <= '0;
    end else if (pb_sel && pb_we && state == S_IDLE) begin
      case (pb_addr)
        3'd2: wbase    <= addr_t'(pb_wdata);
        3'd3: in_base  <= addr_t'(pb_wdata);
        3'd4: out_base <= addr_t'(pb_wdata);
        default: ;
      endcase
    end
  end

  // ---------------- layer engine ----------------
  always_comb begin
    case (state)
      S_EQ1:   eng_layer = layer_desc(L_EQ1);
      S_EQ2:   eng_layer = layer_desc(L_EQ2);
      S_B1:    eng_layer = layer_desc(L_B1);
      S_B2:    eng_layer = layer_desc(L_B2);
      S_H1:    eng_layer = layer_desc(L_H1);
      default: eng_layer = layer_desc(L_H2);
    endcase
  end

  logic in_layer;
  assign in_layer  = state inside {S_EQ1, S_EQ2, S_B1, S_B2, S_H1, S_H2};
  assign eng_start = in_layer && !launched && !eng_busy;
  assign eng_rdata = sp[eng_raddr];

  layer_engine u_engine (
    .clk, .rst_n,
    .start     (eng_start),
    .layer     (eng_layer),
    .wbase     (wbase),
    .busy      (eng_busy),
    .done      (eng_done),
    .mem_req   (m_req[0]),
    .mem_rsp   (m_rsp[0]),
    .sp_raddr  (eng_raddr),
    .sp_rdata  (eng_rdata),
    .sp_we     (eng_we),
    .sp_waddr  (eng_waddr),
    .sp_wdata  (eng_wdata),
    .out_valid (eng_ovalid),
    .out_idx   (eng_oidx),
    .out_val   (eng_oval)
  );

  // ---------------- mean operator ----------------
  assign mean_add = eng_ovalid && state == S_B2;

  mean_unit #(.N(B_HID), .K(K)) u_mean (
    .clk, .rst_n,
    .clear     (mean_clear),
    .add_valid (mean_add),
    .add_idx   ($clog2(B_HID)'(eng_oidx)),
    .add_val   (eng_oval),
    .rd_idx    ($clog2(B_HID)'(mcnt)),
    .mean      (mean_val),
    .count     (mean_count)
  );

  // ---------------- thrust mapping ----------------
  for (genvar g = 0; g < N_ACT; g++) begin : g_thrust
    assign a_out[g] = sp[SP_A + g];
    thrust_map u_map (.a(a_out[g]), .f(f_out[g]));
  end

  // ---------------- observation loads (port 1) ----------------
  always_comb begin
    m_req[1]       = '0;
    m_req[1].req   = (state == S_LOAD_Q || state == S_LOAD_N) && rd_iss < rd_len;
    m_req[1].addr  = rd_addr + addr_t'(rd_iss);
  end

  // ---------------- result stores (port 2) ----------------
  always_comb begin
    m_req[2]       = '0;
    m_req[2].req   = state == S_STORE && st_cnt < 8'(2 * N_ACT);
    m_req[2].we    = 1'b1;
    m_req[2].addr  = out_base + addr_t'(st_cnt);
    m_req[2].wdata = (st_cnt < 8'(N_ACT)) ? a_out[st_cnt[1:0]] : f_out[st_cnt[1:0]];
  end

  // ---------------- scratchpad writes ----------------
  always_ff @(posedge clk) begin
    if (eng_we)
      sp[eng_waddr] <= eng_wdata;
    else if ((state == S_LOAD_Q || state == S_LOAD_N) && m_rsp[1].rvalid)
      sp[rd_spoff + SP_AW'(rd_ret)] <= m_rsp[1].rdata;
    else if (state == S_MEAN)
      sp[SP_AW'(SP_EK) + SP_AW'(mcnt)] <= mean_val;
  end

  // ---------------- sequencer ----------------
  task automatic begin_load(input addr_t a, input int off, input int len);
    rd_addr  <= a;
    rd_spoff <= SP_AW'(off);
    rd_len   <= 8'(len);
    rd_iss   <= '0;
    rd_ret   <= '0;
  endtask

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      launched   <= 1'b0;
      done_flag  <= 1'b0;
      cycles     <= '0;
      cyc_cnt    <= '0;
      irq        <= 1'b0;
      rd_addr    <= '0;
      rd_spoff   <= '0;
      rd_len     <= '0;
      rd_iss     <= '0;
      rd_ret     <= '0;
      st_cnt     <= '0;
      nb         <= '0;
      mcnt       <= '0;
      mean_clear <= 1'b0;
      mean_adds  <= '0;
    end else begin
      irq        <= 1'b0;
      mean_clear <= 1'b0;
      if (mean_add) mean_adds <= mean_adds + 32'd1;
      if (state != S_IDLE) cyc_cnt <= cyc_cnt + 32'd1;
      if (eng_start) launched <= 1'b1;
      if (m_req[1].req && m_rsp[1].gnt) rd_iss <= rd_iss + 8'd1;
      if (m_rsp[1].rvalid) rd_ret <= rd_ret + 8'd1;

      case (state)
        S_IDLE: if (start) begin
          done_flag  <= 1'b0;
          cyc_cnt    <= 32'd1;
          nb         <= '0;
          mean_clear <= 1'b1;
          begin_load(in_base, SP_XQ, SELF_OBS);
          state      <= S_LOAD_Q;
        end
        S_LOAD_Q: if (rd_ret == rd_len) state <= S_EQ1;
        S_EQ1: if (eng_done) begin launched <= 1'b0; state <= S_EQ2; end
        S_EQ2: if (eng_done) begin
          launched <= 1'b0;
          begin_load(in_base + addr_t'(SELF_OBS), SP_XN, NB_OBS);
          state    <= S_LOAD_N;
        end
        S_LOAD_N: if (rd_ret == rd_len) state <= S_B1;
        S_B1: if (eng_done) begin launched <= 1'b0; state <= S_B2; end
        S_B2: if (eng_done) begin
          launched <= 1'b0;
          nb       <= nb + 8'd1;
          if (int'(nb) == K - 1) begin
            mcnt  <= '0;
            state <= S_MEAN;
          end else begin
            begin_load(in_base + addr_t'(SELF_OBS + NB_OBS * (int'(nb) + 1)), SP_XN, NB_OBS);
            state <= S_LOAD_N;
          end
        end
        S_MEAN: begin
          mcnt <= mcnt + 4'd1;
          if (int'(mcnt) == B_HID - 1) state <= S_H1;
        end
        S_H1: if (eng_done) begin launched <= 1'b0; state <= S_H2; end
        S_H2: if (eng_done) begin
          launched <= 1'b0;
          st_cnt   <= '0;
          state    <= S_STORE;
        end
        S_STORE: begin
          if (m_req[2].req && m_rsp[2].gnt) st_cnt <= st_cnt + 8'd1;
          if (st_cnt == 8'(2 * N_ACT)) begin
            state     <= S_IDLE;
            done_flag <= 1'b1;
            irq       <= 1'b1;
            cycles    <= cyc_cnt;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // the mean sees exactly K vectors before it is read
  a_mean_complete: assert property (@(posedge clk) disable iff (!rst_n)
      state == S_MEAN |-> int'(mean_count) == K);
  // every request on the observation port is a read
  a_port1_read: assert property (@(posedge clk) disable iff (!rst_n)
      m_req[1].req |-> !m_req[1].we);
endmodule
