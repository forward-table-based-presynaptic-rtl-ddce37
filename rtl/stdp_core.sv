// stdp_core: an index-based neuromorphic core with forward-table STDP.
//
// The core maps N_IN inputs (axons) onto N_POST post-synaptic neurons through
// three tables: the pointer table gives each input the start of its row in the
// run-length-encoded weight table, and the routing table gives each neuron the
// destination of its spikes. Learning uses only this forward (input -> neuron)
// lookup: acausal updates are made when a pre-synaptic spike arrives, and
// causal updates are deferred until the pre-synaptic STDP timer runs out (or
// made just before the acausal ones when the input spikes again inside its
// window). The block structure (pointer table, weight table, routing table,
// pre- and post-synaptic processors) is the paper's; the sequencing, the
// configuration port and all handshakes are this design's own.
//
// Operation: pre-synaptic events (in_valid/in_addr) and neuron spikes
// (post_spike) are collected between ticks. A `tick` pulse starts one time
// step: timers are decremented, the pre-synaptic processor sweeps the rows of
// the inputs that spiked or whose window ended (delivering synaptic events on
// syn_* and updating weights), then the neuron spikes of the step reload the
// neuron timers and leave through the routing table (out_*). `busy` is high
// during a step. A tick that comes while busy is held (one deep) and reported
// on `overrun`; a further one is dropped. The neuron model is outside the
// core: it receives syn_* and returns post_spike.
//
// Configuration: cfg_req with cfg_we/cfg_sel/cfg_addr/cfg_wdata is served
// when no step is running; cfg_ack pulses when done, with cfg_rdata for reads
// (two cycles after the request is taken). cfg_req must be held until cfg_ack.
module stdp_core
  import stdp_pkg::*;
#(
  parameter int unsigned N_IN     = N_IN_DEF,
  parameter int unsigned N_POST   = N_POST_DEF,
  parameter int unsigned W_BITS   = W_BITS_DEF,
  parameter int unsigned T_STDP   = T_STDP_DEF,
  parameter int unsigned DW_MAX   = DW_MAX_DEF,
  parameter int unsigned WT_DEPTH = WT_DEPTH_DEF,
  parameter int unsigned DEST_W   = DEST_W_DEF,
  localparam int unsigned IW      = $clog2(N_IN),
  localparam int unsigned JW      = $clog2(N_POST),
  localparam int unsigned AW      = $clog2(WT_DEPTH),
  localparam int unsigned CFG_AW  = 16,
  localparam int unsigned CFG_DW  = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     tick,
  output logic                     busy,
  output logic                     overrun,
  // incoming pre-synaptic events
  input  logic                     in_valid,
  input  logic [IW-1:0]            in_addr,
  // neuron interface
  output logic                     syn_valid,
  output logic [JW-1:0]            syn_post,
  output logic signed [W_BITS-1:0] syn_weight,
  input  logic [N_POST-1:0]        post_spike,
  // outgoing post-synaptic events
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [DEST_W-1:0]        out_dest,
  output logic [JW-1:0]            out_src,
  // configuration and read-out
  input  logic                     cfg_req,
  input  logic                     cfg_we,
  input  cfg_sel_e                 cfg_sel,
  input  logic [CFG_AW-1:0]        cfg_addr,
  input  logic [CFG_DW-1:0]        cfg_wdata,
  output logic                     cfg_ack,
  output logic [CFG_DW-1:0]        cfg_rdata,
  // activity strobes for monitoring
  output logic                     upd_valid,
  output logic                     upd_causal,
  output logic                     upd_acausal,
  output logic                     upd_saturated,
  output logic                     row_valid,
  output logic                     row_new,
  output logic                     row_causal
);

  localparam int unsigned TW = $clog2(T_STDP + 1);

  // ---------------------------------------------------------------- sequencing
  typedef enum logic [1:0] {Q_IDLE, Q_PRE, Q_POST} seq_e;
  typedef enum logic [1:0] {C_IDLE, C_WAIT, C_ACK} cfg_e;

  seq_e seq;
  cfg_e cst;
  logic tick_q, step, apply, pre_busy, post_busy;

  assign busy = (seq != Q_IDLE) || step;
  assign step = (seq == Q_IDLE) && tick_q && (cst == C_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seq     <= Q_IDLE;
      tick_q  <= 1'b0;
      overrun <= 1'b0;
    end else begin
      overrun <= tick && (busy || tick_q);
      if (tick)      tick_q <= 1'b1;
      else if (step) tick_q <= 1'b0;
      unique case (seq)
        Q_IDLE: if (step) seq <= Q_PRE;
        Q_PRE:  if (!pre_busy) seq <= Q_POST;
        Q_POST: if (!post_busy && !apply) seq <= Q_IDLE;
        default: seq <= Q_IDLE;
      endcase
    end
  end

  // the neuron timers are reloaded once the sweeps of the step are over
  assign apply = (seq == Q_PRE) && !pre_busy;

  // ---------------------------------------------------------------- tables
  logic              pt_rd_en, pt_wr_en, p_pt_rd_en;
  logic [IW-1:0]     pt_rd_addr, p_pt_rd_addr;
  logic [AW-1:0]     pt_rd_data;
  logic              wt_en, wt_we, p_wt_en, p_wt_we;
  logic [AW-1:0]     wt_addr, p_wt_addr;
  logic [W_BITS:0]   wt_wdata, wt_rdata, p_wt_wdata;
  logic              rt_rd_en, rt_wr_en, p_rt_rd_en;
  logic [JW-1:0]     rt_rd_addr, p_rt_rd_addr;
  logic [DEST_W-1:0] rt_rd_data;

  pointer_table #(.N_IN(N_IN), .PTR_W(AW)) u_pt (
    .clk, .rd_en(pt_rd_en), .rd_addr(pt_rd_addr), .rd_data(pt_rd_data),
    .wr_en(pt_wr_en), .wr_addr(cfg_addr[IW-1:0]), .wr_data(cfg_wdata[AW-1:0])
  );

  weight_table #(.DEPTH(WT_DEPTH), .W_BITS(W_BITS)) u_wt (
    .clk, .a_en(wt_en), .a_we(wt_we), .a_addr(wt_addr),
    .a_wdata(wt_wdata), .a_rdata(wt_rdata)
  );

  routing_table #(.N_POST(N_POST), .DEST_W(DEST_W)) u_rt (
    .clk, .rd_en(rt_rd_en), .rd_addr(rt_rd_addr), .rd_data(rt_rd_data),
    .wr_en(rt_wr_en), .wr_addr(cfg_addr[JW-1:0]), .wr_data(cfg_wdata[DEST_W-1:0])
  );

  // ---------------------------------------------------------------- processors
  logic [TW-1:0] post_timers [N_POST];

  pre_syn_processor #(
    .N_IN(N_IN), .N_POST(N_POST), .W_BITS(W_BITS), .T_STDP(T_STDP),
    .DW_MAX(DW_MAX), .WT_DEPTH(WT_DEPTH)
  ) u_pre (
    .clk, .rst_n, .in_valid, .in_addr, .step, .busy(pre_busy), .post_timers,
    .pt_rd_en(p_pt_rd_en), .pt_rd_addr(p_pt_rd_addr), .pt_rd_data,
    .wt_en(p_wt_en), .wt_we(p_wt_we), .wt_addr(p_wt_addr), .wt_wdata(p_wt_wdata),
    .wt_rdata, .syn_valid, .syn_post, .syn_weight,
    .upd_valid, .upd_causal, .upd_acausal, .upd_saturated,
    .row_valid, .row_new, .row_causal
  );

  post_syn_processor #(.N_POST(N_POST), .T_STDP(T_STDP), .DEST_W(DEST_W)) u_post (
    .clk, .rst_n, .post_spike, .step, .apply, .busy(post_busy), .post_timers,
    .rt_rd_en(p_rt_rd_en), .rt_rd_addr(p_rt_rd_addr), .rt_rd_data,
    .out_valid, .out_ready, .out_dest, .out_src
  );

  // ---------------------------------------------------------------- configuration
  cfg_sel_e cfg_sel_q;
  logic     cfg_take;

  // a request is taken only when no step runs or is about to start
  assign cfg_take = (cst == C_IDLE) && cfg_req && (seq == Q_IDLE) && !tick_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cst       <= C_IDLE;
      cfg_sel_q <= CFG_PT;
    end else begin
      unique case (cst)
        C_IDLE: if (cfg_take) begin
          cst       <= C_WAIT;
          cfg_sel_q <= cfg_sel;
        end
        C_WAIT:  cst <= C_ACK;
        C_ACK:   cst <= C_IDLE;
        default: cst <= C_IDLE;
      endcase
    end
  end

  assign cfg_ack = (cst == C_ACK);

  always_ff @(posedge clk) begin
    if (cst == C_WAIT) begin
      unique case (cfg_sel_q)
        CFG_PT:  cfg_rdata <= CFG_DW'(pt_rd_data);
        CFG_WT:  cfg_rdata <= CFG_DW'(wt_rdata);
        CFG_RT:  cfg_rdata <= CFG_DW'(rt_rd_data);
        default: cfg_rdata <= '0;
      endcase
    end
  end

  // table port multiplexing: the processors own the ports during a step
  always_comb begin
    pt_wr_en   = cfg_take && cfg_we && (cfg_sel == CFG_PT);
    rt_wr_en   = cfg_take && cfg_we && (cfg_sel == CFG_RT);
    pt_rd_en   = p_pt_rd_en;
    pt_rd_addr = p_pt_rd_addr;
    rt_rd_en   = p_rt_rd_en;
    rt_rd_addr = p_rt_rd_addr;
    wt_en      = p_wt_en;
    wt_we      = p_wt_we;
    wt_addr    = p_wt_addr;
    wt_wdata   = p_wt_wdata;
    if (cfg_take) begin
      unique case (cfg_sel)
        CFG_PT: if (!cfg_we) begin
          pt_rd_en   = 1'b1;
          pt_rd_addr = cfg_addr[IW-1:0];
        end
        CFG_WT: begin
          wt_en    = 1'b1;
          wt_we    = cfg_we;
          wt_addr  = cfg_addr[AW-1:0];
          wt_wdata = cfg_wdata[W_BITS:0];
        end
        CFG_RT: if (!cfg_we) begin
          rt_rd_en   = 1'b1;
          rt_rd_addr = cfg_addr[JW-1:0];
        end
        default: ;
      endcase
    end
  end

  // the processors never use a table while the configuration port does
  a_cfg_excl: assert property (@(posedge clk) disable iff (!rst_n)
                               cfg_take |-> !(p_wt_en || p_pt_rd_en || p_rt_rd_en));

endmodule
