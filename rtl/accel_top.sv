// accel_top: CNN inference accelerator for regular and depthwise convolutions.
//
// The feature map memory and the weight memory feed the convolution layer
// processing unit (CLPU) through the address generator; the CLPU's result
// blocks pass through the activation and pooling layer processing unit
// (APLPU), which writes them back into the feature map memory. The control
// unit steps through the layers of the network, switching each layer between
// regular mode (one input channel shared by PE_NUM cores that compute PE_NUM
// output channels) and depthwise mode (PE_NUM channels, one per core). This is
// the structure of the paper's architecture figure; the ports below are this
// design's.
//
// Host side (the paper's external CPU): while busy is low the host may write
// and read the feature map memory (host_fm_*) and write the weight memory
// (host_w_*) and the layer table (cfg_*); then it pulses start. While busy is
// high the accelerator owns both memories and host accesses are ignored.
// host_fm_rdata is valid one cycle after host_fm_re. done pulses when the last
// layer is written back; error reports a layer that was skipped. The status
// pulses mac_active (a kernel position issued to the cores), stall (the CLPU
// waited for the APLPU), mode_switch, and sat (saturation in the APLPU) are
// for performance counting.
// Lint reports rst_n as used both asynchronously and synchronously
// (SYNCASYNCNET) here too: the synchronous use is only the disable iff of the
// assertions in clpu and clpu_buffer, which is not logic, so the warning stands.
module accel_top
  import cnn_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  // host access to the feature map memory
  input  logic                host_fm_we,
  input  logic [FM_AW-1:0]    host_fm_waddr,
  input  logic [FM_DW-1:0]    host_fm_wdata,
  input  logic [FM_BYTES-1:0] host_fm_be,
  input  logic                host_fm_re,
  input  logic [FM_AW-1:0]    host_fm_raddr,
  output logic [FM_DW-1:0]    host_fm_rdata,
  // host access to the weight memory
  input  logic                host_w_we,
  input  logic [W_AW-1:0]     host_w_addr,
  input  logic [W_DW-1:0]     host_w_wdata,
  // network information
  input  logic                cfg_we,
  input  logic [LAYER_AW-1:0] cfg_addr,
  input  layer_t              cfg_data,
  input  logic                start,
  input  logic [LAYER_AW:0]   num_layers,
  output logic                busy,
  output logic                done,
  output logic                error,
  output logic [LAYER_AW-1:0] layer_idx,
  // status
  output logic                mac_active,
  output logic                stall,
  output logic                mode_switch,
  output logic                sat
);
  layer_t cfg;
  logic   agen_start, agen_busy, agen_done, clpu_idle, aplpu_idle;

  // address generator <-> memories / buffer
  logic             fm_rd_en;
  logic [FM_AW-1:0] fm_rd_addr;
  fm_tag_t          fm_tag;
  logic             w_rd_en;
  logic [W_AW-1:0]  w_rd_addr;
  logic             w_bank;
  logic [5:0]       w_kpos;
  logic [1:0]       bank_full;
  logic             clear, clear_bank, commit, commit_bank;
  step_t            commit_meta;

  logic [FM_DW-1:0] fm_rdata;
  logic [W_DW-1:0]  w_rdata;

  // CLPU -> APLPU
  logic  res_valid, res_ready;
  acc_t  res [PE_NUM][MAC_PE];
  step_t res_meta;

  // APLPU -> feature map memory
  logic                ap_wr_en;
  logic [FM_AW-1:0]    ap_wr_addr;
  logic [FM_DW-1:0]    ap_wr_data;
  logic [FM_BYTES-1:0] ap_wr_be;

  control_unit u_ctrl (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_data, .start, .num_layers,
    .cfg, .layer_idx, .agen_start, .agen_busy, .clpu_idle, .aplpu_idle,
    .busy, .done, .error, .mode_switch
  );

  address_generator u_agen (
    .clk, .rst_n, .start(agen_start), .cfg, .busy(agen_busy), .done(agen_done),
    .fm_rd_en, .fm_rd_addr, .fm_tag,
    .w_rd_en, .w_rd_addr, .w_bank, .w_kpos,
    .bank_full, .clear, .clear_bank, .commit, .commit_bank, .commit_meta
  );

  fm_memory u_fm (
    .clk,
    .rd_en   (busy ? fm_rd_en   : host_fm_re),
    .rd_addr (busy ? fm_rd_addr : host_fm_raddr),
    .rd_data (fm_rdata),
    .wr_en   (busy ? ap_wr_en   : host_fm_we),
    .wr_addr (busy ? ap_wr_addr : host_fm_waddr),
    .wr_data (busy ? ap_wr_data : host_fm_wdata),
    .wr_be   (busy ? ap_wr_be   : host_fm_be)
  );
  assign host_fm_rdata = fm_rdata;

  weight_memory u_wm (
    .clk,
    .rd_en   (w_rd_en),
    .rd_addr (w_rd_addr),
    .rd_data (w_rdata),
    .wr_en   (!busy && host_w_we),
    .wr_addr (host_w_addr),
    .wr_data (host_w_wdata)
  );

  clpu u_clpu (
    .clk, .rst_n,
    .mode(cfg.mode), .k(cfg.k), .dil(cfg.dil), .stride(cfg.stride),
    .clear, .clear_bank, .fm_req(fm_rd_en), .fm_tag, .fm_rdata,
    .w_req(w_rd_en), .w_bank, .w_kpos, .w_rdata,
    .commit, .commit_bank, .commit_meta, .bank_full,
    .res_valid, .res_ready, .res, .res_meta,
    .idle(clpu_idle), .mac_active, .stall
  );

  aplpu u_aplpu (
    .clk, .rst_n, .cfg,
    .res_valid, .res_ready, .res, .res_meta,
    .wr_en(ap_wr_en), .wr_addr(ap_wr_addr), .wr_data(ap_wr_data), .wr_be(ap_wr_be),
    .idle(aplpu_idle), .sat
  );
endmodule
