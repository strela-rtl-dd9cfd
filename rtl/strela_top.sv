// strela_top: the STRELA streaming elastic CGRA accelerator.
//
// A host CPU programs the control unit through the MMIO slave port; the
// accelerator then moves data on its own through eight system-bus master
// ports: four input memory nodes (IMNs) read streams and feed the north
// inputs of the 4x4 elastic PE array, and four output memory nodes (OMNs)
// collect the south outputs and write them back. IMN 0 also fetches the
// kernel configuration, which the configuration deserializer turns into
// per-PE words broadcast to the array. Loading, computing and storing all
// overlap, because every part is latency tolerant (valid/ready handshakes);
// the throughput is set by the kernel's initiation interval and by how many
// bus accesses the memory system grants per cycle. The kernel-done interrupt
// goes to the CPU.
//
// The structure is the paper's block diagram. The system bus crossbar, the
// memory banks and the CPU belong to the host platform and are reached
// through the ports below. Bus ports use strela_pkg::obi_req_t/obi_rsp_t.
module strela_top
  import strela_pkg::*;
#(
  parameter int unsigned N_NODES    = 4,   // IMNs = OMNs = array columns
  parameter int unsigned ROWS       = 4,
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic                    clk_i,
  input  logic                    rst_ni,
  // MMIO slave (from the CPU)
  input  obi_req_t                reg_req_i,
  output obi_rsp_t                reg_rsp_o,
  output logic                    irq_o,
  // system bus masters
  output obi_req_t [N_NODES-1:0]  imn_req_o,
  input  obi_rsp_t [N_NODES-1:0]  imn_rsp_i,
  output obi_req_t [N_NODES-1:0]  omn_req_o,
  input  obi_rsp_t [N_NODES-1:0]  omn_rsp_i
);
  logic [N_NODES-1:0]        imn_start, omn_start, imn_done, omn_done;
  logic                      imn0_cfg_mode;
  logic [N_NODES-1:0][31:0]  imn_addr, imn_size, imn_stride;
  logic [N_NODES-1:0][31:0]  omn_addr, omn_size, omn_stride;
  logic                      cfg_clear, array_en, init;

  logic [N_NODES-1:0][31:0]  north_d, south_d;
  logic [N_NODES-1:0]        north_v, north_r, south_v, south_r;

  logic [31:0]               cfg_word;
  logic                      cfg_word_valid, cfg_valid;
  logic [IdW-1:0]            cfg_id;
  logic [CgW-1:0]            cfg_cg;
  pe_cfg_t                   cfg_pe;
  logic [ROWS*N_NODES-1:0]   configured;

  control_unit #(.N_IMN(N_NODES), .N_OMN(N_NODES)) u_ctrl (
    .clk_i, .rst_ni,
    .reg_req_i, .reg_rsp_o, .irq_o,
    .imn_start_o (imn_start), .imn0_cfg_mode_o (imn0_cfg_mode),
    .imn_addr_o (imn_addr), .imn_size_o (imn_size), .imn_stride_o (imn_stride),
    .imn_done_i (imn_done),
    .omn_start_o (omn_start),
    .omn_addr_o (omn_addr), .omn_size_o (omn_size), .omn_stride_o (omn_stride),
    .omn_done_i (omn_done),
    .cfg_clear_o (cfg_clear), .array_en_o (array_en), .init_o (init)
  );

  for (genvar i = 0; i < N_NODES; i++) begin : g_imn
    logic [31:0] cw;
    logic        cv;
    input_memory_node #(.FIFO_DEPTH(FIFO_DEPTH)) u_imn (
      .clk_i, .rst_ni,
      .start_i    (imn_start[i]),
      .cfg_mode_i ((i == 0) ? imn0_cfg_mode : 1'b0),
      .addr_i     (imn_addr[i]),
      .size_i     (imn_size[i]),
      .stride_i   (imn_stride[i]),
      .done_o     (imn_done[i]),
      .bus_req_o  (imn_req_o[i]),
      .bus_rsp_i  (imn_rsp_i[i]),
      .dout_o     (north_d[i]),
      .vout_o     (north_v[i]),
      .rin_i      (north_r[i]),
      .cfg_word_o (cw),
      .cfg_valid_o(cv)
    );
    if (i == 0) begin : g_cfg
      assign cfg_word       = cw;
      assign cfg_word_valid = cv;
    end
  end

  config_deserializer #(.N_WORDS(CfgWords)) u_deser (
    .clk_i, .rst_ni,
    .clr_i        (cfg_clear),
    .word_i       (cfg_word),
    .word_valid_i (cfg_word_valid),
    .cfg_valid_o  (cfg_valid),
    .cfg_id_o     (cfg_id),
    .cfg_cg_o     (cfg_cg),
    .cfg_word_o   (cfg_pe)
  );

  cgra_array #(.ROWS(ROWS), .COLS(N_NODES), .W(DataW)) u_cgra (
    .clk_i, .rst_ni,
    .array_en_i   (array_en),
    .clr_i        (init),
    .cfg_clear_i  (cfg_clear),
    .cfg_valid_i  (cfg_valid),
    .cfg_id_i     (cfg_id),
    .cfg_cg_i     (cfg_cg),
    .cfg_word_i   (cfg_pe),
    .configured_o (configured),
    .north_din_i  (north_d),
    .north_vin_i  (north_v),
    .north_rin_o  (north_r),
    .south_dout_o (south_d),
    .south_vout_o (south_v),
    .south_rout_i (south_r)
  );

  for (genvar i = 0; i < N_NODES; i++) begin : g_omn
    output_memory_node #(.FIFO_DEPTH(FIFO_DEPTH)) u_omn (
      .clk_i, .rst_ni,
      .start_i   (omn_start[i]),
      .addr_i    (omn_addr[i]),
      .size_i    (omn_size[i]),
      .stride_i  (omn_stride[i]),
      .done_o    (omn_done[i]),
      .din_i     (south_d[i]),
      .vin_i     (south_v[i]),
      .rout_o    (south_r[i]),
      .bus_req_o (omn_req_o[i]),
      .bus_rsp_i (omn_rsp_i[i])
    );
  end
endmodule
