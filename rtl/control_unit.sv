// control_unit: the accelerator's memory-mapped registers and sequencer.
//
// The CPU writes, through the MMIO slave port, the address and size of the
// kernel configuration, the initial address, size and stride of every input
// and output memory node, and then a command to CTRL. The FSM then
//   CONF  (if CTRL bit1): forgets the old PE configuration and lets input
//         node 0 fetch cfg_size words into the configuration deserializer;
//   INIT  (if CTRL bit0): opens the PE-array clock for one initialisation
//         cycle (FU registers take their initial values, buffers empty) and
//         starts every memory node whose size is not zero;
//   EXEC: keeps the array clock running until every output node with a
//         non-zero size is done;
//   DONE: stops the array clock, sets STATUS.done and raises irq_o.
// irq_o stays high until the CPU writes 1 to STATUS bit 1. Keeping the array
// clock off outside INIT/EXEC is the second level of the paper's clock-gating
// hierarchy. The paper gives the role of the unit (MMIO registers, start and
// control commands, interrupt at the end of a kernel); the register map, the
// command bits and the states are this design's.
//
// Register map (byte offsets): 0x00 CTRL (W: bit0 run kernel, bit1 load
// configuration first), 0x04 STATUS (R: bit0 busy, bit1 done; W1C bit1),
// 0x08 CFG_ADDR, 0x0C CFG_SIZE (words), 0x10+16*i IMN i ADDR/SIZE/STRIDE,
// 0x50+16*i OMN i ADDR/SIZE/STRIDE. MMIO timing: granted at once, response
// (rvalid, rdata) in the next cycle. A command written while busy is ignored.
module control_unit
  import strela_pkg::*;
#(
  parameter int unsigned N_IMN = 4,
  parameter int unsigned N_OMN = 4
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  obi_req_t                 reg_req_i,
  output obi_rsp_t                 reg_rsp_o,
  output logic                     irq_o,
  // input memory nodes (node 0 also fetches the configuration)
  output logic [N_IMN-1:0]         imn_start_o,
  output logic                     imn0_cfg_mode_o,
  output logic [N_IMN-1:0][31:0]   imn_addr_o,
  output logic [N_IMN-1:0][31:0]   imn_size_o,
  output logic [N_IMN-1:0][31:0]   imn_stride_o,
  input  logic [N_IMN-1:0]         imn_done_i,
  // output memory nodes
  output logic [N_OMN-1:0]         omn_start_o,
  output logic [N_OMN-1:0][31:0]   omn_addr_o,
  output logic [N_OMN-1:0][31:0]   omn_size_o,
  output logic [N_OMN-1:0][31:0]   omn_stride_o,
  input  logic [N_OMN-1:0]         omn_done_i,
  // CGRA
  output logic                     cfg_clear_o,
  output logic                     array_en_o,
  output logic                     init_o
);
  typedef enum logic [2:0] {S_IDLE, S_CONF, S_CONF_END, S_INIT, S_EXEC, S_DONE} state_e;

  state_e      state;
  logic [31:0] cfg_addr, cfg_size;
  logic [N_IMN-1:0][31:0] imn_addr, imn_size, imn_stride;
  logic [N_OMN-1:0][31:0] omn_addr, omn_size, omn_stride;
  logic        run_pending, done;
  logic        wr, cmd_cfg, cmd_run;
  logic [7:0]  off;
  logic [N_OMN-1:0] omn_active;

  assign off     = reg_req_i.addr[7:0];
  assign wr      = reg_req_i.req && reg_req_i.we;
  assign cmd_cfg = wr && off == REG_CTRL && reg_req_i.wdata[1] && state == S_IDLE;
  assign cmd_run = wr && off == REG_CTRL && reg_req_i.wdata[0] && state == S_IDLE;

  // ---- MMIO registers ----
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cfg_addr   <= '0;
      cfg_size   <= '0;
      imn_addr   <= '0;
      imn_size   <= '0;
      imn_stride <= '0;
      omn_addr   <= '0;
      omn_size   <= '0;
      omn_stride <= '0;
    end else if (wr) begin
      if (off == REG_CFG_ADDR) cfg_addr <= reg_req_i.wdata;
      if (off == REG_CFG_SIZE) cfg_size <= reg_req_i.wdata;
      for (int i = 0; i < N_IMN; i++) begin
        if (off == REG_IMN_BASE + 8'(16*i))     imn_addr[i]   <= reg_req_i.wdata;
        if (off == REG_IMN_BASE + 8'(16*i + 4)) imn_size[i]   <= reg_req_i.wdata;
        if (off == REG_IMN_BASE + 8'(16*i + 8)) imn_stride[i] <= reg_req_i.wdata;
      end
      for (int i = 0; i < N_OMN; i++) begin
        if (off == REG_OMN_BASE + 8'(16*i))     omn_addr[i]   <= reg_req_i.wdata;
        if (off == REG_OMN_BASE + 8'(16*i + 4)) omn_size[i]   <= reg_req_i.wdata;
        if (off == REG_OMN_BASE + 8'(16*i + 8)) omn_stride[i] <= reg_req_i.wdata;
      end
    end
  end

  // read port
  logic [31:0] rdata;
  always_comb begin
    rdata = '0;
    if (off == REG_STATUS)   rdata = {30'd0, done, state != S_IDLE};
    if (off == REG_CFG_ADDR) rdata = cfg_addr;
    if (off == REG_CFG_SIZE) rdata = cfg_size;
    for (int i = 0; i < N_IMN; i++) begin
      if (off == REG_IMN_BASE + 8'(16*i))     rdata = imn_addr[i];
      if (off == REG_IMN_BASE + 8'(16*i + 4)) rdata = imn_size[i];
      if (off == REG_IMN_BASE + 8'(16*i + 8)) rdata = imn_stride[i];
    end
    for (int i = 0; i < N_OMN; i++) begin
      if (off == REG_OMN_BASE + 8'(16*i))     rdata = omn_addr[i];
      if (off == REG_OMN_BASE + 8'(16*i + 4)) rdata = omn_size[i];
      if (off == REG_OMN_BASE + 8'(16*i + 8)) rdata = omn_stride[i];
    end
  end

  logic        rvalid_q;
  logic [31:0] rdata_q;
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rvalid_q <= 1'b0;
      rdata_q  <= '0;
    end else begin
      rvalid_q <= reg_req_i.req;
      rdata_q  <= (reg_req_i.req && !reg_req_i.we) ? rdata : '0;
    end
  end
  // always ready: grant in the request cycle, response one cycle later
  assign reg_rsp_o = '{gnt: reg_req_i.req, rvalid: rvalid_q, rdata: rdata_q};

  // ---- FSM ----
  for (genvar i = 0; i < N_OMN; i++) begin : g_act
    assign omn_active[i] = omn_size[i] != '0;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state       <= S_IDLE;
      run_pending <= 1'b0;
      done        <= 1'b0;
    end else begin
      if (wr && off == REG_STATUS && reg_req_i.wdata[1]) done <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (cmd_cfg) begin
            state       <= S_CONF;
            run_pending <= cmd_run;
            done        <= 1'b0;
          end else if (cmd_run) begin
            state <= S_INIT;
            done  <= 1'b0;
          end
        end
        S_CONF:     if (imn_done_i[0]) state <= S_CONF_END;
        S_CONF_END: state <= run_pending ? S_INIT : S_DONE;  // last PE word lands
        S_INIT:     state <= S_EXEC;
        S_EXEC:     if (&(omn_done_i | ~omn_active)) state <= S_DONE;
        S_DONE: begin
          state       <= S_IDLE;
          run_pending <= 1'b0;
          done        <= 1'b1;
        end
        default:    state <= S_IDLE;
      endcase
    end
  end

  assign irq_o       = done;
  assign cfg_clear_o = cmd_cfg;
  assign array_en_o  = (state == S_INIT) || (state == S_EXEC);
  assign init_o      = (state == S_INIT);

  // node starts: input node 0 with the configuration command, every node
  // with a non-zero size in INIT
  always_comb begin
    imn_start_o     = '0;
    omn_start_o     = '0;
    imn0_cfg_mode_o = cmd_cfg;
    imn_addr_o      = imn_addr;
    imn_size_o      = imn_size;
    imn_stride_o    = imn_stride;
    omn_addr_o      = omn_addr;
    omn_size_o      = omn_size;
    omn_stride_o    = omn_stride;
    if (cmd_cfg) begin
      imn_start_o[0]  = 1'b1;
      imn_addr_o[0]   = cfg_addr;
      imn_size_o[0]   = cfg_size;
      imn_stride_o[0] = 32'd4;
    end
    if (state == S_INIT) begin
      for (int i = 0; i < N_IMN; i++) imn_start_o[i] = imn_size[i] != '0;
      for (int i = 0; i < N_OMN; i++) omn_start_o[i] = omn_size[i] != '0;
    end
  end
endmodule
