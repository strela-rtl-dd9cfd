// mem_model: behavioural model of the host platform's system bus crossbar and
// interleaved SRAM banks, as seen by the accelerator's memory nodes.
//
// N_PORTS masters share N_BANKS word-interleaved banks (bank = word address
// mod N_BANKS). Each bank grants at most one request per cycle, rotating the
// priority among the masters; a granted access gets its response (rvalid,
// read data) in the next cycle. The words live in mem[], which a testbench
// may read and write directly. Counts granted accesses and refused requests.
module mem_model
  import strela_pkg::*;
#(
  parameter int unsigned N_PORTS = 8,
  parameter int unsigned N_BANKS = 4,
  parameter int unsigned WORDS   = 16384
) (
  input  logic                    clk_i,
  input  obi_req_t [N_PORTS-1:0]  req_i,
  output obi_rsp_t [N_PORTS-1:0]  rsp_o
);
  logic [31:0] mem [WORDS];
  logic [N_PORTS-1:0] gnt, rvalid_q;
  logic [N_PORTS-1:0][31:0] rdata_q;
  int unsigned prio = 0;
  int unsigned stalls = 0, accesses = 0;

  always_comb begin
    logic [N_BANKS-1:0] busy;
    busy = '0;
    gnt  = '0;
    for (int k = 0; k < N_PORTS; k++) begin
      int unsigned i, b;
      i = (prio + k) % N_PORTS;
      b = (req_i[i].addr >> 2) % N_BANKS;
      if (req_i[i].req && !busy[b]) begin
        gnt[i]  = 1'b1;
        busy[b] = 1'b1;
      end
    end
  end

  always_ff @(posedge clk_i) begin
    prio <= (prio + 1) % N_PORTS;
    for (int i = 0; i < N_PORTS; i++) begin
      rvalid_q[i] <= gnt[i];
      if (gnt[i]) begin
        accesses <= accesses + 1;
        if (req_i[i].we) mem[(req_i[i].addr >> 2) % WORDS] <= req_i[i].wdata;
        else             rdata_q[i] <= mem[(req_i[i].addr >> 2) % WORDS];
      end
    end
    stalls <= stalls + $countones(req_i_reqs() & ~gnt);
  end

  function automatic logic [N_PORTS-1:0] req_i_reqs();
    logic [N_PORTS-1:0] r;
    for (int i = 0; i < N_PORTS; i++) r[i] = req_i[i].req;
    return r;
  endfunction

  for (genvar i = 0; i < N_PORTS; i++) begin : g_rsp
    assign rsp_o[i] = '{gnt: gnt[i], rvalid: rvalid_q[i], rdata: rdata_q[i]};
  end

  initial begin
    rvalid_q = '0;
    rdata_q  = '0;
  end
endmodule
