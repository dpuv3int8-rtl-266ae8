// dpu_top: the INT8 inference engine.
//
// A programmable engine for quantised convolutional networks. The compiler
// turns a network into four streams of coarse instructions, one per
// functional unit, interleaved in one program in DDR:
//   LOAD  DDR -> feature-map memory (FM) of every PE, or DDR -> parameter
//         memory (PM); optional on-the-fly re-layout of few-channel images
//   SAVE  FM -> DDR
//   CONV  convolution of an up to 8-row tile, weights from the PM
//   MISC  max pool, element-wise addition, data movement (sample,
//         up-sample, identity, column shuffle)
// The four units run concurrently; each instruction says by unit type which
// earlier work it waits for (DPON) and which later work waits for it (DPBY),
// so the compiler can software-pipeline load, compute and save of successive
// tiles. NPE = 4 PEs work in lock step on four tensors (SIMD), each with its
// own FM of three circular memories of eight banks; the PM is common.
// DDR is outside the engine and reached through one port; the host gives the
// five DDR region base pointers (inputs, outputs, parameters, instructions,
// swap) and the distance between the PEs' tensors, pulses start and waits
// for done.
//
// Ports: region_base and batch_stride must be stable while busy. The DDR port
// is valid/ready for requests and carries an id; read responses come back
// with the same id, in order per id. unit_busy and dep_wait show, per unit
// type, when a unit is running and when its next instruction is held back by
// DPON.
// The unit set, the PE / PM / FM organisation, the region scheme and the
// type-based synchronisation follow the architecture; the DDR port protocol,
// the arbitration between units and all widths are this design's own.
module dpu_top
  import dpu_pkg::*;
(
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           start,
  input  logic [NREGION-1:0][DDR_AW-1:0] region_base,
  input  logic [DDR_AW-1:0]              batch_stride,
  output logic                           busy,
  output logic                           done,
  output ddr_req_t                       ddr_req,
  input  logic                           ddr_ready,
  input  ddr_rsp_t                       ddr_rsp,
  output logic [NUNIT-1:0]               unit_busy,
  output logic [NUNIT-1:0]               dep_wait
);
  // ------------------------------------------------ dispatcher
  logic   [NUNIT-1:0] unit_start, unit_done;
  instr_t [NUNIT-1:0] unit_instr;
  ddr_req_t [2:0]     cli_req;
  logic     [2:0]     cli_ready, cli_rvalid;
  logic [DDR_W-1:0]   cli_rdata;

  dispatcher u_disp (
    .clk        (clk),
    .rst_n      (rst_n),
    .start      (start),
    .instr_base (region_base[R_INSTR]),
    .busy       (busy),
    .done       (done),
    .ddr_req    (cli_req[ID_FETCH]),
    .ddr_ready  (cli_ready[ID_FETCH]),
    .rsp_valid  (cli_rvalid[ID_FETCH]),
    .rsp_data   (cli_rdata),
    .unit_start (unit_start),
    .unit_instr (unit_instr),
    .unit_busy  (unit_busy),
    .unit_done  (unit_done),
    .waiting    (dep_wait)
  );

  ddr_arbiter u_ddr_arb (
    .clk        (clk),
    .rst_n      (rst_n),
    .cli_req    (cli_req),
    .cli_ready  (cli_ready),
    .cli_rvalid (cli_rvalid),
    .cli_rdata  (cli_rdata),
    .ddr_req    (ddr_req),
    .ddr_ready  (ddr_ready),
    .ddr_rsp    (ddr_rsp)
  );

  // ------------------------------------------------ FM arbitration
  fm_req_t [NRQ-1:0]    rd_req;
  logic    [NRQ-1:0]    rd_gnt, rd_valid;
  logic [NRQ-1:0][1:0]  rd_mem;
  fm_req_t [NWQ-1:0]    wr_req;
  logic    [NWQ-1:0]    wr_gnt;
  fm_req_t [NMEM-1:0]   mem_rd, mem_wr;
  logic [NMEM-1:0][1:0] mem_wr_sel;

  fm_arbiter u_fm_arb (
    .clk        (clk),
    .rst_n      (rst_n),
    .rd_req     (rd_req),
    .rd_gnt     (rd_gnt),
    .wr_req     (wr_req),
    .wr_gnt     (wr_gnt),
    .mem_rd     (mem_rd),
    .mem_wr     (mem_wr),
    .mem_wr_sel (mem_wr_sel),
    .rd_valid   (rd_valid),
    .rd_mem     (rd_mem)
  );

  // ------------------------------------------------ LOAD, PM
  bankvec_t [NPE-1:0] load_wdata;
  logic               pm_wr_en, pm_rd_en;
  logic [PM_AW-1:0]   pm_wr_addr, pm_rd_addr;
  logic [PM_W-1:0]    pm_wr_data, pm_rd_data;

  load_unit u_load (
    .clk          (clk),
    .rst_n        (rst_n),
    .start        (unit_start[U_LOAD]),
    .instr        (unit_instr[U_LOAD]),
    .busy         (unit_busy[U_LOAD]),
    .done         (unit_done[U_LOAD]),
    .region_base  (region_base),
    .batch_stride (batch_stride),
    .ddr_req      (cli_req[ID_LOAD]),
    .ddr_ready    (cli_ready[ID_LOAD]),
    .rsp_valid    (cli_rvalid[ID_LOAD]),
    .rsp_data     (cli_rdata),
    .wr_req       (wr_req[WQ_LOAD]),
    .wr_gnt       (wr_gnt[WQ_LOAD]),
    .wdata        (load_wdata),
    .pm_wr_en     (pm_wr_en),
    .pm_wr_addr   (pm_wr_addr),
    .pm_wr_data   (pm_wr_data)
  );

  param_mem u_pm (
    .clk     (clk),
    .wr_en   (pm_wr_en),
    .wr_addr (pm_wr_addr),
    .wr_data (pm_wr_data),
    .rd_en   (pm_rd_en),
    .rd_addr (pm_rd_addr),
    .rd_data (pm_rd_data)
  );

  // ------------------------------------------------ SAVE
  bankvec_t [NPE-1:0] save_rdata;

  save_unit u_save (
    .clk          (clk),
    .rst_n        (rst_n),
    .start        (unit_start[U_SAVE]),
    .instr        (unit_instr[U_SAVE]),
    .busy         (unit_busy[U_SAVE]),
    .done         (unit_done[U_SAVE]),
    .region_base  (region_base),
    .batch_stride (batch_stride),
    .rd_req       (rd_req[RQ_SAVE]),
    .rd_gnt       (rd_gnt[RQ_SAVE]),
    .rd_valid     (rd_valid[RQ_SAVE]),
    .rdata        (save_rdata),
    .ddr_req      (cli_req[ID_SAVE]),
    .ddr_ready    (cli_ready[ID_SAVE])
  );

  // ------------------------------------------------ CONV, MISC control
  logic                  c_clr, c_acc, c_relu;
  logic [NBANK-1:0]      c_lane_en;
  logic [NBANK-1:0][2:0] c_lane_bank;
  logic [4:0]            c_shift;
  logic [2:0]            c_wrot;

  conv_ctrl u_conv (
    .clk           (clk),
    .rst_n         (rst_n),
    .start         (unit_start[U_CONV]),
    .instr         (unit_instr[U_CONV]),
    .busy          (unit_busy[U_CONV]),
    .done          (unit_done[U_CONV]),
    .rd_req        (rd_req[RQ_CONV]),
    .rd_gnt        (rd_gnt[RQ_CONV]),
    .wr_req        (wr_req[WQ_CONV]),
    .wr_gnt        (wr_gnt[WQ_CONV]),
    .pm_rd_en      (pm_rd_en),
    .pm_rd_addr    (pm_rd_addr),
    .tok_clr       (c_clr),
    .tok_acc       (c_acc),
    .tok_lane_en   (c_lane_en),
    .tok_lane_bank (c_lane_bank),
    .out_shift     (c_shift),
    .out_relu      (c_relu),
    .out_wrot      (c_wrot)
  );

  logic                  m_valid, m_relu;
  misc_op_e              m_op;
  logic [NBANK-1:0]      m_lane_en;
  logic [NBANK-1:0][2:0] m_lane_bank;
  logic [3:0]            m_sa, m_sb;
  logic [4:0]            m_shift;
  logic [2:0]            m_wrot;

  misc_ctrl u_misc (
    .clk           (clk),
    .rst_n         (rst_n),
    .start         (unit_start[U_MISC]),
    .instr         (unit_instr[U_MISC]),
    .busy          (unit_busy[U_MISC]),
    .done          (unit_done[U_MISC]),
    .rd_req        (rd_req[RQ_MISC]),
    .rd_gnt        (rd_gnt[RQ_MISC]),
    .wr_req        (wr_req[WQ_MISC]),
    .wr_gnt        (wr_gnt[WQ_MISC]),
    .tok_valid     (m_valid),
    .tok_op        (m_op),
    .tok_lane_en   (m_lane_en),
    .tok_lane_bank (m_lane_bank),
    .out_shift_a   (m_sa),
    .out_shift_b   (m_sb),
    .out_shift     (m_shift),
    .out_relu      (m_relu),
    .out_wrot      (m_wrot)
  );

  // ------------------------------------------------ the PEs
  for (genvar p = 0; p < NPE; p++) begin : g_pe
    pe u_pe (
      .clk            (clk),
      .rst_n          (rst_n),
      .mem_rd         (mem_rd),
      .mem_wr         (mem_wr),
      .mem_wr_sel     (mem_wr_sel),
      .rd_mem         (rd_mem),
      .load_wdata     (load_wdata[p]),
      .conv_clr       (c_clr),
      .conv_acc       (c_acc),
      .conv_lane_en   (c_lane_en),
      .conv_lane_bank (c_lane_bank),
      .conv_shift     (c_shift),
      .conv_relu      (c_relu),
      .conv_wrot      (c_wrot),
      .pm_data        (pm_rd_data),
      .misc_valid     (m_valid),
      .misc_op        (m_op),
      .misc_lane_en   (m_lane_en),
      .misc_lane_bank (m_lane_bank),
      .misc_shift_a   (m_sa),
      .misc_shift_b   (m_sb),
      .misc_shift     (m_shift),
      .misc_relu      (m_relu),
      .misc_wrot      (m_wrot),
      .save_rdata     (save_rdata[p])
    );
  end
endmodule
