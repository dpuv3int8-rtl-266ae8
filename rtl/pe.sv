// pe: one process engine.
//
// A PE holds its feature-map memory (NMEM circular memories of NBANK banks)
// and the two compute datapaths that work on it, conv_array and misc_alu.
// Control comes from the unit controllers outside, identical for all PEs: the
// PEs form a SIMD machine that processes NPE tensors with one instruction
// stream, and differ only in the data they hold.
//
// The FM ports are driven from the shared arbiter's per-memory selections.
// Write data are chosen per memory by mem_wr_sel: a LOAD word arrives already
// arranged by bank; CONV and MISC lane outputs are rotated so that lane r
// lands in bank (first bank + r) mod NBANK. Read data go to each reader from
// the memory it was granted in the cycle before (rd_mem).
//
// Timing: reads return one cycle after the grant (fm_mem); the datapaths
// consume the data in that cycle.
module pe
  import dpu_pkg::*;
(
  input  logic                        clk,
  input  logic                        rst_n,
  // FM ports, after arbitration
  input  fm_req_t [NMEM-1:0]          mem_rd,
  input  fm_req_t [NMEM-1:0]          mem_wr,
  input  logic [NMEM-1:0][1:0]        mem_wr_sel,
  input  logic [NRQ-1:0][1:0]         rd_mem,
  // LOAD write data for this PE
  input  bankvec_t                    load_wdata,
  // CONV control and parameters
  input  logic                        conv_clr,
  input  logic                        conv_acc,
  input  logic [NBANK-1:0]            conv_lane_en,
  input  logic [NBANK-1:0][2:0]       conv_lane_bank,
  input  logic [4:0]                  conv_shift,
  input  logic                        conv_relu,
  input  logic [2:0]                  conv_wrot,
  input  logic [PM_W-1:0]             pm_data,
  // MISC control
  input  logic                        misc_valid,
  input  misc_op_e                    misc_op,
  input  logic [NBANK-1:0]            misc_lane_en,
  input  logic [NBANK-1:0][2:0]       misc_lane_bank,
  input  logic [3:0]                  misc_shift_a,
  input  logic [3:0]                  misc_shift_b,
  input  logic [4:0]                  misc_shift,
  input  logic                        misc_relu,
  input  logic [2:0]                  misc_wrot,
  // SAVE read data of this PE
  output bankvec_t                    save_rdata
);
  bankvec_t mem_rdata [NMEM];
  bankvec_t mem_wdata [NMEM];
  vec_t [NBANK-1:0] conv_out, misc_out;
  bankvec_t conv_bv, misc_bv;

  for (genvar m = 0; m < NMEM; m++) begin : g_mem
    fm_mem u_mem (
      .clk     (clk),
      .rd_en   (mem_rd[m].req ? mem_rd[m].en : '0),
      .rd_addr (mem_rd[m].addr),
      .rd_data (mem_rdata[m]),
      .wr_en   (mem_wr[m].req ? mem_wr[m].en : '0),
      .wr_addr (mem_wr[m].addr),
      .wr_data (mem_wdata[m])
    );
  end

  // Lane r of a datapath goes to bank (rot + r) mod NBANK.
  always_comb begin
    for (int b = 0; b < NBANK; b++) begin
      conv_bv[b] = conv_out[3'(b - int'(conv_wrot))];
      misc_bv[b] = misc_out[3'(b - int'(misc_wrot))];
    end
    for (int m = 0; m < NMEM; m++) begin
      case (mem_wr_sel[m])
        2'(WQ_CONV): mem_wdata[m] = conv_bv;
        2'(WQ_MISC): mem_wdata[m] = misc_bv;
        default:     mem_wdata[m] = load_wdata;
      endcase
    end
  end

  conv_array u_conv (
    .clk       (clk),
    .rst_n     (rst_n),
    .clr       (conv_clr),
    .acc       (conv_acc),
    .lane_en   (conv_lane_en),
    .lane_bank (conv_lane_bank),
    .rdata     (mem_rdata[rd_mem[RQ_CONV]]),
    .pm_data   (pm_data),
    .shift     (conv_shift),
    .relu      (conv_relu),
    .out       (conv_out)
  );

  misc_alu u_misc (
    .clk       (clk),
    .rst_n     (rst_n),
    .valid     (misc_valid),
    .op        (misc_op),
    .lane_en   (misc_lane_en),
    .lane_bank (misc_lane_bank),
    .rdata     (mem_rdata[rd_mem[RQ_MISC]]),
    .shift_a   (misc_shift_a),
    .shift_b   (misc_shift_b),
    .shift     (misc_shift),
    .relu      (misc_relu),
    .out       (misc_out)
  );

  assign save_rdata = mem_rdata[rd_mem[RQ_SAVE]];
endmodule
