// tb_save_unit: drives SAVE instructions through save_unit. The FM side is
// modelled here: a random read grant and, one cycle after each grant, a
// data word per PE and bank that is a known function of (PE, memory, bank,
// address). The DDR model applies random back-pressure. After each
// instruction the DDR contents are compared with that function at the
// addresses the unit must write, and the words between the rows (which must
// not be written) are checked to still hold their marker.
module tb_save_unit;
  import dpu_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic start, busy, done;
  instr_t instr;
  logic [NREGION-1:0][DDR_AW-1:0] region_base;
  logic [DDR_AW-1:0] batch_stride;
  fm_req_t rd_req;
  logic rd_gnt, gnt_en, rd_valid;
  bankvec_t [NPE-1:0] rdata;
  ddr_req_t ddr_req;
  logic ddr_ready;
  ddr_rsp_t ddr_rsp;

  save_unit dut (
    .clk(clk), .rst_n(rst_n), .start(start), .instr(instr), .busy(busy), .done(done),
    .region_base(region_base), .batch_stride(batch_stride),
    .rd_req(rd_req), .rd_gnt(rd_gnt), .rd_valid(rd_valid), .rdata(rdata),
    .ddr_req(ddr_req), .ddr_ready(ddr_ready));

  ddr_model #(.AW(16), .LAT(2), .STALL(1'b1)) u_ddr (
    .clk(clk), .rst_n(rst_n), .req(ddr_req), .ready(ddr_ready), .rsp(ddr_rsp));

  function automatic logic [VEC_W-1:0] fmval(int p, int m, int b, int a);
    return {16'(p * 4099 + m * 77), 16'(b * 1237), 16'(a), 16'(a * 31 + p)};
  endfunction

  // FM model: registered read, data one cycle after the grant
  assign rd_gnt = rd_req.req && gnt_en;
  always @(negedge clk) gnt_en <= ($urandom_range(0, 2) != 0);
  always_ff @(posedge clk) begin
    rd_valid <= rst_n && rd_gnt;
    for (int p = 0; p < NPE; p++)
      for (int b = 0; b < NBANK; b++)
        rdata[p][b] <= (rd_gnt && rd_req.en[b]) ? fmval(p, int'(rd_req.mem), b, int'(rd_req.addr[b]))
                                                : {$urandom, $urandom};
  end

  task automatic run_case(int region, int oh, int ow, int cg, int smem);
    instr_t i;
    tdesc_t s;
    int base, rs;
    s = '0; s.mem = 2'(smem); s.bank = 3'($urandom); s.addr = 16'(FM_DEPTH - 9); s.rowlen = 16'(ow * cg);
    s.cgs = 8'(cg);
    rs = ow + 3;
    i = '0; i.op = OP_SAVE; i.region = 3'(region); i.ddr_off = 32'($urandom_range(0, 50));
    i.ddr_rstride = 16'(rs); i.out_h = 8'(oh); i.out_w = 8'(ow); i.src = s;
    base = int'(region_base[region]) + int'(i.ddr_off);
    for (int p = 0; p < NPE; p++)
      for (int a = 0; a < oh * rs; a++) u_ddr.mem[base + p * int'(batch_stride) + a] = 64'hdead_beef_0000_0000;
    @(negedge clk);
    instr = i; start = 1;
    @(negedge clk) start = 0;
    while (!done) @(negedge clk);
    repeat (2) @(negedge clk);
    for (int p = 0; p < NPE; p++) for (int y = 0; y < oh; y++) for (int k = 0; k < rs; k++) begin
      logic [VEC_W-1:0] e, g;
      // word k of row y is word k of the row's flat list (x*cgs + g with x=0)
      e = (k < ow) ? fmval(p, smem, int'(row_bank(s, y)), int'(elem_addr(s, y, 0, k))) : 64'hdead_beef_0000_0000;
      g = u_ddr.mem[base + p * int'(batch_stride) + y * rs + k];
      checks++;
      if (g != e) begin
        failures++;
        if (failures < 8) $display("pe%0d row %0d word %0d: got %h exp %h", p, y, k, g, e);
      end
    end
  endtask

  initial begin
    start = 0; instr = '0;
    for (int r = 0; r < NREGION; r++) region_base[r] = DDR_AW'(r * 8192 + $urandom_range(0, 100));
    batch_stride = DDR_AW'(1500);
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_case(R_OUTPUT, 3, 5, 1, 0);
    run_case(R_SWAP, 8, 4, 2, 2);
    run_case(R_OUTPUT, 1, 9, 3, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
