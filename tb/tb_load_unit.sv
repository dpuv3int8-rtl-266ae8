// tb_load_unit: drives LOAD instructions through load_unit against a DDR
// model with random back-pressure and a random FM write grant, records every
// FM word written for each PE and every PM word, and compares them with the
// DDR contents addressed as described for the unit: plain tensor rows, the
// format path (a dense stream of 3- and 5-channel pixels cut into one vector
// word per pixel), the bypass of the format path for more than 8 channels,
// and parameter blocks of 8 DDR words per PM word. Each case also checks that
// nothing outside the tile was written.
module tb_load_unit;
  import dpu_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic start, busy, done;
  instr_t instr;
  logic [NREGION-1:0][DDR_AW-1:0] region_base;
  logic [DDR_AW-1:0] batch_stride;
  ddr_req_t ddr_req;
  logic ddr_ready;
  ddr_rsp_t ddr_rsp;
  fm_req_t wr_req;
  logic wr_gnt, gnt_en;
  bankvec_t [NPE-1:0] wdata;
  logic pm_wr_en;
  logic [PM_AW-1:0] pm_wr_addr;
  logic [PM_W-1:0] pm_wr_data;

  load_unit dut (
    .clk(clk), .rst_n(rst_n), .start(start), .instr(instr), .busy(busy), .done(done),
    .region_base(region_base), .batch_stride(batch_stride),
    .ddr_req(ddr_req), .ddr_ready(ddr_ready),
    .rsp_valid(ddr_rsp.rvalid && ddr_rsp.rid == ID_LOAD), .rsp_data(ddr_rsp.rdata),
    .wr_req(wr_req), .wr_gnt(wr_gnt), .wdata(wdata),
    .pm_wr_en(pm_wr_en), .pm_wr_addr(pm_wr_addr), .pm_wr_data(pm_wr_data));

  ddr_model #(.AW(16), .LAT(4), .STALL(1'b1)) u_ddr (
    .clk(clk), .rst_n(rst_n), .req(ddr_req), .ready(ddr_ready), .rsp(ddr_rsp));

  assign wr_gnt = wr_req.req && gnt_en;
  always @(negedge clk) gnt_en <= ($urandom_range(0, 2) != 0);

  // words written, keyed by {pe, mem, bank, addr}
  logic [VEC_W-1:0] fm_got [int];
  logic [PM_W-1:0]  pm_got [int];
  int nwrites;

  always @(posedge clk) if (rst_n) begin
    if (wr_req.req && wr_gnt) begin
      for (int b = 0; b < NBANK; b++) if (wr_req.en[b]) begin
        for (int p = 0; p < NPE; p++) fm_got[{p[3:0], 2'(wr_req.mem), 3'(b), 16'(wr_req.addr[b])}] = wdata[p][b];
        nwrites++;
      end
    end
    if (pm_wr_en) pm_got[int'(pm_wr_addr)] = pm_wr_data;
  end

  function automatic int fmkey(int p, tdesc_t d, int y, int k);
    return {p[3:0], 2'(d.mem), row_bank(d, y), 16'(elem_addr(d, y, 0, k))};
  endfunction

  task automatic run_instr(instr_t i);
    fm_got.delete(); pm_got.delete(); nwrites = 0;
    @(negedge clk);
    instr = i; start = 1;
    @(negedge clk) start = 0;
    while (!done) @(negedge clk);
    repeat (2) @(negedge clk);
  endtask

  task automatic check(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 8) $display("%s: got %0d exp %0d", what, got, exp);
    end
  endtask

  // plain or format FM load; fch = 0 for plain
  task automatic fm_case(int region, int oh, int ow, int fch, int dmem);
    instr_t i;
    tdesc_t d;
    int base, rs;
    bit fmt;
    fmt = (fch >= 1 && fch <= 8);
    d = '0; d.mem = 2'(dmem); d.bank = 3'($urandom); d.addr = 16'(FM_DEPTH - 5); d.rowlen = 16'(ow + 2);
    d.cgs = 8'(1);
    rs = 64;
    i = '0; i.op = OP_LOAD; i.mode = (fch != 0) ? 4'b0010 : 4'b0000; i.fmt_ch = 4'(fch);
    i.region = 3'(region); i.ddr_off = 32'($urandom_range(0, 50)); i.ddr_rstride = 16'(rs);
    i.out_h = 8'(oh); i.out_w = 8'(ow); i.dst = d;
    base = int'(region_base[region]) + int'(i.ddr_off);
    run_instr(i);
    check(nwrites, oh * ow, "FM words written");
    for (int p = 0; p < NPE; p++) for (int y = 0; y < oh; y++) for (int k = 0; k < ow; k++) begin
      logic [VEC_W-1:0] e, g;
      int row0;
      row0 = base + p * int'(batch_stride) + y * rs;
      if (fmt) begin
        for (int c = 0; c < 8; c++) begin
          int bi;
          bi = k * fch + c;
          e[c*8 +: 8] = (c < fch) ? u_ddr.mem[row0 + bi / 8][(bi % 8)*8 +: 8] : 8'h00;
        end
      end else e = u_ddr.mem[row0 + k];
      checks++;
      if (!fm_got.exists(fmkey(p, d, y, k))) begin
        failures++;
        if (failures < 8) $display("pe%0d row %0d word %0d never written", p, y, k);
      end else begin
        g = fm_got[fmkey(p, d, y, k)];
        if (g != e) begin
          failures++;
          if (failures < 8) $display("pe%0d row %0d word %0d: got %h exp %h", p, y, k, g, e);
        end
      end
    end
  endtask

  task automatic pm_case(int oh, int ow);
    instr_t i;
    int base;
    i = '0; i.op = OP_LOAD; i.mode = 4'b0001; i.region = 3'(R_PARAM); i.ddr_off = 32'($urandom_range(0, 90));
    i.w_addr = 16'($urandom_range(0, PM_DEPTH - 40)); i.out_h = 8'(oh); i.out_w = 8'(ow);
    base = int'(region_base[R_PARAM]) + int'(i.ddr_off);
    run_instr(i);
    check(pm_got.size(), oh * ow, "PM words written");
    check(nwrites, 0, "FM words written by a PM load");
    for (int n = 0; n < oh * ow; n++) begin
      logic [PM_W-1:0] e;
      for (int j = 0; j < 8; j++) e[j*64 +: 64] = u_ddr.mem[base + n * 8 + j];
      checks++;
      if (!pm_got.exists(int'(i.w_addr) + n) || pm_got[int'(i.w_addr) + n] != e) begin
        failures++;
        if (failures < 8) $display("PM word %0d wrong", n);
      end
    end
  endtask

  initial begin
    start = 0; instr = '0;
    for (int r = 0; r < NREGION; r++) region_base[r] = DDR_AW'(r * 8192 + $urandom_range(0, 100));
    batch_stride = DDR_AW'(1000);
    for (int a = 0; a < 2**16; a++) u_ddr.mem[a] = {$urandom, $urandom};
    repeat (3) @(negedge clk);
    rst_n = 1;
    fm_case(R_INPUT, 3, 5, 0, 0);        // plain
    fm_case(R_SWAP, 2, 7, 3, 1);      // format, 3 channels
    fm_case(R_INPUT, 4, 6, 5, 2);        // format, 5 channels
    fm_case(R_INPUT, 2, 3, 8, 0);        // format, 8 channels
    fm_case(R_INPUT, 2, 4, 12, 1);       // more than 8 channels: bypass, plain copy
    pm_case(1, 5);
    pm_case(2, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
