// tb_misc_ctrl: runs MISC instructions through misc_ctrl on one PE (FM,
// misc_alu) with the FM arbiter, and compares the output tile in the FM with
// results computed here: max pool 2x2/2 and 3x3/2 with padding, element-wise
// addition with operand shifts, rounding and ReLU, and data movement
// (2x up-sample, 2x down-sample, and a column shuffle that writes every
// second column). Tensors wrap around the end of the memory, and the
// testbench competes for the read port at random. The first case runs
// without competition and its cycle count is checked against
// 1 + per (column, group) (kh*kw*phases + 3).
module tb_misc_ctrl;
  import dpu_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start, busy, done;
  instr_t instr;
  fm_req_t [NRQ-1:0] rd_req;
  logic [NRQ-1:0] rd_gnt, rd_valid;
  fm_req_t [NWQ-1:0] wr_req;
  logic [NWQ-1:0] wr_gnt;
  fm_req_t [NMEM-1:0] mem_rd, mem_wr;
  logic [NMEM-1:0][1:0] mem_wr_sel;
  logic [NRQ-1:0][1:0] rd_mem;
  bankvec_t load_wdata, save_rdata;
  logic m_valid, m_relu;
  misc_op_e m_op;
  logic [NBANK-1:0] m_en;
  logic [NBANK-1:0][2:0] m_bank;
  logic [3:0] m_sa, m_sb;
  logic [4:0] m_shift;
  logic [2:0] m_wrot;
  bit noise = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  misc_ctrl dut (
    .clk(clk), .rst_n(rst_n), .start(start), .instr(instr), .busy(busy), .done(done),
    .rd_req(rd_req[RQ_MISC]), .rd_gnt(rd_gnt[RQ_MISC]), .wr_req(wr_req[WQ_MISC]), .wr_gnt(wr_gnt[WQ_MISC]),
    .tok_valid(m_valid), .tok_op(m_op), .tok_lane_en(m_en), .tok_lane_bank(m_bank),
    .out_shift_a(m_sa), .out_shift_b(m_sb), .out_shift(m_shift), .out_relu(m_relu), .out_wrot(m_wrot));
  fm_arbiter u_arb (.*);
  pe u_pe (
    .clk(clk), .rst_n(rst_n), .mem_rd(mem_rd), .mem_wr(mem_wr), .mem_wr_sel(mem_wr_sel), .rd_mem(rd_mem),
    .load_wdata(load_wdata), .conv_clr(1'b0), .conv_acc(1'b0), .conv_lane_en('0), .conv_lane_bank('0),
    .conv_shift('0), .conv_relu(1'b0), .conv_wrot('0), .pm_data('0),
    .misc_valid(m_valid), .misc_op(m_op), .misc_lane_en(m_en), .misc_lane_bank(m_bank), .misc_shift_a(m_sa),
    .misc_shift_b(m_sb), .misc_shift(m_shift), .misc_relu(m_relu), .misc_wrot(m_wrot), .save_rdata(save_rdata));

  // competing reader on the MISC port
  always @(negedge clk) begin
    rd_req[RQ_CONV] <= '0;
    if (noise && $urandom_range(0, 2) == 0) begin
      rd_req[RQ_CONV].req <= 1'b1;
      rd_req[RQ_CONV].mem <= 2'd0;
      rd_req[RQ_CONV].en  <= '1;
    end
  end

  task automatic fm_write(int m, int bank, int addr, logic [VEC_W-1:0] v);
    @(negedge clk);
    wr_req[WQ_LOAD] = '0;
    wr_req[WQ_LOAD].req = 1; wr_req[WQ_LOAD].mem = 2'(m);
    wr_req[WQ_LOAD].en[bank] = 1; wr_req[WQ_LOAD].addr[bank] = FM_AW'(addr);
    load_wdata = '0;
    load_wdata[bank] = v;
    #1;
    while (!wr_gnt[WQ_LOAD]) begin @(negedge clk); #1; end
    @(negedge clk);
    wr_req[WQ_LOAD] = '0;
  endtask

  task automatic fm_read(int m, int bank, int addr, output logic [VEC_W-1:0] v);
    @(negedge clk);
    rd_req[RQ_SAVE] = '0;
    rd_req[RQ_SAVE].req = 1; rd_req[RQ_SAVE].mem = 2'(m);
    rd_req[RQ_SAVE].en[bank] = 1; rd_req[RQ_SAVE].addr[bank] = FM_AW'(addr);
    #1;
    while (!rd_gnt[RQ_SAVE]) begin @(negedge clk); #1; end
    @(negedge clk);
    rd_req[RQ_SAVE] = '0;
    v = save_rdata[bank];
  endtask

  function automatic int rq(longint v, int sh, bit rl);
    longint r;
    r = (sh == 0) ? v : ((v + (longint'(1) << (sh - 1))) >>> sh);
    if (rl && r < 0) r = 0;
    return (r > 127) ? 127 : (r < -128) ? -128 : int'(r);
  endfunction

  // mode 0 max pool, 1 element-wise, 2 copy
  task automatic run_case(int mode, int kh, int kw, int sh, int sw, int pt, int pl, int ih, int iw,
                          int oh, int ow, int cg, int up, int ocs, int oco, int sa, int sb, int shift,
                          bit relu, bit timed);
    instr_t i;
    tdesc_t s, s2, d;
    int x [16][16][4][8];
    int z [16][16][4][8];
    longint t0, t1;
    logic [VEC_W-1:0] v, v2;
    int dw;
    s = '0; s2 = '0; d = '0;
    dw = (mode == 2) ? ow * ocs + oco : ow;
    s.mem = 0; s.bank = 3'($urandom); s.addr = 16'(FM_DEPTH - 7); s.rowlen = 16'(iw * cg); s.cgs = 8'(cg);
    s2.mem = 2; s2.bank = 3'($urandom); s2.addr = 16'($urandom_range(0, 99)); s2.rowlen = 16'(iw * cg); s2.cgs = 8'(cg);
    d.mem = 1; d.bank = 3'($urandom); d.addr = 16'(FM_DEPTH - 3); d.rowlen = 16'(dw * cg); d.cgs = 8'(cg);
    for (int y = 0; y < ih; y++) for (int xx = 0; xx < iw; xx++) for (int g = 0; g < cg; g++) begin
      for (int c = 0; c < 8; c++) begin
        x[y][xx][g][c] = int'($urandom_range(0, 255)) - 128;
        z[y][xx][g][c] = int'($urandom_range(0, 255)) - 128;
        v[c*8 +: 8] = 8'(x[y][xx][g][c]);
        v2[c*8 +: 8] = 8'(z[y][xx][g][c]);
      end
      fm_write(0, int'(row_bank(s, y)), int'(elem_addr(s, y, xx, g)), v);
      if (mode == 1) fm_write(2, int'(row_bank(s2, y)), int'(elem_addr(s2, y, xx, g)), v2);
    end
    // mark the destination so that words that must not be written can be checked
    for (int r = 0; r < oh; r++) for (int xo = 0; xo < dw; xo++) for (int g = 0; g < cg; g++)
      fm_write(1, int'(row_bank(d, r)), int'(elem_addr(d, r, xo, g)), 64'h5a5a5a5a5a5a5a5a);
    i = '0;
    i.op = OP_MISC; i.mode = 4'(mode); i.kh = 4'(kh); i.kw = 4'(kw); i.str_h = 4'(sh); i.str_w = 4'(sw);
    i.pad_t = 4'(pt); i.pad_l = 4'(pl); i.in_h = 8'(ih); i.in_w = 8'(iw); i.out_h = 8'(oh); i.out_w = 8'(ow);
    i.icg = 8'(cg); i.up = 4'(up); i.ocs = 4'(ocs); i.oco = 4'(oco); i.shift_a = 4'(sa); i.shift_b = 4'(sb);
    i.shift = 5'(shift); i.relu = relu; i.src = s; i.src2 = s2; i.dst = d;
    noise = !timed;
    @(negedge clk);
    instr = i; start = 1;
    t0 = $time / 10;
    @(negedge clk) start = 0;
    while (!done) @(negedge clk);
    t1 = $time / 10;
    noise = 0;
    if (timed) begin
      checks++;
      if (t1 - t0 != 1 + cg * ow * (kh * kw * sh + 3)) begin
        failures++;
        $display("cycles %0d exp %0d", t1 - t0, 1 + cg * ow * (kh * kw * sh + 3));
      end
    end
    for (int r = 0; r < oh; r++) for (int xo = 0; xo < dw; xo++) for (int g = 0; g < cg; g++) begin
      bit written;
      int xi;
      fm_read(1, int'(row_bank(d, r)), int'(elem_addr(d, r, xo, g)), v);
      written = (mode != 2) || (xo >= oco && (xo - oco) % ocs == 0);
      xi = (mode == 2) ? (xo - oco) / ocs : xo;
      for (int c = 0; c < 8; c++) begin
        int e;
        if (!written) e = 8'h5a;
        else if (mode == 0) begin
          e = -128;
          for (int l = 0; l < kh; l++) for (int m = 0; m < kw; m++) begin
            int yy, xx;
            yy = r * sh + l - pt; xx = xi * sw + m - pl;
            if (yy >= 0 && yy < ih && xx >= 0 && xx < iw && x[yy][xx][g][c] > e) e = x[yy][xx][g][c];
          end
        end else if (mode == 1) e = rq((longint'(x[r][xi][g][c]) <<< sa) + (longint'(z[r][xi][g][c]) <<< sb), shift, relu);
        else e = x[(r / up) * sh][(xi / up) * sw][g][c];
        checks++;
        if ($signed(v[c*8 +: 8]) != e) begin
          failures++;
          if (failures < 6) $display("mode %0d r%0d x%0d g%0d c%0d: got %0d exp %0d", mode, r, xo, g, c,
                                     $signed(v[c*8 +: 8]), e);
        end
      end
    end
  endtask

  initial begin
    start = 0; instr = '0; rd_req[RQ_SAVE] = '0; wr_req = '0; load_wdata = '0;
    rd_req[RQ_MISC] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    //       mode kh kw sh sw pt pl ih iw oh ow cg up ocs oco sa sb sh relu timed
    run_case(0,   2, 2, 2, 2, 0, 0, 16, 8, 8, 4, 2, 1, 1, 0, 0, 0, 0, 0, 1);
    run_case(0,   3, 3, 2, 2, 1, 1, 15, 9, 8, 5, 1, 1, 1, 0, 0, 0, 0, 0, 0);
    run_case(1,   1, 1, 1, 1, 0, 0, 8, 6, 8, 6, 2, 1, 1, 0, 1, 0, 1, 0, 0);
    run_case(1,   1, 1, 1, 1, 0, 0, 6, 5, 6, 5, 1, 1, 1, 0, 2, 1, 2, 1, 0);
    run_case(2,   1, 1, 1, 1, 0, 0, 4, 4, 8, 8, 2, 2, 1, 0, 0, 0, 0, 0, 0);
    run_case(2,   1, 1, 2, 2, 0, 0, 16, 8, 8, 4, 1, 1, 1, 0, 0, 0, 0, 0, 0);
    run_case(2,   1, 1, 1, 1, 0, 0, 7, 5, 7, 5, 1, 1, 2, 1, 0, 0, 0, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (300000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
