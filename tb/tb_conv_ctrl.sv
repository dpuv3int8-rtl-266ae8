// tb_conv_ctrl: runs CONV instructions through conv_ctrl on one PE (FM,
// conv_array) with the FM arbiter and a parameter memory, and compares the
// output tile in the FM with a direct convolution computed here. Cases cover
// 1x1, 2x2, 3x3 and 5x3 kernels, strides 1, 2 and 4 (phase splitting),
// padding, partial tiles (out_h < 8), several input and output channel
// groups, ReLU, and tensors that wrap around the end of the memory. While
// the instruction runs, the testbench competes for the same memory's read
// port at random. The first case runs without competition and its cycle
// count is checked against 1 + per (column, group) (kh*kw*icg*phases + 3).
module tb_conv_ctrl;
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
  logic pm_rd_en, pm_wr_en;
  logic [PM_AW-1:0] pm_rd_addr, pm_wr_addr;
  logic [PM_W-1:0] pm_rd_data, pm_wr_data;
  logic c_clr, c_acc, c_relu;
  logic [NBANK-1:0] c_en;
  logic [NBANK-1:0][2:0] c_bank;
  logic [4:0] c_shift;
  logic [2:0] c_wrot;
  bit noise = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  conv_ctrl dut (
    .clk(clk), .rst_n(rst_n), .start(start), .instr(instr), .busy(busy), .done(done),
    .rd_req(rd_req[RQ_CONV]), .rd_gnt(rd_gnt[RQ_CONV]), .wr_req(wr_req[WQ_CONV]), .wr_gnt(wr_gnt[WQ_CONV]),
    .pm_rd_en(pm_rd_en), .pm_rd_addr(pm_rd_addr), .tok_clr(c_clr), .tok_acc(c_acc),
    .tok_lane_en(c_en), .tok_lane_bank(c_bank), .out_shift(c_shift), .out_relu(c_relu), .out_wrot(c_wrot));
  fm_arbiter u_arb (.*);
  param_mem u_pm (.clk(clk), .wr_en(pm_wr_en), .wr_addr(pm_wr_addr), .wr_data(pm_wr_data),
                  .rd_en(pm_rd_en), .rd_addr(pm_rd_addr), .rd_data(pm_rd_data));
  pe u_pe (
    .clk(clk), .rst_n(rst_n), .mem_rd(mem_rd), .mem_wr(mem_wr), .mem_wr_sel(mem_wr_sel), .rd_mem(rd_mem),
    .load_wdata(load_wdata), .conv_clr(c_clr), .conv_acc(c_acc), .conv_lane_en(c_en), .conv_lane_bank(c_bank),
    .conv_shift(c_shift), .conv_relu(c_relu), .conv_wrot(c_wrot), .pm_data(pm_rd_data),
    .misc_valid(1'b0), .misc_op(MO_INIT), .misc_lane_en('0), .misc_lane_bank('0), .misc_shift_a('0),
    .misc_shift_b('0), .misc_shift('0), .misc_relu(1'b0), .misc_wrot('0), .save_rdata(save_rdata));

  // competing reader on the MISC port
  always @(negedge clk) begin
    rd_req[RQ_MISC] <= '0;
    if (noise && $urandom_range(0, 2) == 0) begin
      rd_req[RQ_MISC].req <= 1'b1;
      rd_req[RQ_MISC].mem <= 2'd0;
      rd_req[RQ_MISC].en  <= '1;
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

  task automatic run_case(int kh, int kw, int sh, int sw, int pt, int pl, int ih, int iw,
                          int oh, int ow, int icg, int ocg, int shift, bit relu, bit timed);
    instr_t i;
    tdesc_t s, d;
    int x [16][16][4][8];
    int wt [4][15][15][4][8][8];
    int bs [4][8];
    longint t0, t1;
    logic [VEC_W-1:0] v;
    s = '0; d = '0;
    s.mem = 0; s.bank = 3'($urandom); s.addr = 16'(FM_DEPTH - 5); s.rowlen = 16'(iw * icg); s.cgs = 8'(icg);
    d.mem = 1; d.bank = 3'($urandom); d.addr = 16'($urandom_range(0, FM_DEPTH - 1)); d.rowlen = 16'(ow * ocg); d.cgs = 8'(ocg);
    for (int y = 0; y < ih; y++) for (int xx = 0; xx < iw; xx++) for (int g = 0; g < icg; g++) begin
      for (int c = 0; c < 8; c++) begin
        x[y][xx][g][c] = int'($urandom_range(0, 255)) - 128;
        v[c*8 +: 8] = 8'(x[y][xx][g][c]);
      end
      fm_write(0, int'(row_bank(s, y)), int'(elem_addr(s, y, xx, g)), v);
    end
    // parameters: weights at 0, bias at 1000
    for (int o = 0; o < ocg; o++) for (int l = 0; l < kh; l++) for (int m = 0; m < kw; m++)
      for (int g = 0; g < icg; g++) begin
        @(negedge clk);
        pm_wr_en = 1; pm_wr_addr = PM_AW'(((o*kh + l)*kw + m)*icg + g);
        for (int a = 0; a < 8; a++) for (int b = 0; b < 8; b++) begin
          wt[o][l][m][g][a][b] = int'($urandom_range(0, 63)) - 32;
          pm_wr_data[(a*8 + b)*8 +: 8] = 8'(wt[o][l][m][g][a][b]);
        end
      end
    for (int o = 0; o < ocg; o++) begin
      @(negedge clk);
      pm_wr_en = 1; pm_wr_addr = PM_AW'(1000 + o); pm_wr_data = '0;
      for (int a = 0; a < 8; a++) begin
        bs[o][a] = int'($urandom_range(0, 2000)) - 1000;
        pm_wr_data[a*32 +: 32] = 32'(bs[o][a]);
      end
    end
    @(negedge clk) pm_wr_en = 0;
    i = '0;
    i.op = OP_CONV; i.kh = 4'(kh); i.kw = 4'(kw); i.str_h = 4'(sh); i.str_w = 4'(sw); i.pad_t = 4'(pt); i.pad_l = 4'(pl);
    i.in_h = 8'(ih); i.in_w = 8'(iw); i.out_h = 8'(oh); i.out_w = 8'(ow); i.icg = 8'(icg); i.ocg = 8'(ocg);
    i.src = s; i.dst = d; i.w_addr = 0; i.b_addr = 1000; i.shift = 5'(shift); i.relu = relu;
    noise = !timed;
    @(negedge clk);
    instr = i; start = 1;
    t0 = $time / 10;
    @(negedge clk) start = 0;
    while (!done) @(negedge clk);
    t1 = $time / 10;
    noise = 0;
    if (timed) begin
      int steps;
      steps = kh * kw * icg * sh;
      checks++;
      if (t1 - t0 != 1 + ocg * ow * (steps + 3)) begin
        failures++;
        $display("cycles %0d exp %0d", t1 - t0, 1 + ocg * ow * (steps + 3));
      end
    end
    for (int r = 0; r < oh; r++) for (int xo = 0; xo < ow; xo++) for (int o = 0; o < ocg; o++) begin
      fm_read(1, int'(row_bank(d, r)), int'(elem_addr(d, r, xo, o)), v);
      for (int a = 0; a < 8; a++) begin
        longint acc;
        acc = bs[o][a];
        for (int l = 0; l < kh; l++) for (int m = 0; m < kw; m++) begin
          int yy, xx;
          yy = r * sh + l - pt; xx = xo * sw + m - pl;
          if (yy >= 0 && yy < ih && xx >= 0 && xx < iw)
            for (int g = 0; g < icg; g++) for (int b = 0; b < 8; b++) acc += wt[o][l][m][g][a][b] * x[yy][xx][g][b];
        end
        checks++;
        if ($signed(v[a*8 +: 8]) != rq(acc, shift, relu)) begin
          failures++;
          if (failures < 6) $display("k%0dx%0d s%0d r%0d x%0d o%0d.%0d: got %0d exp %0d", kh, kw, sh, r, xo, o, a,
                                     $signed(v[a*8 +: 8]), rq(acc, shift, relu));
        end
      end
    end
  endtask

  initial begin
    start = 0; instr = '0; rd_req[RQ_SAVE] = '0; wr_req = '0; load_wdata = '0;
    rd_req[RQ_CONV] = '0;
    pm_wr_en = 0; pm_wr_addr = '0; pm_wr_data = '0;
    wr_req[WQ_MISC] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_case(3, 3, 1, 1, 1, 1, 8, 5, 8, 5, 2, 2, 7, 1, 1);
    run_case(3, 3, 2, 2, 1, 1, 15, 7, 8, 4, 1, 1, 6, 0, 0);
    run_case(1, 1, 4, 1, 0, 0, 16, 3, 4, 3, 3, 1, 4, 1, 0);
    run_case(2, 2, 2, 2, 0, 0, 16, 8, 8, 4, 1, 3, 6, 1, 0);
    run_case(5, 3, 1, 1, 2, 1, 9, 4, 5, 4, 1, 2, 8, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (300000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
