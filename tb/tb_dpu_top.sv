// tb_dpu_top: end-to-end test of the whole engine at its default size.
//
// Builds a small network program in DDR and runs it on four different images,
// one per PE, then compares everything written back to DDR with a reference
// computed here in plain integer arithmetic:
//   image 16x8x3 (dense RGB bytes, loaded through the format units)
//   -> conv 3x3 pad 1 + bias + ReLU, 16 channels, in two 8-row tiles
//   -> max pool 2x2 stride 2 per tile (fused conv + pool pipeline)
//   -> element-wise add with a second loaded tensor (residual)
//   -> conv 1x1 stride 2 (16 -> 8 channels)          -> saved
//   -> 2x up-sample by data movement (two tiles)     -> saved
// The program uses DPON / DPBY so that loads, convolutions, MISC operations
// and saves overlap, and contains a no-operation on the SAVE queue. The
// residual tensor is placed across the end of an FM memory so it wraps
// around. The test counts how often each mechanism happened and fails if one
// never did: dependency stalls, units running in parallel, FM port conflicts,
// DDR back-pressure, format-unit use and bypass, strided phase splitting,
// padding, circular wrap, parameter loads and the no-operation.
module tb_dpu_top;
  import dpu_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [NREGION-1:0][DDR_AW-1:0] region_base;
  logic [DDR_AW-1:0] batch_stride;
  logic busy, done;
  ddr_req_t ddr_req;
  logic     ddr_ready;
  ddr_rsp_t ddr_rsp;
  logic [NUNIT-1:0] unit_busy, dep_wait;

  always #5 clk = ~clk;

  dpu_top dut (.*);
  ddr_model #(.AW(18), .LAT(4), .STALL(1'b1)) ddr (
    .clk(clk), .rst_n(rst_n), .req(ddr_req), .ready(ddr_ready), .rsp(ddr_rsp));

  localparam int IN_B = 'h1000, OUT_B = 'h8000, PAR_B = 'h10000, INS_B = 'h20000, SWP_B = 'h30000;
  localparam int BS = 'h800;
  localparam int H = 16, W = 8, C1 = 16, H2 = 8, W2 = 4, H3 = 4, W3 = 2, C3 = 8;
  localparam int SH1 = 6, SA = 1, SB = 0, SHE = 1, SH2 = 5;

  int checks = 0, failures = 0;
  longint cycles = 0;

  // ---------------------------------------------------------------- data
  int img  [NPE][H][W][8];
  int w1   [C1][3][3][8];
  int b1   [C1];
  int z    [NPE][H2][W2][C1];
  int w2   [C3][C1];
  int b2   [C3];
  int c1   [NPE][H][W][C1];
  int pl   [NPE][H2][W2][C1];
  int el   [NPE][H2][W2][C1];
  int c2   [NPE][H3][W3][C3];

  function automatic int rq(longint v, int sh, bit relu);
    longint r;
    r = (sh == 0) ? v : ((v + (longint'(1) << (sh - 1))) >>> sh);
    if (relu && r < 0) r = 0;
    if (r > 127) r = 127;
    if (r < -128) r = -128;
    return int'(r);
  endfunction

  function automatic int rnd(int lo, int hi);
    return lo + int'($urandom_range(0, hi - lo));
  endfunction

  function automatic tdesc_t td(int mem, int bank, int addr, int rowlen, int cgs);
    tdesc_t d;
    d.mem = 2'(mem); d.bank = 3'(bank); d.addr = 16'(addr); d.rowlen = 16'(rowlen); d.cgs = 8'(cgs);
    return d;
  endfunction

  function automatic instr_t mk(opcode_e op, logic [3:0] dpon, logic [3:0] dpby);
    instr_t i;
    i = '0;
    i.op = op; i.dpon = dpon; i.dpby = dpby;
    i.kh = 1; i.kw = 1; i.str_h = 1; i.str_w = 1; i.up = 1; i.ocs = 1; i.icg = 1; i.ocg = 1;
    return i;
  endfunction

  int n_ins = 0;
  task automatic put(instr_t i);
    for (int w = 0; w < INSTR_WORDS; w++) ddr.mem[INS_B + n_ins * INSTR_WORDS + w] = i[w*DDR_W +: DDR_W];
    n_ins++;
  endtask

  localparam logic [3:0] L = 4'b0001, S = 4'b0010, CV = 4'b0100, M = 4'b1000;

  task automatic build();
    instr_t i;
    logic [PM_W-1:0] pw;
    // ----- data into DDR
    for (int p = 0; p < NPE; p++) begin
      for (int y = 0; y < H; y++) begin
        logic [3*64-1:0] row;
        row = '0;
        for (int x = 0; x < W; x++)
          for (int c = 0; c < 8; c++) begin
            img[p][y][x][c] = (c < 3) ? rnd(-60, 60) : 0;
            if (c < 3) row[(x*3 + c)*8 +: 8] = 8'(img[p][y][x][c]);
          end
        for (int k = 0; k < 3; k++) ddr.mem[IN_B + p*BS + y*3 + k] = row[k*64 +: 64];
      end
      for (int y = 0; y < H2; y++)
        for (int x = 0; x < W2; x++)
          for (int g = 0; g < 2; g++) begin
            logic [63:0] wd;
            for (int c = 0; c < 8; c++) begin
              z[p][y][x][g*8+c] = rnd(-128, 127);
              wd[c*8 +: 8] = 8'(z[p][y][x][g*8+c]);
            end
            ddr.mem[IN_B + p*BS + 'h100 + y*8 + x*2 + g] = wd;
          end
    end
    for (int o = 0; o < C1; o++) begin
      b1[o] = rnd(-300, 300);
      for (int l = 0; l < 3; l++) for (int m = 0; m < 3; m++) for (int c = 0; c < 8; c++)
        w1[o][l][m][c] = rnd(-16, 15);
    end
    for (int o = 0; o < C3; o++) begin
      b2[o] = rnd(-500, 500);
      for (int c = 0; c < C1; c++) w2[o][c] = rnd(-20, 20);
    end
    // PM image: w1 at 0, b1 at 32, w2 at 40, b2 at 48
    for (int j = 0; j < 64; j++) begin
      pw = '0;
      if (j < 18) begin
        int og, l, m;
        og = j / 9; l = (j / 3) % 3; m = j % 3;
        for (int o = 0; o < 8; o++) for (int c = 0; c < 8; c++)
          pw[(o*8 + c)*8 +: 8] = 8'(w1[og*8 + o][l][m][c]);
      end else if (j == 32 || j == 33) begin
        for (int o = 0; o < 8; o++) pw[o*32 +: 32] = 32'(b1[(j-32)*8 + o]);
      end else if (j == 40 || j == 41) begin
        for (int o = 0; o < 8; o++) for (int c = 0; c < 8; c++)
          pw[(o*8 + c)*8 +: 8] = 8'(w2[o][(j-40)*8 + c]);
      end else if (j == 48) begin
        for (int o = 0; o < 8; o++) pw[o*32 +: 32] = 32'(b2[o]);
      end
      for (int q = 0; q < 8; q++) ddr.mem[PAR_B + j*8 + q] = pw[q*64 +: 64];
    end

    // ----- program
    // I0: parameters to the PM
    i = mk(OP_LOAD, 0, 0); i.mode = 4'b0001; i.region = R_PARAM; i.out_h = 1; i.out_w = 64; i.w_addr = 0;
    put(i);
    // I1: image through the format units, FM0
    i = mk(OP_LOAD, 0, CV); i.mode = 4'b0010; i.fmt_ch = 3; i.region = R_INPUT; i.ddr_off = 0;
    i.ddr_rstride = 3; i.out_h = H; i.out_w = W; i.dst = td(0, 0, 0, 8, 1);
    put(i);
    // I2: residual operand, plain (format bypassed: 16 channels), FM0 @512
    i = mk(OP_LOAD, 0, M); i.mode = 4'b0010; i.fmt_ch = 4'd15; i.region = R_INPUT; i.ddr_off = 'h100;
    i.ddr_rstride = 8; i.out_h = H2; i.out_w = 8; i.dst = td(0, 0, 512, 8, 2);
    put(i);
    // I3, I4: conv 3x3 pad 1, two 8-row tiles, FM0 -> FM1
    for (int t = 0; t < 2; t++) begin
      i = mk(OP_CONV, t == 0 ? L : 4'b0, M);
      i.kh = 3; i.kw = 3; i.pad_l = 1; i.pad_t = (t == 0) ? 1 : 0;
      i.in_h = 9; i.in_w = W; i.out_h = 8; i.out_w = W; i.icg = 1; i.ocg = 2;
      i.src = (t == 0) ? td(0, 0, 0, 8, 1) : td(0, 7, 0, 8, 1);
      i.dst = td(1, 0, 16*t, 16, 2);
      i.w_addr = 0; i.b_addr = 32; i.shift = 5'(SH1); i.relu = 1;
      put(i);
    end
    // I5, I6: max pool 2x2 s2 per tile, FM1 -> FM2
    for (int t = 0; t < 2; t++) begin
      i = mk(OP_MISC, t == 0 ? CV : (CV | L), 0); i.mode = 4'(MISC_MAXPOOL);
      i.kh = 2; i.kw = 2; i.str_h = 2; i.str_w = 2; i.in_h = 8; i.in_w = W; i.out_h = 4; i.out_w = W2; i.icg = 2;
      i.src = td(1, 0, 16*t, 16, 2); i.dst = td(2, 4*t, 0, 8, 2);
      put(i);
    end
    // I7: residual add, FM2 + FM0 -> FM1 placed across the end of the memory
    i = mk(OP_MISC, 0, CV | S); i.mode = 4'(MISC_ELTADD); i.in_h = H2; i.in_w = W2; i.out_h = H2; i.out_w = W2;
    i.icg = 2; i.src = td(2, 0, 0, 8, 2); i.src2 = td(0, 0, 512, 8, 2); i.dst = td(1, 0, FM_DEPTH - 4, 8, 2);
    i.shift_a = SA; i.shift_b = SB; i.shift = SHE;
    put(i);
    // I8: conv 1x1 stride 2, FM1 -> FM2 @256
    i = mk(OP_CONV, M, S); i.kh = 1; i.kw = 1; i.str_h = 2; i.str_w = 2; i.in_h = H2; i.in_w = W2;
    i.out_h = H3; i.out_w = W3; i.icg = 2; i.ocg = 1; i.src = td(1, 0, FM_DEPTH - 4, 8, 2);
    i.dst = td(2, 0, 256, 2, 1); i.w_addr = 40; i.b_addr = 48; i.shift = SH2; i.relu = 1;
    put(i);
    // I9: no-operation on the SAVE queue, takes the MISC token of I7
    i = mk(OP_SAVE, M, 0); i.nop = 1;
    put(i);
    // I10, I11: 2x up-sample, FM1 -> FM0 @1024, two tiles of 8 output rows
    for (int t = 0; t < 2; t++) begin
      i = mk(OP_MISC, 0, t == 1 ? S : 4'b0); i.mode = 4'(MISC_COPY); i.up = 2;
      i.in_h = 4; i.in_w = W2; i.out_h = 8; i.out_w = W; i.icg = 2;
      i.src = td(1, 4*t, FM_DEPTH - 4, 8, 2); i.dst = td(0, 0, 1024 + 16*t, 16, 2);
      put(i);
    end
    // I12: save the up-sampled tensor, I13: save the conv 1x1 result
    i = mk(OP_SAVE, M, 0); i.region = R_OUTPUT; i.ddr_off = 0; i.ddr_rstride = 16;
    i.out_h = H; i.out_w = 16; i.src = td(0, 0, 1024, 16, 2);
    put(i);
    i = mk(OP_SAVE, CV, 0); i.region = R_OUTPUT; i.ddr_off = 'h200; i.ddr_rstride = 2;
    i.out_h = H3; i.out_w = 2; i.src = td(2, 0, 256, 2, 1);
    put(i);
    put(mk(OP_END, 0, 0));
  endtask

  task automatic reference();
    for (int p = 0; p < NPE; p++) begin
      for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) for (int o = 0; o < C1; o++) begin
        longint s;
        s = b1[o];
        for (int l = 0; l < 3; l++) for (int m = 0; m < 3; m++) begin
          int yy, xx;
          yy = y + l - 1; xx = x + m - 1;
          if (yy >= 0 && yy < H && xx >= 0 && xx < W)
            for (int c = 0; c < 8; c++) s += w1[o][l][m][c] * img[p][yy][xx][c];
        end
        c1[p][y][x][o] = rq(s, SH1, 1);
      end
      for (int y = 0; y < H2; y++) for (int x = 0; x < W2; x++) for (int o = 0; o < C1; o++) begin
        int mx;
        mx = -128;
        for (int l = 0; l < 2; l++) for (int m = 0; m < 2; m++)
          if (c1[p][2*y+l][2*x+m][o] > mx) mx = c1[p][2*y+l][2*x+m][o];
        pl[p][y][x][o] = mx;
        el[p][y][x][o] = rq((pl[p][y][x][o] <<< SA) + (z[p][y][x][o] <<< SB), SHE, 0);
      end
      for (int y = 0; y < H3; y++) for (int x = 0; x < W3; x++) for (int o = 0; o < C3; o++) begin
        longint s;
        s = b2[o];
        for (int c = 0; c < C1; c++) s += w2[o][c] * el[p][2*y][2*x][c];
        c2[p][y][x][o] = rq(s, SH2, 1);
      end
    end
  endtask

  task automatic compare();
    for (int p = 0; p < NPE; p++) begin
      for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) for (int g = 0; g < 2; g++) begin
        logic [63:0] wd;
        wd = ddr.mem[OUT_B + p*BS + y*16 + x*2 + g];
        for (int c = 0; c < 8; c++) begin
          checks++;
          if ($signed(wd[c*8 +: 8]) != el[p][y/2][x/2][g*8+c]) begin
            failures++;
            if (failures < 10) $display("up mismatch p%0d y%0d x%0d c%0d: got %0d exp %0d", p, y, x, g*8+c,
                                        $signed(wd[c*8 +: 8]), el[p][y/2][x/2][g*8+c]);
          end
        end
      end
      for (int y = 0; y < H3; y++) for (int x = 0; x < W3; x++) begin
        logic [63:0] wd;
        wd = ddr.mem[OUT_B + p*BS + 'h200 + y*2 + x];
        for (int o = 0; o < C3; o++) begin
          checks++;
          if ($signed(wd[o*8 +: 8]) != c2[p][y][x][o]) begin
            failures++;
            if (failures < 10) $display("conv2 mismatch p%0d y%0d x%0d o%0d: got %0d exp %0d", p, y, x, o,
                                        $signed(wd[o*8 +: 8]), c2[p][y][x][o]);
          end
        end
      end
    end
  endtask

  // ---------------------------------------------------------------- events
  int n_dep_stall = 0, n_parallel = 0, n_fm_conflict = 0, n_ddr_bp = 0, n_fmt_push = 0;
  int n_bypass = 0, n_phase = 0, n_pad = 0, n_wrap = 0, n_pm_wr = 0, n_nop = 0;

  always @(posedge clk) if (rst_n) begin
    cycles++;
    if (dep_wait != 0) n_dep_stall++;
    if ($countones(unit_busy) >= 2) n_parallel++;
    if ((dut.rd_req[0].req && !dut.rd_gnt[0]) || (dut.rd_req[1].req && !dut.rd_gnt[1]) ||
        (dut.rd_req[2].req && !dut.rd_gnt[2]) || (dut.wr_req[0].req && !dut.wr_gnt[0]) ||
        (dut.wr_req[1].req && !dut.wr_gnt[1]) || (dut.wr_req[2].req && !dut.wr_gnt[2])) n_fm_conflict++;
    if (ddr_req.valid && !ddr_ready) n_ddr_bp++;
    if (dut.u_load.f_push) n_fmt_push++;
    if (dut.unit_start[U_LOAD] && !dut.unit_instr[U_LOAD].mode[0] && dut.unit_instr[U_LOAD].mode[1] &&
        dut.unit_instr[U_LOAD].fmt_ch > 8) n_bypass++;
    if ((dut.u_misc.state == 3'd2 && dut.u_misc.ph != 0) || (dut.u_conv.state == 3'd2 && dut.u_conv.ph != 0)) n_phase++;
    if (dut.c_acc && dut.c_lane_en != 8'hff) n_pad++;
    if (dut.mem_wr[1].req && dut.mem_wr[1].addr[0] < 11'd8 && dut.mem_wr_sel[1] == 2'(WQ_MISC)) n_wrap++;
    if (dut.pm_wr_en) n_pm_wr++;
    if (dut.u_disp.issue != 0 && (dut.u_disp.issue & dut.u_disp.h_nop) != 0) n_nop++;
  end

  task automatic need(string what, int n);
    checks++;
    $display("  %-28s %0d", what, n);
    if (n == 0) begin
      failures++;
      $display("mechanism never happened: %s", what);
    end
  endtask

  initial begin
    region_base[R_INPUT]  = IN_B;
    region_base[R_OUTPUT] = OUT_B;
    region_base[R_PARAM]  = PAR_B;
    region_base[R_INSTR]  = INS_B;
    region_base[R_SWAP]   = SWP_B;
    batch_stride = BS;
    for (int a = 0; a < 2**18; a++) ddr.mem[a] = '0;
    build();
    reference();
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    wait (done);
    @(posedge clk);
    $display("program of %0d instructions finished after %0d cycles", n_ins, cycles);
    compare();
    need("dependency stalls", n_dep_stall);
    need("cycles with >=2 units busy", n_parallel);
    need("FM port conflicts", n_fm_conflict);
    need("DDR back-pressure", n_ddr_bp);
    need("format unit pushes", n_fmt_push);
    need("format bypass (>8 channels)", n_bypass);
    need("stride phase steps", n_phase);
    need("padded lane steps", n_pad);
    need("circular wrap writes", n_wrap);
    need("PM writes", n_pm_wr);
    need("no-operations", n_nop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog: engine did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
