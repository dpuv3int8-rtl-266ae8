// tb_pe: exercises one processing engine on its own. It writes random words
// to random banks and addresses of all three memories through the LOAD path
// and reads them back, with two readers taking data from different memories
// in the same cycle. It then runs the compute paths directly: a CONV step
// (bias load, one 8x8 multiply-accumulate per lane with a random lane-to-bank
// map, requantisation) and a MISC max over two reads, writes each result to a
// memory with a lane rotation and reads it back. Expected values come from a
// memory model and arithmetic written here.
module tb_pe;
  import dpu_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  fm_req_t [NMEM-1:0] mem_rd, mem_wr;
  logic [NMEM-1:0][1:0] mem_wr_sel;
  logic [NRQ-1:0][1:0] rd_mem;
  bankvec_t load_wdata, save_rdata;
  logic conv_clr, conv_acc, conv_relu, misc_valid, misc_relu;
  logic [NBANK-1:0] conv_lane_en, misc_lane_en;
  logic [NBANK-1:0][2:0] conv_lane_bank, misc_lane_bank;
  logic [4:0] conv_shift, misc_shift;
  logic [2:0] conv_wrot, misc_wrot;
  logic [PM_W-1:0] pm_data;
  misc_op_e misc_op;
  logic [3:0] misc_shift_a, misc_shift_b;

  pe dut (.*);

  logic [VEC_W-1:0] model [NMEM][NBANK][int];

  function automatic int rq(longint v, int sh, bit rl);
    longint r;
    r = (sh == 0) ? v : ((v + (longint'(1) << (sh - 1))) >>> sh);
    if (rl && r < 0) r = 0;
    return (r > 127) ? 127 : (r < -128) ? -128 : int'(r);
  endfunction

  task automatic idle();
    mem_rd = '0; mem_wr = '0; mem_wr_sel = '0;
    conv_clr = 0; conv_acc = 0; misc_valid = 0;
  endtask

  task automatic check_vec(logic [VEC_W-1:0] got, logic [VEC_W-1:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 8) $display("%s: got %h exp %h", what, got, exp);
    end
  endtask

  // read all banks of memory m at the given addresses through the SAVE reader
  task automatic read_mem(int m, logic [NBANK-1:0][FM_AW-1:0] a, output bankvec_t d);
    @(negedge clk);
    idle();
    mem_rd[m].req = 1; mem_rd[m].en = '1; mem_rd[m].addr = a;
    rd_mem[RQ_SAVE] = 2'(m);
    @(negedge clk);
    idle();
    d = save_rdata;
  endtask

  initial begin
    bankvec_t d;
    logic [NBANK-1:0][FM_AW-1:0] a;
    idle();
    rd_mem = '0; load_wdata = '0; conv_lane_en = '0; misc_lane_en = '0; conv_lane_bank = '0;
    misc_lane_bank = '0; conv_shift = '0; misc_shift = '0; conv_wrot = '0; misc_wrot = '0;
    conv_relu = 0; misc_relu = 0; pm_data = '0; misc_op = MO_INIT; misc_shift_a = '0; misc_shift_b = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;

    // 1. LOAD-path writes to random banks, reads back
    for (int n = 0; n < 300; n++) begin
      int m;
      m = $urandom_range(0, NMEM - 1);
      @(negedge clk);
      idle();
      mem_wr[m].req = 1; mem_wr_sel[m] = 2'(WQ_LOAD);
      for (int b = 0; b < NBANK; b++) begin
        mem_wr[m].en[b] = $urandom_range(0, 1);
        mem_wr[m].addr[b] = FM_AW'($urandom_range(0, 15));
        load_wdata[b] = {$urandom, $urandom};
        if (mem_wr[m].en[b]) model[m][b][int'(mem_wr[m].addr[b])] = load_wdata[b];
      end
    end
    for (int m = 0; m < NMEM; m++) for (int r = 0; r < 16; r++) begin
      for (int b = 0; b < NBANK; b++) a[b] = FM_AW'((r + b) % 16);
      read_mem(m, a, d);
      for (int b = 0; b < NBANK; b++)
        if (model[m][b].exists(int'(a[b]))) check_vec(d[b], model[m][b][int'(a[b])], "load/save word");
    end
    // two readers on two memories in one cycle
    for (int n = 0; n < 20; n++) begin
      int m0, m1;
      m0 = $urandom_range(0, 2); m1 = (m0 + 1) % 3;
      @(negedge clk);
      idle();
      for (int b = 0; b < NBANK; b++) a[b] = FM_AW'($urandom_range(0, 15));
      mem_rd[m0].req = 1; mem_rd[m0].en = '1; mem_rd[m0].addr = a;
      mem_rd[m1].req = 1; mem_rd[m1].en = '1; mem_rd[m1].addr = a;
      rd_mem[RQ_SAVE] = 2'(m1); rd_mem[RQ_CONV] = 2'(m0);
      @(negedge clk);
      idle();
      for (int b = 0; b < NBANK; b++) if (model[m1][b].exists(int'(a[b])))
        check_vec(save_rdata[b], model[m1][b][int'(a[b])], "parallel read");
    end

    // 2. CONV step: bias, one MAC per lane, write with rotation to memory 2
    for (int n = 0; n < 6; n++) begin
      logic signed [7:0] w [8][8];
      logic signed [31:0] bias [8];
      logic [2:0] lb [8];
      logic [NBANK-1:0] len;
      int rot, sh, src;
      bit rl;
      bankvec_t x;
      src = $urandom_range(0, 1);
      for (int b = 0; b < NBANK; b++) a[b] = FM_AW'($urandom_range(0, 15));
      read_mem(src, a, x);                          // the words the CONV read will see
      for (int o = 0; o < 8; o++) begin
        bias[o] = 32'($urandom_range(0, 4000)) - 32'd2000;
        for (int i = 0; i < 8; i++) w[o][i] = 8'($urandom);
      end
      for (int l = 0; l < 8; l++) lb[l] = 3'($urandom);
      len = 8'($urandom) | 8'h01;
      rot = $urandom_range(0, 7); sh = $urandom_range(0, 9); rl = 1'($urandom);
      @(negedge clk);
      idle();
      conv_clr = 1;
      for (int o = 0; o < 8; o++) pm_data[o*32 +: 32] = bias[o];
      mem_rd[src].req = 1; mem_rd[src].en = '1; mem_rd[src].addr = a; rd_mem[RQ_CONV] = 2'(src);
      @(negedge clk);
      idle();
      conv_acc = 1; conv_lane_en = len;
      for (int l = 0; l < 8; l++) conv_lane_bank[l] = lb[l];
      for (int o = 0; o < 8; o++) for (int i = 0; i < 8; i++) pm_data[(o*8 + i)*8 +: 8] = w[o][i];
      @(negedge clk);
      idle();
      conv_shift = 5'(sh); conv_relu = rl; conv_wrot = 3'(rot);
      mem_wr[2].req = 1; mem_wr[2].en = '1; mem_wr[2].addr = '0; mem_wr_sel[2] = 2'(WQ_CONV);
      @(negedge clk);
      idle();
      for (int b = 0; b < NBANK; b++) a[b] = '0;
      read_mem(2, a, d);
      for (int b = 0; b < NBANK; b++) begin
        logic [VEC_W-1:0] e;
        int l;
        l = (b - rot + 8) % 8;
        for (int o = 0; o < 8; o++) begin
          longint acc;
          acc = bias[o];
          if (len[l]) for (int i = 0; i < 8; i++) acc += longint'(w[o][i]) * longint'($signed(x[lb[l]][i*8 +: 8]));
          e[o*8 +: 8] = 8'(rq(acc, sh, rl));
        end
        check_vec(d[b], e, "conv result");
      end
    end

    // 3. MISC max over two reads, written with rotation to memory 0
    for (int n = 0; n < 6; n++) begin
      bankvec_t x0, x1;
      logic [NBANK-1:0][FM_AW-1:0] a0, a1;
      int rot;
      for (int b = 0; b < NBANK; b++) begin a0[b] = FM_AW'($urandom_range(0, 15)); a1[b] = FM_AW'($urandom_range(0, 15)); end
      read_mem(1, a0, x0);
      read_mem(2, a1, x1);
      rot = $urandom_range(0, 7);
      @(negedge clk);
      idle();
      misc_valid = 1; misc_op = MO_INIT;
      mem_rd[1].req = 1; mem_rd[1].en = '1; mem_rd[1].addr = a0; rd_mem[RQ_MISC] = 2'd1;
      @(negedge clk);
      idle();
      misc_valid = 1; misc_op = MO_MAX; misc_lane_en = '1;
      for (int l = 0; l < 8; l++) misc_lane_bank[l] = 3'(l);
      mem_rd[2].req = 1; mem_rd[2].en = '1; mem_rd[2].addr = a1;
      @(negedge clk);
      idle();
      rd_mem[RQ_MISC] = 2'd2;
      misc_valid = 1; misc_op = MO_MAX;
      @(negedge clk);
      idle();
      misc_shift = '0; misc_relu = 0; misc_wrot = 3'(rot);
      mem_wr[0].req = 1; mem_wr[0].en = '1; mem_wr[0].addr = '{default: FM_AW'(100)}; mem_wr_sel[0] = 2'(WQ_MISC);
      @(negedge clk);
      idle();
      read_mem(0, '{default: FM_AW'(100)}, d);
      for (int b = 0; b < NBANK; b++) begin
        logic [VEC_W-1:0] e;
        int l;
        l = (b - rot + 8) % 8;
        for (int c = 0; c < 8; c++) begin
          logic signed [7:0] p, q;
          p = x0[l][c*8 +: 8]; q = x1[l][c*8 +: 8];
          e[c*8 +: 8] = (p > q) ? p : q;
        end
        check_vec(d[b], e, "max result");
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
