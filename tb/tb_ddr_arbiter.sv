// tb_ddr_arbiter: three clients issue random reads and writes to a DDR model
// with random back-pressure and latency. Checks that every client's reads
// come back to that client only, in order and with the data of the right
// address, that writes reach memory, and that a waiting client is served
// within NCLI accepted requests.
module tb_ddr_arbiter;
  import dpu_pkg::*;
  logic clk = 0, rst_n = 0;
  ddr_req_t [2:0] cli_req;
  logic [2:0] cli_ready, cli_rvalid;
  logic [DDR_W-1:0] cli_rdata;
  ddr_req_t ddr_req;
  logic ddr_ready;
  ddr_rsp_t ddr_rsp;
  int checks = 0, failures = 0;
  logic [DDR_W-1:0] expq [3][$];
  int served [3], waitn [3];
  bit accepted [3] = '{0, 0, 0};
  always #5 clk = ~clk;
  ddr_arbiter dut (.*);
  ddr_model #(.AW(10), .LAT(3), .STALL(1'b1)) ddr (.clk(clk), .rst_n(rst_n), .req(ddr_req), .ready(ddr_ready), .rsp(ddr_rsp));

  initial begin
    cli_req = '0;
    for (int a = 0; a < 1024; a++) ddr.mem[a] = {32'(a), 32'(a * 7)};
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      for (int c = 0; c < 3; c++) if (accepted[c]) cli_req[c].valid = 0;
      for (int c = 0; c < 3; c++) if (!cli_req[c].valid && $urandom_range(0, 1)) begin
        cli_req[c].valid = 1;
        cli_req[c].we    = (c == 2) && $urandom_range(0, 1);
        cli_req[c].id    = 2'($urandom);   // arbiter must overwrite it
        cli_req[c].addr  = 32'($urandom_range(0, 255) + c * 256);
        cli_req[c].wdata = {$urandom, $urandom};
      end
      #1;
      checks++;
      if ($countones(cli_ready) > 1) failures++;
      for (int c = 0; c < 3; c++) begin
        if (cli_rvalid[c]) begin
          checks++;
          if (expq[c].size() == 0 || cli_rdata != expq[c][0]) begin
            failures++;
            if (failures < 5) $display("client %0d wrong read data", c);
          end
          if (expq[c].size() != 0) void'(expq[c].pop_front());
        end
        accepted[c] = cli_req[c].valid && cli_ready[c];
        if (accepted[c]) begin
          checks++;
          if (ddr_req.id != 2'(c) || ddr_req.addr != cli_req[c].addr || ddr_req.we != cli_req[c].we) failures++;
          if (!cli_req[c].we) expq[c].push_back(ddr.mem[cli_req[c].addr[9:0]]);
          else ddr.mem[cli_req[c].addr[9:0]] = cli_req[c].wdata; // model of the write
          served[c]++;
        end
        waitn[c] = (cli_req[c].valid && !cli_ready[c] && ddr_ready) ? waitn[c] + 1 : 0;
        checks++;
        if (waitn[c] > 2) failures++;
      end
    end
    repeat (10) @(posedge clk);
    for (int c = 0; c < 3; c++) begin
      checks++;
      if (expq[c].size() != 0 || served[c] < 100) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
