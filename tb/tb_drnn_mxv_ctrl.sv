// tb_drnn_mxv_ctrl: sends random delta elements and end-of-step tokens to the
// MxV controller and checks that each delta produces NCH consecutive BRAM
// reads at idx*NCH+k, one per cycle, with the scheduled delta, gate memory
// (r, u, then candidate-input for x columns or candidate-hidden for h
// columns) and row offset appearing one cycle after each read; that an
// end-of-step token pulses act_start and that no element is taken until
// act_done.
module tb_drnn_mxv_ctrl;
  import drnn_pkg::*;
  localparam int unsigned NX = 6, NH = 8, NPE = 4, NCH = 6, CPG = 2;
  logic clk = 0, rst_n = 0, clear = 0;
  logic nz_valid, nz_ready, w_rd_en, s_valid, act_start, act_done;
  nz_t nz;
  logic [$clog2((NX+NH)*NCH)-1:0] w_rd_addr;
  q_t s_delta;
  gate_e s_gate;
  logic [$clog2(NH)-1:0] s_off;
  logic [31:0] n_chunks;
  int checks = 0, failures = 0;

  drnn_mxv_ctrl #(.NX(NX), .NH(NH), .NPE(NPE)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("fail: %s", what); end
  endtask

  initial begin
    int ndel;
    nz_valid = 0; nz = '0; act_done = 0; ndel = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      if ($urandom % 6 == 0) begin
        nz_valid = 1; nz = '0; nz.eot = 1;
        @(posedge clk); #1;
        chk(act_start, "act_start");
        @(negedge clk);
        nz_valid = 1; nz.eot = 0; nz.idx = '0;
        repeat (3 + $urandom % 5) begin
          #1 chk(!nz_ready && !w_rd_en, "waits for act_done");
          @(negedge clk);
        end
        act_done = 1; @(negedge clk); act_done = 0; nz_valid = 0;
      end else begin
        int idx, d;
        idx = $urandom % (NX + NH); d = int'($urandom % 2001) - 1000;
        nz_valid = 1; nz.eot = 0; nz.idx = ($bits(nz.idx))'(idx); nz.delta = q_t'(d);
        ndel++;
        for (int k = 0; k < NCH; k++) begin
          gate_e g;
          #1;
          chk(w_rd_en && int'(w_rd_addr) == idx * NCH + k, "read address");
          chk(nz_ready == (k == NCH - 1), "pop on last chunk");
          @(posedge clk); #1;
          g = (k / CPG == 2) ? ((idx >= NX) ? G_CH : G_CX) : gate_e'(k / CPG);
          chk(s_valid && int'(s_delta) == d && s_gate == g && int'(s_off) == (k % CPG) * NPE, "schedule");
          @(negedge clk);
        end
        nz_valid = 0;
        @(negedge clk);
        chk(!s_valid, "idle");
      end
    end
    chk(n_chunks == 32'(ndel * NCH), "chunk count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
