// tb_drnn_input_encoding: drives the input encoding unit over many time
// steps with slowly changing x and h vectors (h from a testbench array on the
// h_idx/h_data port) and checks the NZVL/NZ1L stream element by element
// against a reference that keeps its own last-sent values: a delta is sent
// exactly when |v - ref| > theta, with index j for x_j and NX+j for h_j, and
// each step ends with one end-of-step token. Random backpressure and x gaps.
module tb_drnn_input_encoding;
  import drnn_pkg::*;
  localparam int unsigned NX = 10, NH = 12, NXU = 7;
  localparam int THETA = 10;
  logic clk = 0, rst_n = 0, clear = 0;
  q_t theta, x_data, h_data;
  logic [$clog2(X+H)-1:0] n_x;
  logic x_valid, x_ready, h_ready, nz_valid, nz_ready;
  logic [$clog2(NH)-1:0] h_idx;
  nz_t nz;
  logic [31:0] n_sent, n_seen, n_steps;
  int checks = 0, failures = 0;

  drnn_input_encoding #(.NX(NX), .NH(NH)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int hv [NH];
  assign h_data = q_t'(hv[h_idx]);

  initial begin
    int x[NXU], xr[NXU], hr[NH], sent;
    typedef struct { bit eot; int d; int idx; } e_t;
    e_t e[$];
    theta = q_t'(THETA); n_x = ($bits(n_x))'(NXU);
    x_valid = 0; x_data = '0; h_ready = 1; nz_ready = 0;
    foreach (x[i]) begin x[i] = 0; xr[i] = 0; end
    foreach (hv[i]) begin hv[i] = 0; hr[i] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk) clear = 1; @(negedge clk) clear = 0;
    sent = 0;
    for (int t = 0; t < 30; t++) begin
      int got;
      e.delete();
      foreach (x[i]) x[i] += int'($urandom % 25) - 12;
      foreach (hv[i]) hv[i] += int'($urandom % 25) - 12;
      foreach (x[i]) if (x[i] - xr[i] > THETA || xr[i] - x[i] > THETA) begin
        e.push_back('{eot: 0, d: x[i] - xr[i], idx: i}); xr[i] = x[i];
      end
      foreach (hv[i]) if (hv[i] - hr[i] > THETA || hr[i] - hv[i] > THETA) begin
        e.push_back('{eot: 0, d: hv[i] - hr[i], idx: NX + i}); hr[i] = hv[i];
      end
      e.push_back('{eot: 1, d: 0, idx: 0});
      sent += e.size() - 1;
      got = 0;
      fork
        for (int i = 0; i < NXU; i++) begin
          @(negedge clk);
          repeat ($urandom % 2) @(negedge clk);
          x_valid = 1; x_data = q_t'(x[i]);
          do @(posedge clk); while (!x_ready);
          #1 x_valid = 0;
        end
        while (got < e.size()) begin
          @(negedge clk); nz_ready = ($urandom % 3) != 0;
          @(posedge clk);
          if (nz_valid && nz_ready) begin
            checks++;
            if (nz.eot != e[got].eot || (!nz.eot && (int'(nz.delta) != e[got].d || int'(nz.idx) != e[got].idx))) begin
              failures++;
              if (failures < 10) $display("t=%0d el %0d: eot %b d %0d idx %0d exp %0d %0d", t, got, nz.eot, nz.delta, nz.idx, e[got].d, e[got].idx);
            end
            got++;
          end
        end
      join
      #1 nz_ready = 0;
    end
    checks++; if (n_sent != 32'(sent) || n_seen != 32'(30 * (NXU + NH)) || n_steps != 32'd30) failures++;
    $display("sent %0d of %0d", sent, 30 * (NXU + NH));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
