// Testbench for collective_unit: four units (2x2 mesh, H = 16, so chunks of
// four elements) exchange flits through a behavioural network that accepts
// with random back-pressure and delivers each destination's flits in order
// after random delays. Each PE starts with a random partial (O, m, l), one of
// them empty (no local blocks), and the PEs start at different times.
// After done, a_x of PE(x, y) must equal row x's part of the attention output
// merged from all four partials in real numbers, and chunk_m/chunk_l the
// merged statistics. Two rounds are run.
module tb_collective_unit;
  import helios_pkg::*;
  localparam int MESH = 2, H = 16, NPE = MESH * MESH, CW = H / NPE;
  localparam int CRD = 1, FW = 4 * CRD + 1 + 64 + 32 * CW;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic          start    [NPE];
  acc_t          part_o   [NPE][H];
  acc_t          part_m   [NPE];
  acc_t          part_l   [NPE];
  logic          tx_valid [NPE];
  logic [FW-1:0] tx_data  [NPE];
  logic          tx_ready [NPE];
  logic          rx_valid [NPE];
  logic [FW-1:0] rx_data  [NPE];
  logic          rx_ready [NPE];
  logic          busy     [NPE];
  logic          done     [NPE];
  acc_t          a_x      [NPE][MESH * CW];
  acc_t          chunk_m  [NPE];
  acc_t          chunk_l  [NPE];

  for (genvar p = 0; p < NPE; p++) begin : g_pe
    collective_unit #(.MESH(MESH), .H(H)) u (
      .clk, .rst_n, .pos_x(CRD'(p / MESH)), .pos_y(CRD'(p % MESH)), .start(start[p]), .part_o(part_o[p]), .part_m(part_m[p]),
      .part_l(part_l[p]), .tx_valid(tx_valid[p]), .tx_data(tx_data[p]),
      .tx_ready(tx_ready[p]), .rx_valid(rx_valid[p]), .rx_data(rx_data[p]),
      .rx_ready(rx_ready[p]), .busy(busy[p]), .done(done[p]), .a_x(a_x[p]),
      .chunk_m(chunk_m[p]), .chunk_l(chunk_l[p]));
  end

  // network model
  logic [FW-1:0] netq [NPE][$];
  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p < NPE; p++) begin
      if (rx_valid[p] && rx_ready[p]) void'(netq[p].pop_front());
    end
    for (int p = 0; p < NPE; p++)
      if (tx_valid[p] && tx_ready[p]) begin
        int d;
        d = int'(tx_data[p][CRD-1:0]) * MESH + int'(tx_data[p][2*CRD-1:CRD]);
        netq[d].push_back(tx_data[p]);
      end
  end
  always @(negedge clk) begin
    for (int p = 0; p < NPE; p++) begin
      tx_ready[p] = ($urandom_range(0, 2) != 0);
      rx_valid[p] = (netq[p].size() > 0) && ($urandom_range(0, 2) != 0);
      rx_data[p]  = (netq[p].size() > 0) ? netq[p][0] : '0;
    end
  end

  function automatic real r(acc_t v); return $itor(v) / 65536.0; endfunction
  function automatic acc_t q(real v); return acc_t'($rtoi(v * 65536.0)); endfunction

  task automatic check(string what, real got, real exp, real tol);
    checks++;
    if ((got - exp > tol) || (exp - got > tol)) begin
      failures++;
      $display("FAIL %s got %f expected %f", what, got, exp);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real gm, gl, w [NPE], o [H];
    bit fin [NPE];
    for (int p = 0; p < NPE; p++) begin
      start[p] = 0; part_m[p] = FX_NEGINF; part_l[p] = '0;
      for (int i = 0; i < H; i++) part_o[p][i] = '0;
      tx_ready[p] = 0; rx_valid[p] = 0; rx_data[p] = '0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 2; round++) begin
      for (int p = 0; p < NPE; p++) begin
        part_m[p] = q(($itor($urandom_range(0, 800)) / 100.0) - 4.0);
        part_l[p] = q(1.0 + $itor($urandom_range(0, 3000)) / 100.0);
        for (int i = 0; i < H; i++) part_o[p][i] = q(($itor($urandom_range(0, 800)) / 100.0) - 4.0);
        if (p == 2 - round) begin
          part_m[p] = FX_NEGINF; part_l[p] = '0;
          for (int i = 0; i < H; i++) part_o[p][i] = '0;
        end
      end
      gm = -1.0e30;
      for (int p = 0; p < NPE; p++) if (part_l[p] != 0 && r(part_m[p]) > gm) gm = r(part_m[p]);
      gl = 0;
      for (int p = 0; p < NPE; p++) begin
        w[p] = (part_l[p] == 0) ? 0.0 : r(part_l[p]) * $exp(r(part_m[p]) - gm);
        gl += w[p];
      end
      for (int i = 0; i < H; i++) begin
        o[i] = 0;
        for (int p = 0; p < NPE; p++) o[i] += w[p] * r(part_o[p][i]);
        o[i] /= gl;
      end
      // staggered starts
      for (int p = 0; p < NPE; p++) fin[p] = 0;
      fork
        for (int p = 0; p < NPE; p++) begin
          automatic int pp = p;
          fork
            begin
              repeat (1 + 7 * pp) @(negedge clk);
              start[pp] = 1;
              @(negedge clk);
              start[pp] = 0;
              while (!done[pp]) @(negedge clk);
              fin[pp] = 1;
            end
          join_none
        end
      join
      wait (fin[0] && fin[1] && fin[2] && fin[3]);
      for (int p = 0; p < NPE; p++) begin
        int x;
        x = p / MESH;
        for (int i = 0; i < MESH * CW; i++)
          check($sformatf("round %0d pe %0d a_x[%0d]", round, p, i), r(a_x[p][i]), o[x * MESH * CW + i], 0.01);
        check("chunk_m", r(chunk_m[p]), gm, 0.001);
        check("chunk_l", r(chunk_l[p]), gl, 0.005 * gl);
      end
      repeat (5) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
