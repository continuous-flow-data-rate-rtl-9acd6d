// tb_fcu: test of the fully connected unit.
//
// Instance A is the configuration of the FCU timing table (h = 5 neurons,
// j = 4 inputs, 8 features): with both groups offered back to back, the
// first group is taken in cycle 0, the five results must leave in cycles
// 7..11 (five cycles per group, then the input and output registers), one
// neuron per cycle in order, and the unit must be ready for the next
// vector exactly every 5 cycles. Instance B (h = 3, j = 2, 12 features)
// gets many vectors with random gaps. All results are compared with the
// dot products worked out here from the reference weight table.
module tb_fcu;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) if (rst_n) cyc <= cyc + 1;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int JA = 4, HA = 5, DA = 8, SA = 21, NBA = 3;
  localparam int JB = 2, HB = 3, DB = 12, SB = 22, NBB = 0, NVB = 40;
  localparam int AWA = 8 + 8 + 3, AWB = 8 + 8 + 4;

  logic va, ra, ova, vb, rb, ovb;
  logic signed [7:0] ina [JA], inb [JB];
  logic [2:0] ia; logic [1:0] ib;
  logic signed [AWA-1:0] ya; logic signed [AWB-1:0] yb;

  fcu #(.J(JA), .H(HA), .DIN(DA), .SEED(SA), .NBASE(NBA), .AW(AWA)) dut_a (
    .clk(clk), .rst_n(rst_n), .in_valid(va), .in_ready(ra), .in_data(ina),
    .out_valid(ova), .out_idx(ia), .out_data(ya));
  fcu #(.J(JB), .H(HB), .DIN(DB), .SEED(SB), .NBASE(NBB), .AW(AWB)) dut_b (
    .clk(clk), .rst_n(rst_n), .in_valid(vb), .in_ready(rb), .in_data(inb),
    .out_valid(ovb), .out_idx(ib), .out_data(yb));

  int xa [3][DA];
  int xb [NVB][DB];
  int t0 = -1, noa = 0, nob = 0, take_a [$];

  function automatic longint dot(int seed, int din, int neuron, int x []);
    longint s = 0;
    for (int k = 0; k < din; k++) s += longint'(ref_param(seed, neuron * din + k)) * x[k];
    return s;
  endfunction

  initial begin
    foreach (xa[v, k]) xa[v][k] = int'($signed(8'($urandom)));
    foreach (xb[v, k]) xb[v][k] = int'($signed(8'($urandom)));
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
  end

  initial begin  // driver A: groups back to back
    va = 0; ina = '{default: '0};
    @(posedge rst_n);
    for (int g = 0; g < 3 * DA / JA; g++) begin
      va = 1;
      for (int l = 0; l < JA; l++) ina[l] = 8'(xa[g / (DA / JA)][(g % (DA / JA)) * JA + l]);
      @(posedge clk);
      while (!ra) @(posedge clk);
      if (t0 < 0) t0 = cyc;
      take_a.push_back(cyc);
      #1;
    end
    va = 0;
  end

  initial begin  // checker A
    @(posedge rst_n);
    forever begin
      @(posedge clk); #1;
      if (ova) begin
        int v, n, x [];
        v = noa / HA; n = noa % HA;
        x = new[DA]; foreach (x[k]) x[k] = xa[v][k];
        checks += 2;
        if (int'(ia) != n || longint'(ya) != dot(SA, DA, NBA + n, x)) begin
          failures++;
          if (failures < 10) $display("A mismatch v=%0d n=%0d got=%0d", v, n, ya);
        end
        if (cyc - t0 != 7 + n + v * 2 * HA) begin
          failures++;
          $display("A result v=%0d n=%0d at cycle %0d, expected %0d", v, n, cyc - t0, 7 + n + v * 2 * HA);
        end
        noa++;
      end
    end
  end

  initial begin  // driver B: random gaps
    vb = 0; inb = '{default: '0};
    @(posedge rst_n);
    for (int g = 0; g < NVB * DB / JB; g++) begin
      while ($urandom_range(0, 2) == 0) begin vb = 0; @(posedge clk); #1; end
      vb = 1;
      for (int l = 0; l < JB; l++) inb[l] = 8'(xb[g / (DB / JB)][(g % (DB / JB)) * JB + l]);
      @(posedge clk);
      while (!rb) @(posedge clk);
      #1;
    end
    vb = 0;
  end

  initial begin  // checker B
    @(posedge rst_n);
    forever begin
      @(posedge clk); #1;
      if (ovb) begin
        int v, n, x [];
        v = nob / HB; n = nob % HB;
        x = new[DB]; foreach (x[k]) x[k] = xb[v][k];
        checks++;
        if (int'(ib) != n || longint'(yb) != dot(SB, DB, NBB + n, x)) begin
          failures++;
          if (failures < 10) $display("B mismatch v=%0d n=%0d got=%0d", v, n, yb);
        end
        nob++;
      end
    end
  end

  initial begin
    wait (noa == 3 * HA && nob == NVB * HB);
    repeat (20) @(posedge clk);
    checks += 2;
    for (int k = 1; k < take_a.size(); k++) if (take_a[k] - take_a[k-1] != HA) failures++;
    if (noa != 3 * HA || nob != NVB * HB) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
