// tb_write_ctrl -- checks the write control logic with N_h = 4, z1 = 4,
// z2 = 16 (G = 4).  A model FIFO offers G groups of tagged results
// (res_app / res_ex) with random gaps; rd_done is raised after a random delay.
// Writes are applied to model PVN-APP and H-EX memories.  After layer_done,
// for every group tau, sub-decoder l and entry j, L_app^PVN must sit at the
// P-VN it was read from, (l*G + tau + p_j) mod z2 of column set c_j, i.e.
// RAM v/G, address c_j*G + v mod G, and L_ex^H at RAM l, address
// (layer*G + tau)*d + j.  Also checked: no write before rd_done or from an
// empty FIFO, one pop per group, layer_done exactly once and on the last
// write, written-once flags naming the column sets written.
module tb_write_ctrl;
  localparam int R = 4, Z1 = 4, Z2 = 16, NH = 4, W_LLR = 8;
  localparam int D = 6, G = 4, L = 28, NC = 44;

  logic clk = 0, rst_n = 0, start = 0, rd_done = 0, fifo_empty = 1;
  logic [4:0] layer = 0;
  logic [D-1:0][5:0] col;
  logic [D-1:0][3:0] shift;
  logic [NH-1:0][D-1:0][W_LLR-1:0] res_app, res_ex;
  logic fifo_pop, app_we, ex_we, busy, layer_done;
  logic [7:0] app_addr_a, app_addr_b;
  logic [9:0] ex_addr_a, ex_addr_b;
  logic [NH-1:0][W_LLR-1:0] app_wd_a, app_wd_b, ex_wd_a, ex_wd_b;
  logic [1:0] flag_set;
  logic [1:0][5:0] flag_col;

  write_ctrl #(.R(R), .Z1(Z1), .Z2(Z2), .NH(NH)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, head = 0, ngroups = 0, ndone = 0;
  logic [W_LLR-1:0] app_mem [NH][NC * G];
  logic [W_LLR-1:0] ex_mem [NH][L * D * G];
  logic [NH-1:0][D-1:0][W_LLR-1:0] ga [G], ge [G];
  bit flagged [NC];

  assign res_app = ga[head % G];
  assign res_ex  = ge[head % G];

  always @(posedge clk) begin
    if ((app_we || ex_we) && (!rd_done || fifo_empty)) begin
      failures++; $display("write without rd_done or data");
    end
    if (app_we) for (int l = 0; l < NH; l++) begin
      app_mem[l][app_addr_a] <= app_wd_a[l];
      app_mem[l][app_addr_b] <= app_wd_b[l];
    end
    if (ex_we) for (int l = 0; l < NH; l++) begin
      ex_mem[l][ex_addr_a] <= ex_wd_a[l];
      ex_mem[l][ex_addr_b] <= ex_wd_b[l];
    end
    if (flag_set[0]) flagged[flag_col[0]] = 1;
    if (flag_set[1]) flagged[flag_col[1]] = 1;
    if (fifo_pop) head++;
    if (layer_done) begin
      ndone++;
      checks++;
      if (!fifo_pop || head != G) begin failures++; $display("layer_done not on the last write"); end
    end
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 80; t++) begin
      int cs[D], delay;
      for (int j = 0; j < D; j++) begin
        bit dup;
        do begin
          cs[j] = $urandom % NC;
          dup = 0;
          for (int f = 0; f < j; f++) if (cs[f] == cs[j]) dup = 1;
        end while (dup);
        col[j] = 6'(cs[j]);
        shift[j] = 4'($urandom);
      end
      for (int c = 0; c < NC; c++) flagged[c] = 0;
      layer = 5'($urandom % L);
      for (int g = 0; g < G; g++)
        for (int l = 0; l < NH; l++)
          for (int j = 0; j < D; j++) begin
            ga[g][l][j] = W_LLR'($urandom);
            ge[g][l][j] = W_LLR'($urandom);
          end
      head = 0; ndone = 0;
      @(negedge clk);
      start = 1; rd_done = 0; fifo_empty = 1;
      @(negedge clk);
      start = 0;
      delay = $urandom % 8;
      // offer the groups; rd_done comes after `delay` cycles
      for (int n = 0; n < 200 && ndone == 0; n++) begin
        if (n == delay) rd_done = 1;
        fifo_empty = (head >= G) || (($urandom % 4) == 0);
        @(negedge clk);
      end
      fifo_empty = 1;
      checks++;
      if (ndone != 1) begin failures++; $display("layer_done count %0d", ndone); end
      @(negedge clk);
      for (int g = 0; g < G; g++)
        for (int l = 0; l < NH; l++)
          for (int j = 0; j < D; j++) begin
            int v;
            v = (l * G + g + int'(shift[j])) % Z2;
            checks += 2;
            if (app_mem[v / G][int'(col[j]) * G + v % G] !== ga[g][l][j]) begin
              failures++;
              if (failures < 10) $display("APP grp %0d lane %0d entry %0d misplaced", g, l, j);
            end
            if (ex_mem[l][(int'(layer) * G + g) * D + j] !== ge[g][l][j]) begin
              failures++;
              if (failures < 10) $display("EX grp %0d lane %0d entry %0d misplaced", g, l, j);
            end
          end
      for (int j = 0; j < D; j++) begin
        checks++;
        if (!flagged[col[j]]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
