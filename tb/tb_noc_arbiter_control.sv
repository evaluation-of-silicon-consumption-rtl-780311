// tb_noc_arbiter_control: random requests and output availability against a
// reference model of the priority list. Checks first grants after reset (mesh
// inputs NN, SS, EE, WW first), that a local input granted once waits behind all
// other requesters, and that a mesh input sends MESH_BURST+1 flits in a row.
module tb_noc_arbiter_control;
  import noc_pkg::*;
  localparam int unsigned MESH_BURST = 2;

  logic clk = 0, rst_n = 0;
  logic [NPORTS-1:0] req;
  logic out_free, grant_valid;
  logic [PORT_W-1:0] grant_idx;
  int checks = 0, failures = 0;

  noc_arbiter_control #(.MESH_BURST(MESH_BURST)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  int q[$];
  int cnt[8];
  function automatic bit mesh(int p);
    return p == 0 || p == 2 || p == 4 || p == 6;
  endfunction
  task automatic model_reset();
    q = '{0, 4, 2, 6, 1, 3, 5, 7};
    foreach (cnt[i]) cnt[i] = MESH_BURST;
  endtask
  // Returns granted port or -1; updates the model.
  function automatic int model_step(logic [7:0] r, bit free);
    int g = -1, gi = -1;
    foreach (q[i]) if (g < 0 && r[q[i]]) begin g = q[i]; gi = i; end
    if (g < 0 || !free) return -1;
    if (mesh(g) && cnt[g] > 0) cnt[g]--;
    else begin
      if (mesh(g)) cnt[g] = MESH_BURST;
      q.delete(gi);
      q.push_back(g);
    end
    return g;
  endfunction

  int exp_g;
  int run_len, last_g;
  int bursts_seen;

  initial begin
    req = '0; out_free = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    model_reset();
    // Directed: everybody requests, output always free.
    @(negedge clk);
    req = 8'hFF; out_free = 1;
    for (int k = 0; k < 3 * (MESH_BURST + 1) + 4; k++) begin
      #1;
      exp_g = model_step(req, out_free);
      check(grant_valid && grant_idx == 3'(exp_g), $sformatf("directed grant %0d exp %0d got %0d", k, exp_g, grant_idx));
      if (k <= MESH_BURST) check(grant_idx == 3'(PORT_NN), "NN holds the output for its burst");
      if (k == MESH_BURST + 1) check(grant_idx == 3'(PORT_SS), "SS next");
      @(negedge clk);
    end
    // A local input (NE) alone, then with others: after its grant it goes last.
    req = 8'b0000_0010;
    #1; exp_g = model_step(req, 1); check(grant_idx == 3'(PORT_NE) && grant_valid, "NE alone");
    @(negedge clk);
    req = 8'b1010_1010;  // NE, SE, SW, NW
    #1; exp_g = model_step(req, 1); check(grant_idx != 3'(PORT_NE), "NE waits behind others");
    @(negedge clk);
    // Output busy: no grant.
    out_free = 0; #1;
    exp_g = model_step(req, 0);
    check(!grant_valid, "no grant while output busy");
    @(negedge clk);
    // Random phase.
    last_g = -1; run_len = 0; bursts_seen = 0;
    for (int cyc = 0; cyc < 10000; cyc++) begin
      req = 8'($urandom);
      if ($urandom_range(0, 3) == 0) req = req | 8'h01;
      out_free = ($urandom_range(0, 4) != 0);
      #1;
      exp_g = model_step(req, out_free);
      check(grant_valid == (exp_g >= 0), "grant valid");
      if (exp_g >= 0) check(grant_idx == 3'(exp_g), $sformatf("grant idx exp %0d got %0d", exp_g, grant_idx));
      if (exp_g >= 0) begin
        if (exp_g == last_g) run_len++; else run_len = 1;
        if (mesh(exp_g) && run_len == MESH_BURST + 1) bursts_seen++;
        last_g = exp_g;
      end
      @(negedge clk);
    end
    check(bursts_seen > 0, "mesh burst seen in random phase");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
