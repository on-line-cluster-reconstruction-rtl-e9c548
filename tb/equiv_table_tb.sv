// equiv_table_tb: allocates labels, links random pairs of roots and checks
// after every step that both read ports return the parent pointers of a
// model, that a link puts the larger root under the smaller one, and that
// parent[L] <= L holds for every allocated label.
module equiv_table_tb;
  localparam int N = 32, LW = 5;

  logic clk = 0;
  logic [LW-1:0] ra_label = '0, ra_parent, rb_label = '0, rb_parent;
  logic alloc = 0, link = 0;
  logic [LW-1:0] alloc_label = '0, link_a = '0, link_b = '0;
  int checks = 0, failures = 0;
  int par[N];
  int nalloc = 0;

  equiv_table #(.NLABELS(N), .LW(LW)) dut (.*);

  always #5 clk = ~clk;

  function automatic int root(int l);
    while (par[l] != l) l = par[l];
    return l;
  endfunction

  task automatic check_all();
    for (int l = 1; l <= nalloc; l++) begin
      @(negedge clk);
      ra_label = LW'(l);
      rb_label = LW'(nalloc + 1 - l);
      #1;
      checks++;
      if (ra_parent != LW'(par[l]) || rb_parent != LW'(par[nalloc + 1 - l]) ||
          par[l] > l) begin
        failures++;
        $display("FAIL label %0d parent %0d expected %0d; label %0d parent %0d expected %0d",
                 l, ra_parent, par[l], nalloc + 1 - l, rb_parent, par[nalloc + 1 - l]);
      end
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int rep = 0; rep < 4; rep++) begin
      nalloc = 0;
      for (int step = 0; step < 60; step++) begin
        @(negedge clk);
        alloc = 0;
        link  = 0;
        if (nalloc < 2 || (nalloc < N - 1 && $urandom_range(1) == 0)) begin
          nalloc++;
          alloc = 1;
          alloc_label = LW'(nalloc);
          par[nalloc] = nalloc;
        end else begin
          automatic int a = root($urandom_range(1, nalloc));
          automatic int b = root($urandom_range(1, nalloc));
          if (a != b) begin
            link = 1;
            link_a = LW'(a);
            link_b = LW'(b);
            if (a > b) par[a] = b; else par[b] = a;
          end
        end
        @(posedge clk);
        #1;
        alloc = 0;
        link  = 0;
        check_all();
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
