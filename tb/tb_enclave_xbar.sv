// tb_enclave_xbar: one enclave address map with four windows, each backed by
// a small target model that answers after a window-specific delay and
// returns its own id and the offset it received. Checks that every access
// reaches exactly the owning target with the base removed, that responses
// come back to the CPU, that addresses outside every window are refused
// with err one cycle later and reach no target, and that writes land only
// in the owning target.
module tb_enclave_xbar;
  import byot_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int unsigned NT = 4;
  localparam logic [NT-1:0][31:0] BASE = '{32'h4000_0000, 32'h2000_0000, 32'h0010_0000, 32'h0000_0000};
  localparam logic [NT-1:0][31:0] SIZE = '{32'h0000_1000, 32'h0020_0000, 32'h0000_2000, 32'h0002_0000};

  bus_req_t cpu_req;
  bus_rsp_t cpu_rsp;
  bus_req_t [NT-1:0] t_req;
  bus_rsp_t [NT-1:0] t_rsp;
  int hits [NT];
  logic [31:0] last_w [NT];

  enclave_xbar #(.NT(NT), .BASE(BASE), .SIZE(SIZE)) dut (.*);

  // target models: answer after (i+1) cycles with {id, offset[27:0]}
  for (genvar g = 0; g < NT; g++) begin : g_t
    logic [31:0] off;
    logic        we;
    logic [31:0] wd;
    int          cnt = 0;
    always @(posedge clk) begin
      t_rsp[g] <= BUS_RSP_IDLE;
      if (t_req[g].valid) begin
        hits[g]++;
        off <= t_req[g].addr; we <= t_req[g].we; wd <= t_req[g].wdata;
        cnt <= g + 1;
      end else if (cnt > 0) begin
        cnt <= cnt - 1;
        if (cnt == 1) begin
          t_rsp[g] <= '{ready: 1'b1, err: 1'b0, rdata: {4'(g), off[27:0]}};
          if (we) last_w[g] <= wd;
        end
      end
    end
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endfunction

  task automatic access(input logic [31:0] a, input logic we, input logic [31:0] wd,
                        output logic [31:0] rd, output logic er, output int lat);
    @(negedge clk);
    cpu_req = '{valid: 1'b1, we: we, addr: a, wdata: wd, be: 4'hF};
    @(negedge clk);
    cpu_req = BUS_REQ_IDLE;
    lat = 1;
    while (!cpu_rsp.ready) begin @(negedge clk); lat++; end
    rd = cpu_rsp.rdata; er = cpu_rsp.err;
  endtask

  initial begin
    logic [31:0] rd;
    logic er;
    int lat, prev_hits [NT];
    cpu_req = BUS_REQ_IDLE;
    for (int i = 0; i < NT; i++) hits[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      int tg;
      logic [31:0] off, a;
      tg  = $urandom_range(NT - 1);
      off = ($urandom % SIZE[tg]) & ~32'h3;
      a   = BASE[tg] + off;
      for (int i = 0; i < NT; i++) prev_hits[i] = hits[i];
      access(a, n[0], 32'(n), rd, er, lat);
      check(!er && rd == {4'(tg), off[27:0]}, "routed to owner with base removed");
      for (int i = 0; i < NT; i++)
        check(hits[i] == prev_hits[i] + (i == tg ? 1 : 0), "exactly one target selected");
      if (n[0]) check(last_w[tg] == 32'(n), "write data delivered");
    end
    // holes in the map
    foreach (BASE[i]) begin
      logic [31:0] holes [3];
      holes[0] = BASE[i] + SIZE[i];
      holes[1] = BASE[i] + SIZE[i] + 32'h100;
      holes[2] = BASE[i] - 4;
      for (int h = 0; h < 3; h++) begin
        logic hole;
        hole = 1'b1;
        for (int j = 0; j < NT; j++)
          if (holes[h] >= BASE[j] && holes[h] < BASE[j] + SIZE[j]) hole = 1'b0;
        if (hole) begin
          int tot0, tot1;
          tot0 = 0; tot1 = 0;
          for (int j = 0; j < NT; j++) tot0 += hits[j];
          access(holes[h], 1'b1, 32'hBAD0_0000, rd, er, lat);
          for (int j = 0; j < NT; j++) tot1 += hits[j];
          check(er && lat == 1, "unmapped address refused after one cycle");
          check(tot1 == tot0, "unmapped address reaches no target");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
