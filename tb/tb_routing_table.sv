// Self-checking test of routing_table. Tables of every node of a
// 64-node degree-4 and a 16-node degree-2 generalized Kautz network are read
// for every destination. An all-pairs distance matrix computed here by
// repeated relaxation checks that each entry is the local port for the node
// itself and otherwise a link to a neighbour one hop closer.
module tb_routing_table;
  import turbo_noc_pkg::*;
  int checks = 0, failures = 0;

  localparam int PA = 64, DA = 4;
  localparam int PB = 16, DB = 2;

  logic [DEST_W-1:0] dest;
  logic [PORT_W-1:0] port_a [PA];
  logic [PORT_W-1:0] port_b [PB];

  for (genvar n = 0; n < PA; n++) begin : g_a
    routing_table #(.P(PA), .D(DA), .NODE(n)) u (.dest(dest), .port_o(port_a[n]));
  end
  for (genvar n = 0; n < PB; n++) begin : g_b
    routing_table #(.P(PB), .D(DB), .NODE(n)) u (.dest(dest), .port_o(port_b[n]));
  end

  function automatic int nxt(int p, int d, int i, int k);
    return ((-(d * i + k + 1)) % p + p) % p;
  endfunction

  int dist_a [PA][PA];
  int dist_b [PB][PB];


  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit changed;
    // distances, network A
    for (int i = 0; i < PA; i++) for (int j = 0; j < PA; j++) dist_a[i][j] = (i == j) ? 0 : 1000;
    do begin
      changed = 0;
      for (int i = 0; i < PA; i++) for (int j = 0; j < PA; j++) for (int k = 0; k < DA; k++)
        if (dist_a[nxt(PA, DA, i, k)][j] + 1 < dist_a[i][j]) begin
          dist_a[i][j] = dist_a[nxt(PA, DA, i, k)][j] + 1; changed = 1;
        end
    end while (changed);
    for (int i = 0; i < PB; i++) for (int j = 0; j < PB; j++) dist_b[i][j] = (i == j) ? 0 : 1000;
    do begin
      changed = 0;
      for (int i = 0; i < PB; i++) for (int j = 0; j < PB; j++) for (int k = 0; k < DB; k++)
        if (dist_b[nxt(PB, DB, i, k)][j] + 1 < dist_b[i][j]) begin
          dist_b[i][j] = dist_b[nxt(PB, DB, i, k)][j] + 1; changed = 1;
        end
    end while (changed);

    for (int t = 0; t < PA; t++) begin
      dest = DEST_W'(t);
      #1;
      for (int n = 0; n < PA; n++) begin
        int pt;
        pt = int'(port_a[n]);
        checks++;
        if (n == t ? pt != DA : (pt >= DA || dist_a[nxt(PA, DA, n, pt)][t] != dist_a[n][t] - 1)) begin
          failures++;
          if (failures < 10) $display("A node %0d dest %0d port %0d", n, t, pt);
        end
      end
      if (t < PB) begin
        for (int n = 0; n < PB; n++) begin
          int pt;
          pt = int'(port_b[n]);
          checks++;
          if (n == t ? pt != DB : (pt >= DB || dist_b[nxt(PB, DB, n, pt)][t] != dist_b[n][t] - 1)) begin
            failures++;
            if (failures < 10) $display("B node %0d dest %0d port %0d", n, t, pt);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
