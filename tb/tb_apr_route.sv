// tb_apr_route: local delivery, SR instruction, table entry with VL
// escalation, dead-port redirection and out-of-range ports.
module tb_apr_route;
  import ub_pkg::*;
  flit_t fi, fo; ub_addr_t own; logic local_en; rt_entry_t ent;
  logic [15:0] dead; logic [15:0][6:0] alt; logic [6:0] port; logic used_sr, redir;
  int checks = 0, failures = 0;

  apr_route #(.NPORTS(16), .LOCAL_PORT(3), .HAS_LOCAL(1'b1)) dut (.flit_in(fi), .own_addr(own),
    .local_en, .tbl_entry(ent), .dead, .alt_port(alt), .out_port(port), .flit_out(fo),
    .used_sr, .redirected(redir));

  task automatic expect_route(input string what, input logic [6:0] ep, input logic evl, input logic esr, input logic ered);
    #1; checks++;
    if (port !== ep || fo.vl !== evl || used_sr !== esr || redir !== ered || fo.sr.ptr !== fi.sr.ptr + 4'd1 ||
        fo.payload !== fi.payload || fo.dst !== fi.dst) begin
      failures++; $display("FAIL %s: port %0d/%0d vl %b/%b sr %b redir %b", what, port, ep, fo.vl, evl, used_sr, redir);
    end
  endtask

  initial begin
    own = '{pod: 0, rrow: 1, rcol: 2, y: 3, x: 3};
    local_en = 1; dead = '0;
    for (int p = 0; p < 16; p++) alt[p] = 7'd11;
    fi = '0; fi.payload = 32'hcafe; fi.dst = own; ent = '{vl: 1'b0, port: 7'd5};
    expect_route("local", 7'd3, 1'b0, 1'b0, 1'b0);
    local_en = 0;
    expect_route("local disabled -> table", 7'd5, 1'b0, 1'b0, 1'b0);
    local_en = 1;
    fi.dst.x = 3'd6; ent = '{vl: 1'b1, port: 7'd6};
    expect_route("table with vl", 7'd6, 1'b1, 1'b0, 1'b0);
    fi.vl = 1'b1; ent = '{vl: 1'b0, port: 7'd6};
    expect_route("vl never drops", 7'd6, 1'b1, 1'b0, 1'b0);
    fi.vl = 1'b0;
    fi.sr.bitmap = 12'b1; fi.sr.ptr = 0; fi.sr.instr[0] = {1'b1, 7'd9};
    expect_route("sr", 7'd9, 1'b1, 1'b1, 1'b0);
    dead[9] = 1'b1;
    expect_route("sr to dead port", 7'd11, 1'b1, 1'b1, 1'b1);
    fi.sr = '0; ent = '{vl: 1'b0, port: 7'd100};
    expect_route("port out of range", 7'd11, 1'b0, 1'b0, 1'b1);
    ent = '{vl: 1'b0, port: 7'd9};
    expect_route("table to dead port", 7'd11, 1'b0, 1'b0, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #10000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
