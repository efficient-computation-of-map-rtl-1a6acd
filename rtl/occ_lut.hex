000000000000000000000000
000000290000499a000637fd
0000005300003e6e000317f9
0000007d000037dd00020d4b
000000a70000332d000187f2
000000d200002f86000137ee
000000fd00002c8600010296
00000129000029f90000dc7a
00000156000027c00000bfe4
00000182000025c70000a9a7
000001b000002402000097dc
000001dd000022650000894d
0000020c000020ea00007d2a
0000023a00001f8b000072e4
0000026a00001e4400006a16
0000029a00001d1200006273
000002ca00001bf200005bc5
000002fb00001ae2000055df
0000032d000019e0000050a0
0000035f000018ea00004bee
0000039200001800000047b4
000003c60000171f000043e0
000003fa0000164800004065
0000042f0000157800003d38
00000464000014b000003a4d
0000049a000013ef0000379e
000004d10000133400003523
000005090000127f000032d7
00000542000011d0000030b5
0000057b0000112500002eb7
000005b50000107f00002cdc
000005f000000fdd00002b1f
0000062c00000f3f0000297d
0000066800000ea4000027f4
000006a600000e0d00002682
000006e400000d7900002524
0000072400000ce9000023da
0000076400000c5b000022a1
000007a600000bcf00002178
000007e900000b460000205f
0000082c00000abf00001f52
0000087100000a3b00001e53
000008b7000009b800001d5f
000008fe0000093700001c77
00000947000008b800001b98
000009910000083b00001ac3
000009dc000007bf000019f7
00000a280000074500001934
00000a76000006cc00001878
00000ac600000654000017c3
00000b17000005dd00001715
00000b6a000005680000166e
00000bbe000004f3000015cd
00000c150000047f00001531
00000c6d0000040c0000149b
00000cc70000039a0000140a
00000d23000003280000137d
00000d81000002b7000012f5
00000de10000024600001272
00000e44000001d6000011f2
00000ea90000016600001176
00000f11000000f6000010fe
00000f7b0000008700001089
00000fe80000001800001018
00001059ffffffa800000fa9
000010ccffffff3900000f3e
00001143fffffec900000ed5
000011bdfffffe5900000e6f
0000123bfffffde900000e0b
000012bdfffffd7900000da9
00001343fffffd0800000d4a
000013cefffffc9600000ced
0000145efffffc2300000c92
000014f3fffffbb000000c38
0000158efffffb3c00000be1
0000162efffffac600000b8b
000016d5fffffa4f00000b36
00001784fffff9d700000ae3
0000183afffff95d00000a91
000018f8fffff8e100000a41
000019c0fffff863000009f1
00001a92fffff7e2000009a2
00001b70fffff75f00000955
00001c5afffff6d900000908
00001d52fffff64f000008bb
00001e5bfffff5c10000086f
00001f75fffff52f00000823
000020a5fffff497000007d8
000021edfffff3fa0000078c
00002351fffff35500000740
000024d7fffff2a8000006f3
00002687fffff1f1000006a5
00002869fffff12d00000656
00002a8cfffff05a00000604
00002d04ffffef73000005b0
00002fefffffee7200000557
00003381ffffed4c000004f8
0000381bffffebed00000490
00003e98ffffea2d00000417
000049afffffe79100000379
00008000fffefe1c00000000
