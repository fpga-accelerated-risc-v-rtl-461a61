0000
0000
0000
0000
0000
0000
0000
0000
0000
0000
0000
0000
0000
0000
0000
0000
0000
0000
0000
0000
0000
0000
0000
0000
0000
ffff
ffff
ffff
ffff
ffff
ffff
ffff
ffff
ffff
ffff
ffff
ffff
fffe
fffe
fffe
fffe
fffe
fffe
fffd
fffd
fffd
fffd
fffc
fffc
fffc
fffb
fffb
fffb
fffa
fffa
fff9
fff9
fff8
fff8
fff7
fff7
fff6
fff6
fff5
fff4
fff4
fff3
fff2
fff1
fff1
fff0
ffef
ffee
ffed
ffec
ffeb
ffea
ffe9
ffe8
ffe7
ffe6
ffe5
ffe4
ffe3
ffe2
ffe1
ffe0
ffdf
ffde
ffdd
ffdc
ffdb
ffda
ffda
ffd9
ffd8
ffd7
ffd7
ffd6
ffd6
ffd5
ffd5
ffd5
ffd5
ffd4
ffd5
ffd5
ffd5
ffd5
ffd6
ffd7
ffd8
ffd9
ffda
ffdb
ffdc
ffde
ffe0
ffe2
ffe4
ffe6
ffe9
ffec
ffee
fff2
fff5
fff8
fffc
0000
0004
0008
000d
0012
0016
001c
0021
0026
002c
0032
0038
003e
0044
004b
0052
0059
0060
0067
006e
0075
007d
0085
008d
0094
009d
00a5
00ad
00b5
00be
00c6
00cf
00d7
00e0
00e9
00f2
00fa
0103
010c
0115
011e
0127
0130
0139
0142
014b
0154
015d
0166
016f
0178
0181
018a
0193
019c
01a5
01ae
01b7
01c0
01c9
01d1
01da
01e3
01ec
01f4
01fd
0206
020e
0217
021f
0228
0230
0239
0241
024a
0252
025b
0263
026b
0274
027c
0284
028d
0295
029d
02a5
02ae
02b6
02be
02c6
02ce
02d6
02df
02e7
02ef
02f7
02ff
0307
030f
0317
031f
0327
032f
0337
0340
0348
0350
0358
0360
0368
0370
0378
0380
0388
0390
0398
03a0
03a8
03b0
03b8
03c0
03c8
03d0
03d8
03e0
03e8
03f0
03f8
