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
0001
0001
0001
0001
0001
0001
0001
0001
0001
0002
0002
0002
0002
0003
0003
0003
0004
0004
0005
0006
0006
0007
0008
0009
000a
000b
000d
000f
0010
0012
0015
0017
001a
001d
0020
0024
0028
002c
0031
0036
003c
0042
0048
004f
0056
005d
0064
006c
0074
007c
0084
008c
0094
009c
00a3
00aa
00b1
00b8
00be
00c4
00ca
00cf
00d4
00d8
00dc
00e0
00e3
00e6
00e9
00eb
00ee
00f0
00f1
00f3
00f5
00f6
00f7
00f8
00f9
00fa
00fa
00fb
00fc
00fc
00fd
00fd
00fd
00fe
00fe
00fe
00fe
00ff
00ff
00ff
00ff
00ff
00ff
00ff
00ff
00ff
0100
0100
0100
0100
0100
0100
0100
0100
0100
0100
0100
0100
0100
0100
ff00
ff00
ff00
ff00
ff00
ff00
ff00
ff00
ff00
ff00
ff00
ff00
ff00
ff00
ff00
ff00
ff00
ff00
ff00
ff00
ff00
ff00
ff00
ff00
ff00
ff00
ff00
ff00
ff00
ff00
ff00
ff00
ff00
ff00
ff00
ff00
ff01
ff01
ff01
ff01
ff01
ff02
ff02
ff03
ff04
ff05
ff06
ff08
ff0a
ff0d
ff11
ff16
ff1b
ff23
ff2c
ff37
ff44
ff54
ff67
ff7d
ff97
ffb3
ffd1
fff0
0010
002f
004d
0069
0083
0099
00ac
00bc
00c9
00d4
00dd
00e5
00ea
00ef
00f3
00f6
00f8
00fa
00fb
00fc
00fd
00fe
00fe
00ff
00ff
00ff
00ff
00ff
0100
0100
0100
0100
0100
0100
0100
0100
0100
0100
0100
0100
0100
0100
0100
0100
0100
0100
0100
0100
0100
0100
0100
0100
0100
0100
0100
0100
0100
0100
0100
0100
0100
0100
0100
0100
fd3a
fe53
fed6
ff2c
ff6d
ffa0
ffcb
ffef
0010
002c
0046
005d
0072
0086
0098
00a9
00b9
00c8
00d7
00e4
00f1
00fd
0109
0114
011f
0129
0133
013c
0145
014e
0157
015f
0167
016f
0176
017d
0185
018b
0192
0199
019f
01a5
01ac
01b1
01b7
01bd
01c3
01c8
01cd
01d3
01d8
01dd
01e2
01e6
01eb
01f0
01f4
01f9
01fd
0202
0206
020a
020e
0212
0216
021a
021e
0222
0226
0229
022d
0231
0234
0238
023b
023f
0242
0245
0249
024c
024f
0252
0255
0258
025b
025e
0261
0264
0267
026a
026d
0270
0273
0275
0278
027b
027d
0280
0283
0285
0288
028a
028d
028f
0292
0294
0297
0299
029b
029e
02a0
02a2
02a5
02a7
02a9
02ab
02ae
02b0
02b2
02b4
02b6
02b8
02bb
02bd
02bf
02c1
02c3
02c5
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
0001
0001
0001
0001
0001
0001
0001
0001
0001
0002
0002
0002
0002
0003
0003
0003
0004
0004
0005
0006
0006
0007
0008
0009
000b
000c
000e
000f
0011
0014
0016
0019
001d
0021
0025
002a
002f
0036
003d
0045
004e
0058
0064
0072
0081
0092
00a5
00bb
00d4
00f0
0111
0135
015e
018d
01c1
01fd
0241
028e
02e5
0347
03b7
0436
04c5
0568
0620
06f1
07de
08ea
0a1a
0b72
0cf8
0eb2
10a7
12de
1562
183a
1b74
1f1c
2340
27f2
2d43
334a
3a1f
41dc
4aa0
5490
5fd3
6c95
7b0a
7fff
7fff
7fff
7fff
7fff
7fff
7fff
7fff
7fff
7fff
7fff
7fff
7fff
7fff
7fff
7fff
7fff
7fff
7fff
7fff
7fff
7fff
7fff
7fff
7fff
