5a5a
c465
6624
80e7
22a6
4d61
ef20
09e3
aba2
d5fd
742c
965f
30ae
52f9
fd28
1f1b
b9aa
db75
4514
e4d7
06b6
a071
c250
6c13
8fb2
29cd
4b1c
f54f
14be
b689
d0d8
720b
9dba
3e45
5804
fac7
64c6
8681
2740
4103
e382
0ddd
ae0c
c83f
6a4e
9499
36c8
573b
f18a
1355
bd74
df37
78d6
9a91
0470
a633
c792
61ad
83fc
2d2f
4f5e
e8a9
0af8
b42b
d59a
73a5
9264
3027
5ee6
fca1
1b60
b923
2762
45bd
e3ec
021f
a06e
ceb9
6ce8
8adb
29ea
57b5
f554
1317
b2f6
d0b1
7e90
9c53
3a72
598d
c7dc
650f
837e
2149
4098
eecb
0dfa
ab85
c844
7607
9406
32c1
5080
f143
1f42
bd9d
dbcc
79ff
e60e
0459
a288
c0fb
61ca
8f95
2db4
4b77
e916
16d1
b4b0
d273
7052
9e6d
3fbc
5def
fb1e
1969
86b8
24eb
45da
e7e5
09a4
a867
ca26
6ce1
8ea0
3163
5322
f57d
17ac
b9df
d82e
7a79
9ca8
3e9b
a02a
c3f5
6594
8757
2936
48f1
ead0
0c93
ae32
d04d
739c
95cf
373e
5909
fb58
1a8b
bd3a
dfc5
4184
e247
0446
a601
c8c0
6a83
8b02
2d5d
4f8c
f1bf
13ce
b419
d648
78bb
9a0a
3bd5
5df4
ffb7
6156
8311
24f0
46b3
e812
0a2d
ac7c
cdaf
6fde
9129
3378
54ab
f51a
1b25
b9e4
dfa7
7e66
9c21
02e0
a0a3
c6e2
653d
8b6c
299f
4fee
ee39
0c68
b25b
d06a
7635
95d4
3b97
5976
ff31
1d10
bcd3
22f2
400d
e65c
058f
abfe
c9c9
6f18
8d4b
2d7a
5305
f1c4
1787
b586
da41
7800
9ec3
3cc2
5d1d
c34c
617f
878e
25d9
4a08
e87b
0e4a
ac15
d234
73f7
9196
3751
5530
faf3
18d2
beed
dc3c
426f
e39e
01e9
a738
c56b
