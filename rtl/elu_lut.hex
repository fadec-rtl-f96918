c005
c006
c006
c007
c007
c008
c008
c009
c009
c00a
c00a
c00b
c00c
c00c
c00d
c00e
c00f
c010
c011
c012
c013
c014
c016
c017
c019
c01a
c01c
c01e
c020
c022
c024
c026
c029
c02b
c02e
c031
c034
c038
c03b
c03f
c043
c047
c04c
c051
c056
c05c
c061
c068
c06e
c076
c07d
c085
c08e
c097
c0a1
c0ab
c0b6
c0c2
c0ce
c0dc
c0ea
c0f9
c109
c11a
c12c
c13f
c154
c16a
c181
c19a
c1b5
c1d1
c1ef
c20f
c231
c255
c27b
c2a4
c2d0
c2fe
c330
c364
c39c
c3d8
c417
c45b
c4a3
c4ef
c541
c598
c5f4
c656
c6bf
c72e
c7a5
c823
c8a9
c938
c9d1
ca73
cb1f
cbd7
cc9a
cd6a
ce48
cf34
d02f
d13a
d256
d385
d4c7
d61e
d78b
d910
daae
dc66
de3b
e02e
e242
e477
e6d1
e952
ebfd
eed3
f1d8
f50f
f87b
fc1f
